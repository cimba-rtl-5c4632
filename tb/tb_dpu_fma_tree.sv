// tb_dpu_fma_tree: self-checking testbench of the DPU's FMA adder tree (digital convolution).
//
// It streams random kernels of K = 5 activations, weights and a bias and checks every
// result bit for bit against a reference that rounds exactly where the tree does: the
// first level forms a_k*w_k (+bias in lane 0) with one rounding each, then pairs are added
// level by level, an odd element passing through unchanged. It also checks the result
// against the exact real sum (error at most 0.4% of the sum of the magnitudes of its terms) and the latency of 3*(1+ceil(log2 K))
// = 12 cycles, with one kernel accepted per cycle.
module tb_dpu_fma_tree;
  import tb_util_pkg::*;

  localparam int K   = 5;
  localparam int LAT = 12;

  logic        clk = 1'b0, rst = 1'b1;
  logic        in_valid, out_valid;
  logic [15:0] act [K], wgt [K];
  logic [15:0] bias, y;
  int          checks = 0, failures = 0, n_out = 0;

  dpu_fma_tree #(.K(K)) dut (.clk, .rst, .in_valid, .act, .wgt, .bias, .out_valid, .y);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic        hv [$];
  logic [15:0] hy [$];
  real         hr [$], hm [$];

  always @(posedge clk) begin
    #1;
    if (!rst && hv.size() > LAT) begin
      int i;
      i = hv.size() - 1 - LAT;
      checks++;
      if (out_valid !== hv[i]) begin
        failures++;
        $display("valid mismatch at %0d", i);
      end else if (hv[i]) begin
        n_out++;
        checks += 2;
        if (y !== hy[i]) begin
          failures++;
          if (failures < 10) $display("value mismatch: got %h expected %h", y, hy[i]);
        end
        if (fabs(h2r(y) - hr[i]) > 0.004 * hm[i]) begin
          failures++;
          if (failures < 10) $display("sum off: %f vs %f", h2r(y), hr[i]);
        end
      end
    end
  end

  task automatic feed(input logic v);
    logic [15:0] a [K], w [K], bb, lv [K];
    real exact, mag;
    int n;
    bb = rand_h(10, 17);
    exact = h2r(bb);
    mag = fabs(exact);
    for (int k = 0; k < K; k++) begin
      a[k] = rand_h(10, 17);
      w[k] = rand_h(10, 17);
      exact += h2r(a[k]) * h2r(w[k]);
      mag += fabs(h2r(a[k]) * h2r(w[k]));
      lv[k] = h_fma(a[k], w[k], (k == 0) ? bb : 16'h0000);
    end
    n = K;
    while (n > 1) begin
      for (int i = 0; i < n / 2; i++) lv[i] = r2h(h2r(lv[2*i]) + h2r(lv[2*i+1]));
      if (n % 2 == 1) lv[n / 2] = lv[n - 1];
      n = (n + 1) / 2;
    end
    in_valid <= v; bias <= bb;
    for (int k = 0; k < K; k++) begin act[k] <= a[k]; wgt[k] <= w[k]; end
    hv.push_back(v);
    hy.push_back(lv[0]);
    hr.push_back(exact);
    hm.push_back(mag);
    @(posedge clk);
  endtask

  initial begin
    in_valid = 1'b0; bias = '0;
    for (int k = 0; k < K; k++) begin act[k] = '0; wgt[k] = '0; end
    repeat (3) @(posedge clk);
    rst <= 1'b0;
    for (int i = 0; i < 3000; i++) feed(($urandom % 4) != 0);
    for (int i = 0; i < LAT + 2; i++) feed(1'b0);
    if (n_out < 2000) begin
      failures++;
      $display("too few outputs %0d", n_out);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
