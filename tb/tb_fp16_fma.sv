// tb_fp16_fma: self-checking testbench of the FP16 fused multiply-add unit.
//
// It feeds random operands (with random gaps in in_valid) and compares every result, bit
// for bit, with a double-precision reference rounded once to half precision (exact here,
// because the operand exponents are kept within a range where a*b+c fits a double). It
// also checks that each result comes out exactly LAT = 3 cycles after its operands (the
// DPU's ADD/MUL latency), that out_valid is never spurious, and a few directed cases
// (exact cancellation, subnormal results, rounding ties).
module tb_fp16_fma;
  import tb_util_pkg::*;

  localparam int LAT = 3;
  localparam int N   = 3000;

  logic        clk = 1'b0, rst = 1'b1;
  logic        in_valid;
  logic [15:0] a, b, c, y;
  logic        out_valid;
  int          checks = 0, failures = 0;

  fp16_fma dut (.clk, .rst, .in_valid, .a, .b, .c, .out_valid, .y);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expected result history, indexed by issue cycle
  logic        hv [$];
  logic [15:0] hy [$];

  function automatic logic [15:0] ref_fma(input logic [15:0] x, input logic [15:0] w,
                                          input logic [15:0] z);
    return r2h(h2r(x) * h2r(w) + h2r(z));
  endfunction

  task automatic drive(input logic v, input logic [15:0] x, input logic [15:0] w,
                       input logic [15:0] z);
    in_valid <= v; a <= x; b <= w; c <= z;
    hv.push_back(v);
    hy.push_back(ref_fma(x, w, z));
    @(posedge clk);
  endtask

  // check at every edge, after the DUT has updated
  int n_out = 0;
  always @(posedge clk) begin
    #1;
    if (!rst && hv.size() > LAT) begin
      logic ev;
      logic [15:0] ey;
      ev = hv[hv.size() - 1 - LAT];
      ey = hy[hy.size() - 1 - LAT];
      checks++;
      if (out_valid !== ev) begin
        failures++;
        $display("valid mismatch: got %0b expected %0b", out_valid, ev);
      end else if (ev) begin
        n_out++;
        checks++;
        if (y !== ey) begin
          failures++;
          if (failures < 10) $display("value mismatch: got %h expected %h", y, ey);
        end
      end
    end
  end

  initial begin
    in_valid = 1'b0; a = '0; b = '0; c = '0;
    repeat (3) @(posedge clk);
    rst <= 1'b0;
    // directed
    drive(1'b1, 16'h3C00, 16'h3C00, 16'hBC00);  // 1*1-1 = 0
    drive(1'b1, 16'h4000, 16'h4200, 16'h3C00);  // 2*3+1 = 7
    drive(1'b1, 16'h0200, 16'h3800, 16'h0000);  // subnormal * 0.5
    drive(1'b1, 16'h3C01, 16'h3C01, 16'h0000);  // rounding of (1+2^-10)^2
    drive(1'b1, 16'h3C00, 16'h3C00, 16'h1400);  // 1 + 2^-11: tie to even
    drive(1'b0, 16'h0, 16'h0, 16'h0);
    // random, products and sums within the normal range
    for (int i = 0; i < N; i++)
      drive(($urandom % 4) != 0, rand_h(8, 20), rand_h(8, 20), rand_h(2, 28));
    // random, small magnitudes: subnormal results
    for (int i = 0; i < 500; i++)
      drive(1'b1, rand_h(1, 9), rand_h(1, 9), rand_h(0, 3));
    for (int i = 0; i < LAT + 2; i++) drive(1'b0, 16'h0, 16'h0, 16'h0);
    if (n_out < N / 2) begin
      failures++;
      $display("too few results: %0d", n_out);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
