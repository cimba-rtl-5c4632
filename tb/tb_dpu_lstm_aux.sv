// tb_dpu_lstm_aux: self-checking testbench of the DPU's LSTM auxiliary datapath.
//
// It programs the sigmoid and tanh tables, then streams random hidden units (four INT10
// gate pre-activations, per-gate scale and bias, previous cell state) one per cycle with
// random gaps. A step-by-step reference, rounding to binary16 after every operation as
// the hardware does, gives the expected new cell state and INT10 hidden state, which are
// compared bit for bit, together with their indices. It checks that c leaves after 15
// cycles and h after 25 cycles (the paper's LSTM auxiliary latency) at a rate of one unit
// per cycle, and, loosely, that h matches the exact LSTM equations in real arithmetic.
module tb_dpu_lstm_aux;
  import tb_util_pkg::*;

  localparam int LAT_C = 15;
  localparam int LAT_H = 25;

  logic        clk = 1'b0, rst = 1'b1;
  logic        cfg_we;
  logic [1:0]  cfg_tab;
  logic [4:0]  cfg_seg;
  logic [15:0] cfg_slope, cfg_offset, out_scale;
  logic        in_valid;
  logic [8:0]  in_idx;
  logic signed [9:0] gate [4];
  logic [15:0] scale [4], bias [4], c_prev;
  logic        c_valid, h_valid;
  logic [8:0]  c_idx, h_idx;
  logic [15:0] c_out;
  logic signed [9:0] h_out;
  int          checks = 0, failures = 0, n_h = 0, n_c = 0;

  dpu_lstm_aux dut (.clk, .rst, .cfg_we, .cfg_tab, .cfg_seg, .cfg_slope, .cfg_offset,
                    .out_scale, .in_valid, .in_idx, .gate, .scale, .bias, .c_prev,
                    .c_valid, .c_idx, .c_out, .h_valid, .h_idx, .h_out);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic        hv [$];
  logic [8:0]  hidx [$];
  logic [15:0] hc [$];
  int          hh [$];
  real         hreal [$];

  always @(posedge clk) begin
    #1;
    if (!rst && hv.size() > LAT_H) begin
      int i;
      i = hv.size() - 1 - LAT_H;
      checks++;
      if (h_valid !== hv[i]) begin
        failures++;
        $display("h_valid mismatch at %0d", i);
      end else if (hv[i]) begin
        n_h++;
        checks += 3;
        if (int'(h_out) != hh[i] || h_idx !== hidx[i]) begin
          failures++;
          if (failures < 10) $display("h mismatch: got %0d/%0d expected %0d/%0d", h_out, h_idx, hh[i], hidx[i]);
        end
        if (fabs(real'(h_out) - hreal[i]) > 8.0) begin
          failures++;
          if (failures < 10) $display("h far from exact LSTM: %0d vs %f", h_out, hreal[i]);
        end
      end
    end
    if (!rst && hv.size() > LAT_C) begin
      int i;
      i = hv.size() - 1 - LAT_C;
      checks++;
      if (c_valid !== hv[i]) begin
        failures++;
        $display("c_valid mismatch at %0d", i);
      end else if (hv[i]) begin
        n_c++;
        checks++;
        if (c_out !== hc[i] || c_idx !== hidx[i]) begin
          failures++;
          if (failures < 10) $display("c mismatch: got %h expected %h", c_out, hc[i]);
        end
      end
    end
  end

  logic [15:0] osc;

  task automatic feed(input logic v, input int idx);
    logic signed [9:0] g [4];
    logic [15:0] s [4], b [4], z [4], a [4], cp, ig, cn, tc, h, hs;
    real zr [4], ar [4], cr;
    cp = r2h((real'($urandom % 2000) - 1000.0) / 500.0);
    for (int k = 0; k < 4; k++) begin
      g[k] = 10'($urandom);
      s[k] = r2h(real'($urandom % 1000 + 10) / 40000.0);
      b[k] = r2h((real'($urandom % 1000) - 500.0) / 1000.0);
      z[k] = h_fma(r2h(real'(g[k])), s[k], b[k]);
      a[k] = lut_ref((k == 2) ? 1 : 0, z[k]);
      zr[k] = real'(g[k]) * h2r(s[k]) + h2r(b[k]);
      ar[k] = act_real((k == 2) ? 1 : 0, zr[k]);
    end
    ig = h_fma(a[0], a[2], 16'h0000);
    cn = h_fma(a[1], cp, ig);
    tc = lut_ref(1, cn);
    h  = h_fma(a[3], tc, 16'h0000);
    hs = h_fma(h, osc, 16'h0000);
    cr = ar[1] * h2r(cp) + ar[0] * ar[2];
    in_valid <= v; in_idx <= 9'(idx); c_prev <= cp;
    for (int k = 0; k < 4; k++) begin gate[k] <= g[k]; scale[k] <= s[k]; bias[k] <= b[k]; end
    hv.push_back(v);
    hidx.push_back(9'(idx));
    hc.push_back(cn);
    hh.push_back(r2i10(h2r(hs)));
    hreal.push_back(ar[3] * act_real(1, cr) * h2r(osc));
    @(posedge clk);
  endtask

  initial begin
    cfg_we = 1'b0; cfg_tab = '0; cfg_seg = '0; cfg_slope = '0; cfg_offset = '0;
    in_valid = 1'b0; in_idx = '0; c_prev = '0;
    for (int k = 0; k < 4; k++) begin gate[k] = '0; scale[k] = '0; bias[k] = '0; end
    osc = r2h(200.0);
    out_scale = osc;
    repeat (3) @(posedge clk);
    rst <= 1'b0;
    for (int t = 0; t < 2; t++)
      for (int s = 0; s < 32; s++) begin
        cfg_we <= 1'b1; cfg_tab <= 2'(t); cfg_seg <= 5'(s);
        cfg_slope <= pwl_slope(t, s); cfg_offset <= pwl_offset(t, s);
        @(posedge clk);
      end
    cfg_we <= 1'b0;
    for (int i = 0; i < 2000; i++) feed(($urandom % 4) != 0, i % 512);
    for (int i = 0; i < LAT_H + 2; i++) feed(1'b0, 0);
    if (n_h < 1200 || n_c < 1200) begin
      failures++;
      $display("too few outputs %0d %0d", n_h, n_c);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
