// tb_dpu_lut: self-checking testbench of the DPU's lookup-table activation unit.
//
// It writes three piecewise-linear tables (sigmoid, tanh and swish: 32 segments of
// width 0.5 over [-8, 8)), then streams random inputs with random table selections and
// checks (1) every output bit for bit against a reference (segment choice, then one FMA
// x*slope + offset rounded once), (2) that the output approximates the real function
// within 0.03 (the chord error of 0.5-wide segments) inside [-8, 8), and (3) the latency of 4 cycles, the paper's LUT latency.
module tb_dpu_lut;
  import tb_util_pkg::*;

  localparam int LAT = 4;

  logic        clk = 1'b0, rst = 1'b1;
  logic        cfg_we;
  logic [1:0]  cfg_tab, tab_sel;
  logic [4:0]  cfg_seg;
  logic [15:0] cfg_slope, cfg_offset, x, y;
  logic        in_valid, out_valid;
  int          checks = 0, failures = 0, n_out = 0;

  dpu_lut dut (.clk, .rst, .cfg_we, .cfg_tab, .cfg_seg, .cfg_slope, .cfg_offset,
               .in_valid, .tab_sel, .x, .out_valid, .y);

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
  real         hr [$];
  logic        hin [$];

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
        if (hin[i] && fabs(h2r(y) - hr[i]) > 0.03) begin
          failures++;
          if (failures < 10) $display("approximation off: %f vs %f", h2r(y), hr[i]);
        end
      end
    end
  end

  task automatic feed(input logic v, input int tab, input real xr);
    logic [15:0] xh;
    xh = r2h(xr);
    in_valid <= v; tab_sel <= 2'(tab); x <= xh;
    hv.push_back(v);
    hy.push_back(lut_ref(tab, xh));
    hr.push_back(act_real(tab, h2r(xh)));
    hin.push_back(h2r(xh) >= -8.0 && h2r(xh) < 8.0);
    @(posedge clk);
  endtask

  initial begin
    cfg_we = 1'b0; cfg_tab = '0; cfg_seg = '0; cfg_slope = '0; cfg_offset = '0;
    in_valid = 1'b0; tab_sel = '0; x = '0;
    repeat (3) @(posedge clk);
    rst <= 1'b0;
    for (int t = 0; t < 3; t++)
      for (int s = 0; s < 32; s++) begin
        cfg_we <= 1'b1; cfg_tab <= 2'(t); cfg_seg <= 5'(s);
        cfg_slope <= pwl_slope(t, s); cfg_offset <= pwl_offset(t, s);
        @(posedge clk);
      end
    cfg_we <= 1'b0;
    // segment boundaries and the clamped ends
    for (int t = 0; t < 3; t++) begin
      feed(1'b1, t, -8.0); feed(1'b1, t, -7.75); feed(1'b1, t, 0.0); feed(1'b1, t, 0.5);
      feed(1'b1, t, -0.5); feed(1'b1, t, 7.99); feed(1'b1, t, 9.0); feed(1'b1, t, -12.0);
    end
    for (int i = 0; i < 3000; i++)
      feed(($urandom % 5) != 0, int'($urandom % 3),
           (real'($urandom % 20000) - 10000.0) / 1000.0);
    for (int i = 0; i < LAT + 2; i++) feed(1'b0, 0, 0.0);
    if (n_out < 2000) begin
      failures++;
      $display("too few outputs %0d", n_out);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
