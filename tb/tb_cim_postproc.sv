// tb_cim_postproc: self-checking testbench of the CiM tile's ADC post-processing.
//
// It writes random per-column gains and offsets, streams random ADC vectors with random
// gaps, and checks each output column against y = sat_INT10(floor((adc*gain + 128) / 256)
// + offset) and the one-cycle latency. It also checks the reset state (gain 1.0, offset 0)
// passes the ADC codes through unchanged.
module tb_cim_postproc;
  localparam int COLS = 64;

  logic clk = 1'b0, rst = 1'b1;
  logic cfg_we, in_valid, out_valid;
  logic [5:0] cfg_col;
  logic signed [15:0] cfg_gain;
  logic signed [9:0] cfg_offset;
  logic signed [9:0] adc [COLS], y [COLS];
  int checks = 0, failures = 0;
  int g [COLS], o [COLS];

  cim_postproc #(.COLS(COLS)) dut (.clk, .rst, .cfg_we, .cfg_col, .cfg_gain, .cfg_offset,
                                   .in_valid, .adc, .out_valid, .y);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int expect_y(input int a, input int gg, input int oo);
    int p;
    p = ((a * gg + 128) >>> 8) + oo;
    if (p > 511) p = 511;
    if (p < -512) p = -512;
    return p;
  endfunction

  task automatic vec(input logic v);
    int a [COLS];
    for (int c = 0; c < COLS; c++) a[c] = int'($urandom % 1024) - 512;
    in_valid <= v;
    for (int c = 0; c < COLS; c++) adc[c] <= 10'(a[c]);
    @(posedge clk);
    #1;
    checks++;
    if (out_valid !== v) begin failures++; $display("out_valid wrong"); end
    if (v) for (int c = 0; c < COLS; c++) begin
      checks++;
      if (int'(y[c]) != expect_y(a[c], g[c], o[c])) begin
        failures++;
        if (failures < 10) $display("col %0d: %0d vs %0d", c, y[c], expect_y(a[c], g[c], o[c]));
      end
    end
  endtask

  initial begin
    cfg_we = 1'b0; cfg_col = '0; cfg_gain = '0; cfg_offset = '0; in_valid = 1'b0;
    for (int c = 0; c < COLS; c++) begin adc[c] = '0; g[c] = 256; o[c] = 0; end
    repeat (3) @(posedge clk);
    rst <= 1'b0;
    for (int i = 0; i < 5; i++) vec(1'b1);       // reset values: pass-through
    for (int c = 0; c < COLS; c++) begin
      g[c] = int'($urandom % 160) + 180;         // about 0.7 .. 1.33
      o[c] = int'($urandom % 41) - 20;
      cfg_we <= 1'b1; cfg_col <= 6'(c); cfg_gain <= 16'(g[c]); cfg_offset <= 10'(o[c]);
      @(posedge clk);
    end
    cfg_we <= 1'b0;
    for (int i = 0; i < 300; i++) vec(($urandom % 3) != 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
