// tb_cim_tile: self-checking testbench of the behavioural CiM tile model.
//
// It programs every unit cell with random G+/G- levels, sets the input and ADC shifts and
// the post-processing of some columns, then runs several vector-matrix multiplications
// with random INT10 inputs. Each result column is compared with an integer reference
// (PWM saturation to 8 bits, exact dot product with w = G+ - G-, ADC shift and
// saturation, gain/offset correction). It checks that done comes exactly VMM_LAT = 40
// cycles after start (the paper's VMM latency), that busy covers the operation and that
// a start while busy is ignored. The tile is reduced to 128 x 128 cells to keep the
// programming phase short; the timing does not depend on the size.
module tb_cim_tile;
  localparam int R = 128, C = 128, LAT = 40;

  logic clk = 1'b0, rst = 1'b1;
  logic cfg_we, start, busy, done;
  logic [19:0] cfg_addr;
  logic [31:0] cfg_data;
  logic signed [9:0] in_vec [R], out_vec [C];
  int checks = 0, failures = 0;
  int gp [R][C], gm [R][C], gain [C], offs [C];

  cim_tile #(.ROWS(R), .COLS(C)) dut (.clk, .rst, .cfg_we, .cfg_addr, .cfg_data, .start,
                                      .in_vec, .busy, .done, .out_vec);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int sat(input int v, input int lo, input int hi);
    return (v < lo) ? lo : (v > hi) ? hi : v;
  endfunction

  task automatic cfg(input logic [19:0] a, input logic [31:0] d);
    cfg_we <= 1'b1; cfg_addr <= a; cfg_data <= d;
    @(posedge clk);
  endtask

  task automatic vmm(input int in_sh, input int adc_sh);
    int x [R];
    int acc, e, n;
    for (int r = 0; r < R; r++) x[r] = int'($urandom % 1024) - 512;
    start <= 1'b1;
    for (int r = 0; r < R; r++) in_vec[r] <= 10'(x[r]);
    @(posedge clk);
    start <= 1'b0;
    n = 0;
    // a second start during the operation must be ignored
    for (int r = 0; r < R; r++) in_vec[r] <= '0;
    #1;
    checks++;
    if (!busy) begin failures++; $display("not busy after start"); end
    while (!done) begin
      if (n == 5) start <= 1'b1;
      @(posedge clk);
      start <= 1'b0;
      #1;
      n++;
      if (n > 200) break;
    end
    checks++;
    if (n != LAT) begin
      failures++;
      $display("done %0d cycles after start, expected %0d", n, LAT);
    end
    for (int c = 0; c < C; c++) begin
      acc = 0;
      for (int r = 0; r < R; r++) acc += sat(x[r] >>> in_sh, -128, 127) * (gp[r][c] - gm[r][c]);
      e = sat(acc >>> adc_sh, -512, 511);
      e = sat(((e * gain[c] + 128) >>> 8) + offs[c], -512, 511);
      checks++;
      if (int'(out_vec[c]) != e) begin
        failures++;
        if (failures < 10) $display("column %0d: %0d vs %0d", c, out_vec[c], e);
      end
    end
    @(posedge clk);
    checks++;
    if (busy) begin failures++; $display("busy after done"); end
  endtask

  initial begin
    cfg_we = 1'b0; cfg_addr = '0; cfg_data = '0; start = 1'b0;
    for (int r = 0; r < R; r++) in_vec[r] = '0;
    repeat (3) @(posedge clk);
    rst <= 1'b0;
    for (int r = 0; r < R; r++)
      for (int c = 0; c < C; c++) begin
        gp[r][c] = int'($urandom % 16);
        gm[r][c] = int'($urandom % 16);
        cfg(20'((r << 7) | c), 32'((gm[r][c] << 4) | gp[r][c]));
      end
    for (int c = 0; c < C; c++) begin gain[c] = 256; offs[c] = 0; end
    for (int c = 0; c < C; c += 3) begin
      gain[c] = int'($urandom % 128) + 200;
      offs[c] = int'($urandom % 21) - 10;
      cfg(20'h80000 | 20'(c), 32'((offs[c] & 10'h3FF) << 16 | gain[c]));
    end
    cfg(20'hC0000, 32'h0000_0601);   // in_shift 1, adc_shift 6
    cfg_we <= 1'b0;
    for (int i = 0; i < 4; i++) vmm(1, 6);
    cfg(20'hC0000, 32'h0000_0800);   // in_shift 0, adc_shift 8
    cfg_we <= 1'b0;
    for (int i = 0; i < 3; i++) vmm(0, 8);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
