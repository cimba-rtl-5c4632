// tb_dpu: self-checking testbench of the Digital Processing Unit.
//
// With 64 lanes and small SRAM banks, it loads the LUT tables (sigmoid, tanh, swish),
// random parameters and initial cell states through the configuration port, then runs
// operations in all three modes, switching modes between them:
//   DCONV    random INT10 signal, K = 5 taps, several channels and strides;
//   CONV_AUX random INT10 vector, per-channel scale and bias, swish or sigmoid;
//   LSTM     two timesteps in a row, so the second uses the cell states the first wrote.
// Each result lane is compared bit for bit with a reference built from binary16
// operations rounded like the hardware (tb_util_pkg); lanes outside the output range must
// keep their value. The cycle count from start to done is checked against the pipeline
// depth of each mode plus one cycle per element (one element per cycle).
module tb_dpu;
  import tb_util_pkg::*;
  import cimba_pkg::*;

  localparam int LN = 64, PD = 64, CD = 32, K = 5;
  // cycles from the start edge to done beyond one per element: SRAM read 1, then
  // CONV_AUX 1 + 3 + 4, DCONV 1 + 12 + 4, LSTM 25
  localparam int EXTRA_AUX = 9, EXTRA_DCONV = 18, EXTRA_LSTM = 26;

  logic clk = 1'b0, rst = 1'b1;
  logic cfg_we, start, busy, done;
  logic [15:0] cfg_addr;
  logic [31:0] cfg_data;
  logic signed [9:0] in_vec [LN], out_vec [LN];
  dpu_cmd_t cmd;
  int checks = 0, failures = 0;
  int n_dconv = 0, n_aux = 0, n_lstm = 0, n_switch = 0;
  logic [15:0] pm [PD][8], cm [CD], osc;

  dpu #(.LANES(LN), .PARAM_DEPTH(PD), .CELL_DEPTH(CD)) dut (
    .clk, .rst, .cfg_we, .cfg_addr, .cfg_data, .in_vec, .start, .cmd, .busy, .done, .out_vec
  );

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic cfg(input logic [15:0] a, input logic [31:0] d);
    cfg_we <= 1'b1; cfg_addr <= a; cfg_data <= d;
    @(posedge clk);
  endtask

  function automatic logic [15:0] tree_ref(input logic [15:0] a [K], input logic [15:0] w [K],
                                           input logic [15:0] b);
    logic [15:0] lv [K];
    int n;
    for (int k = 0; k < K; k++) lv[k] = h_fma(a[k], w[k], (k == 0) ? b : 16'h0000);
    n = K;
    while (n > 1) begin
      for (int i = 0; i < n / 2; i++) lv[i] = r2h(h2r(lv[2*i]) + h2r(lv[2*i+1]));
      if (n % 2 == 1) lv[n / 2] = lv[n - 1];
      n = (n + 1) / 2;
    end
    return lv[0];
  endfunction

  // run one operation and compare; ev holds the expected full output vector
  dpu_mode_e last_mode = DPU_CONV_AUX;
  task automatic run(input dpu_cmd_t c, input int x [LN], input int ev [LN], input int extra);
    int n;
    cmd <= c;
    for (int l = 0; l < LN; l++) in_vec[l] <= 10'(x[l]);
    start <= 1'b1;
    @(posedge clk);
    start <= 1'b0;
    for (int l = 0; l < LN; l++) in_vec[l] <= '0;   // the DPU latched its input
    n = 0;
    do begin
      @(posedge clk);
      #1;
      n++;
    end while (!done && n < 2000);
    checks++;
    if (n != int'(c.count) + extra) begin
      failures++;
      $display("mode %0d: done after %0d cycles, expected %0d", c.mode, n, int'(c.count) + extra);
    end
    for (int l = 0; l < LN; l++) begin
      checks++;
      if (int'(out_vec[l]) != ev[l]) begin
        failures++;
        if (failures < 12) $display("mode %0d lane %0d: %0d vs %0d", c.mode, l, out_vec[l], ev[l]);
      end
    end
    if (c.mode != last_mode) n_switch++;
    last_mode = c.mode;
  endtask

  int cur [LN];                              // model of out_vec

  task automatic do_dconv(input int nch, input int stride, input int tab);
    dpu_cmd_t c;
    int x [LN], npos, cnt;
    logic [15:0] a [K], w [K];
    for (int l = 0; l < LN; l++) x[l] = int'($urandom % 256) - 128;
    npos = (LN - 8 - K) / stride + 1;
    if (npos * nch > 40) npos = 40 / nch;
    cnt = npos * nch;
    c = '0;
    c.mode = DPU_DCONV; c.act_tab = 2'(tab); c.count = OFF_W'(cnt); c.in_off = OFF_W'(3);
    c.out_off = OFF_W'(7); c.pbase = OFF_W'(4); c.nch = OFF_W'(nch); c.stride = 4'(stride);
    for (int i = 0; i < cnt; i++) begin
      int ch, p;
      ch = i % nch;
      p = i / nch;
      for (int k = 0; k < K; k++) begin
        int li;
        li = 3 + p * stride + k;
        a[k] = r2h(real'((li < LN) ? x[li] : 0));
        w[k] = pm[4 + ch][k];
      end
      if (7 + i < LN) cur[7 + i] = r2i10(h2r(lut_ref(tab, tree_ref(a, w, pm[4 + ch][K]))));
    end
    run(c, x, cur, EXTRA_DCONV);
    n_dconv++;
  endtask

  task automatic do_aux(input int nch, input int tab);
    dpu_cmd_t c;
    int x [LN], cnt, off;
    for (int l = 0; l < LN; l++) x[l] = int'($urandom % 1024) - 512;
    cnt = int'($urandom % 30) + 10;
    off = int'($urandom % (LN - cnt));
    c = '0;
    c.mode = DPU_CONV_AUX; c.act_tab = 2'(tab); c.count = OFF_W'(cnt); c.in_off = OFF_W'(2);
    c.out_off = OFF_W'(off); c.pbase = OFF_W'(20); c.nch = OFF_W'(nch);
    for (int i = 0; i < cnt; i++) begin
      int ch;
      ch = i % nch;
      cur[off + i] = r2i10(h2r(lut_ref(tab, h_fma(r2h(real'(x[2 + i])), pm[20 + ch][0], pm[20 + ch][1]))));
    end
    run(c, x, cur, EXTRA_AUX);
    n_aux++;
  endtask

  task automatic do_lstm(input int nh);
    dpu_cmd_t c;
    int x [LN];
    logic [15:0] z [4], g [4], cn, tc, h;
    for (int l = 0; l < LN; l++) x[l] = int'($urandom % 1024) - 512;
    c = '0;
    c.mode = DPU_LSTM; c.count = OFF_W'(nh); c.in_off = OFF_W'(0); c.out_off = OFF_W'(40);
    c.pbase = OFF_W'(30);
    for (int j = 0; j < nh; j++) begin
      for (int q = 0; q < 4; q++) begin
        z[q] = h_fma(r2h(real'(x[4 * j + q])), pm[30 + j][2 * q], pm[30 + j][2 * q + 1]);
        g[q] = lut_ref((q == 2) ? 1 : 0, z[q]);
      end
      cn = h_fma(g[1], cm[j], h_fma(g[0], g[2], 16'h0000));
      tc = lut_ref(1, cn);
      h  = h_fma(h_fma(g[3], tc, 16'h0000), osc, 16'h0000);
      cm[j] = cn;
      cur[40 + j] = r2i10(h2r(h));
    end
    run(c, x, cur, EXTRA_LSTM);
    n_lstm++;
  endtask

  initial begin
    cfg_we = 1'b0; cfg_addr = '0; cfg_data = '0; start = 1'b0; cmd = '0;
    for (int l = 0; l < LN; l++) begin in_vec[l] = '0; cur[l] = 0; end
    repeat (3) @(posedge clk);
    rst <= 1'b0;
    @(posedge clk);
    for (int t = 0; t < 3; t++)
      for (int s = 0; s < 32; s++)
        cfg(16'h8000 | 16'(t << 5) | 16'(s), {pwl_slope(t, s), pwl_offset(t, s)});
    for (int r = 0; r < PD; r++)
      for (int wd = 0; wd < 8; wd++) begin
        if (r < 20)      pm[r][wd] = r2h((real'($urandom % 2000) - 1000.0) / 20000.0);  // conv
        else if (r < 30) pm[r][wd] = (wd == 0) ? r2h(real'($urandom % 1000 + 100) / 40000.0)
                                               : r2h((real'($urandom % 1000) - 500.0) / 500.0);
        else             pm[r][wd] = (wd % 2 == 0) ? r2h(real'($urandom % 1000 + 10) / 60000.0)
                                                   : r2h((real'($urandom % 1000) - 500.0) / 1000.0);
        cfg(16'((r << 3) | wd), 32'(pm[r][wd]));
      end
    for (int j = 0; j < CD; j++) begin
      cm[j] = r2h((real'($urandom % 2000) - 1000.0) / 1000.0);
      cfg(16'hA000 | 16'(j), 32'(cm[j]));
    end
    osc = r2h(100.0);
    cfg(16'hC000, 32'(osc));
    cfg_we <= 1'b0;
    @(posedge clk);

    do_dconv(1, 1, 2);
    do_aux(4, 2);
    do_dconv(4, 5, 2);
    do_lstm(6);
    do_lstm(6);
    do_aux(3, 0);
    do_dconv(2, 2, 0);
    for (int i = 0; i < 6; i++) begin
      case ($urandom % 3)
        0: do_dconv(int'($urandom % 4) + 1, int'($urandom % 5) + 1, 2);
        1: do_aux(int'($urandom % 8) + 1, int'($urandom % 3));
        default: do_lstm(int'($urandom % 6) + 1);
      endcase
    end
    checks++;
    if (n_dconv == 0 || n_aux == 0 || n_lstm < 2 || n_switch < 3) begin
      failures++;
      $display("mode coverage dconv %0d aux %0d lstm %0d switches %0d", n_dconv, n_aux, n_lstm, n_switch);
    end
    $display("dconv %0d aux %0d lstm %0d mode switches %0d", n_dconv, n_aux, n_lstm, n_switch);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
