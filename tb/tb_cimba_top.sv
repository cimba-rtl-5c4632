// tb_cimba_top: end-to-end testbench of the CiMBA accelerator (reduced size).
//
// With 32 mesh lanes, 8 signal-buffer channels of 64 samples and small DPU banks, it
// configures three DPUs, two CiM tiles and the decoder's neighbourhood through the
// configuration bus, streams raw samples in through the IO ports and then, timestep by
// timestep, runs a small basecaller through the whole chip under a static schedule:
//   signal buffer (0,0) --Y, multicast--> DPU (1,0) digital conv and DPU (3,0) conv aux
//   DPU (1,0) lanes 0-7 + DPU (3,0) lanes 8-15 --Y, concatenated--> CiM (2,0) VMM (gates)
//   CiM (2,0) --X, turn at (2,1)--> DPU (3,1) LSTM auxiliary (4 hidden units)
//   DPU (3,1) --Y--> CiM (4,1) VMM (20 transition scores)
//   CiM (4,1) --X, turn at (4,0)--> LA decoder (5,0): one timestep
// Every stage is checked against a reference computed from the values the stage actually
// received (signal-buffer conversion, DPU binary16 flows, CiM integer VMM), every mesh
// delivery against the sender's vector, the decoder's steps against the number of
// timesteps, and the cycle counts of the buffer read, the CiM VMM (40) and the DPU
// operations. Mechanisms counted (each must occur): buffer overflow, multicast,
// concatenation, X-to-Y turns, each DPU mode, CiM VMMs, decoder steps (emitted bases and
// stays are counted and reported) and a mesh conflict.
module tb_cimba_top;
  import tb_util_pkg::*;
  import cimba_pkg::*;

  localparam int NR = 6, NC = 4, LN = 32, PD = 64, CD = 32, SCH = 8, SD = 64, K = 5;
  localparam int T = 16;                     // timesteps
  localparam int CB = 5;                     // log2(LN): CiM column address bits

  logic clk = 1'b0, rst = 1'b1;
  mesh_cmd_t node_cmd [NR][NC];
  unit_cmd_t unit_cmd [NR][NC];
  logic cfg_we;
  logic [2:0] cfg_row;
  logic [1:0] cfg_col;
  logic [19:0] cfg_addr;
  logic [31:0] cfg_data;
  logic io_wr_valid;
  logic [2:0] io_wr_ch;
  logic [15:0] io_wr_sample;
  logic unit_busy [NR][NC], unit_done [NR][NC];
  logic sb_overflow, sb_underflow, la_step, base_valid;
  logic [31:0] sb_overflow_cnt;
  logic x_conflict [NR], y_conflict [NC];
  logic [1:0] base;

  cimba_top #(.NR(NR), .NC(NC), .LANES(LN), .PARAM_DEPTH(PD), .CELL_DEPTH(CD),
              .SB_CH(SCH), .SB_DEPTH(SD)) dut (
    .clk, .rst, .node_cmd, .unit_cmd, .cfg_we, .cfg_row, .cfg_col, .cfg_addr, .cfg_data,
    .io_wr_valid, .io_wr_ch, .io_wr_sample, .unit_busy, .unit_done, .sb_overflow,
    .sb_overflow_cnt, .sb_underflow, .x_conflict, .y_conflict, .la_step, .base_valid, .base
  );

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_over = 0, n_mcast = 0, n_cat = 0, n_turn = 0, n_dconv = 0, n_aux = 0, n_lstm = 0;
  int n_vmm = 0, n_step = 0, n_emit = 0, n_stay = 0, n_conf = 0, n_xfer = 0;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------------ helpers
  task automatic fail(input string s);
    failures++;
    if (failures < 15) $display("FAIL: %s", s);
  endtask
  task automatic clear_cmds();
    for (int r = 0; r < NR; r++) for (int c = 0; c < NC; c++) begin
      node_cmd[r][c] = '0;
      unit_cmd[r][c] = '0;
    end
  endtask
  task automatic tick();
    @(posedge clk);
    #1;
    clear_cmds();
  endtask
  task automatic cfg(input int r, input int c, input logic [19:0] a, input logic [31:0] d);
    cfg_we = 1'b1; cfg_row = 3'(r); cfg_col = 2'(c); cfg_addr = a; cfg_data = d;
    @(posedge clk);
    #1;
    cfg_we = 1'b0;
  endtask
  function automatic int rxl(input int r, input int c, input int l);
    return int'($signed(dut.rx_data[r][c][l]));
  endfunction
  function automatic int txl(input int r, input int c, input int l);
    return int'($signed(dut.tx_data[r][c][l]));
  endfunction
  // wait for a unit's done; returns the cycles since its start edge
  task automatic wait_done(input int r, input int c, output int n);
    n = 0;
    while (!unit_done[r][c] && n < 1000) begin
      @(posedge clk);
      #1;
      n++;
    end
  endtask
  // a transfer from (sr,sc) to (dr,dc) of lanes [off, off+len), straight or with a turn
  // at (tr,tc); the destination captures at t+2 (straight) or t+5 (turned)
  task automatic xfer(input int sr, input int sc, input bit sy, input int off, input int len,
                      input int dr [$], input int dcl [$], input bit ry,
                      input int tr = -1, input int tc = -1);
    node_cmd[sr][sc].tx_x = !sy; node_cmd[sr][sc].tx_y = sy;
    node_cmd[sr][sc].tx_off = OFF_W'(off); node_cmd[sr][sc].tx_len = LEN_W'(len);
    tick();
    tick();
    if (tr >= 0) begin
      node_cmd[tr][tc].turn_xy = !sy; node_cmd[tr][tc].turn_yx = sy;
      node_cmd[tr][tc].rx_off = OFF_W'(off); node_cmd[tr][tc].rx_len = LEN_W'(len);
      tick(); tick(); tick();
      n_turn++;
    end
    for (int i = 0; i < dr.size(); i++) begin
      node_cmd[dr[i]][dcl[i]].rx_x = !ry; node_cmd[dr[i]][dcl[i]].rx_y = ry;
      node_cmd[dr[i]][dcl[i]].rx_off = OFF_W'(off); node_cmd[dr[i]][dcl[i]].rx_len = LEN_W'(len);
    end
    tick();
    for (int i = 0; i < dr.size(); i++)
      for (int l = off; l < off + len; l++) begin
        checks++;
        if (rxl(dr[i], dcl[i], l) != txl(sr, sc, l)) begin
          fail($sformatf("mesh (%0d,%0d)->(%0d,%0d) lane %0d", sr, sc, dr[i], dcl[i], l));
          break;
        end
      end
    n_xfer++;
    if (dr.size() > 1) n_mcast++;
  endtask

  // ------------------------------------------------------------------ unit models
  logic [15:0] pm [NR][NC][PD][8];
  logic [15:0] cm [CD];
  logic [15:0] osc;
  int gp [NR][NC][LN][LN], gm [NR][NC][LN][LN];
  int in_sh [NR][NC], adc_sh [NR][NC];

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

  task automatic start_dpu(input int r, input int c, input dpu_cmd_t d);
    unit_cmd[r][c].start = 1'b1;
    unit_cmd[r][c].dpu = d;
  endtask

  // check a finished DPU operation against its input x (as latched at start)
  task automatic check_dpu(input int r, input int c, input dpu_cmd_t d, input int x [LN]);
    int e;
    logic [15:0] a [K], w [K], z [4], g [4], cn, tc;
    for (int i = 0; i < int'(d.count); i++) begin
      case (d.mode)
        DPU_DCONV: begin
          int ch, p;
          ch = i % int'(d.nch);
          p = i / int'(d.nch);
          for (int k = 0; k < K; k++) begin
            int li;
            li = int'(d.in_off) + p * int'(d.stride) + k;
            a[k] = r2h(real'((li < LN) ? x[li] : 0));
            w[k] = pm[r][c][int'(d.pbase) + ch][k];
          end
          e = r2i10(h2r(lut_ref(int'(d.act_tab), tree_ref(a, w, pm[r][c][int'(d.pbase) + ch][K]))));
        end
        DPU_CONV_AUX: begin
          int ch;
          ch = i % int'(d.nch);
          e = r2i10(h2r(lut_ref(int'(d.act_tab), h_fma(r2h(real'(x[int'(d.in_off) + i])),
              pm[r][c][int'(d.pbase) + ch][0], pm[r][c][int'(d.pbase) + ch][1]))));
        end
        default: begin
          for (int q = 0; q < 4; q++) begin
            z[q] = h_fma(r2h(real'(x[int'(d.in_off) + 4 * i + q])), pm[r][c][int'(d.pbase) + i][2 * q],
                         pm[r][c][int'(d.pbase) + i][2 * q + 1]);
            g[q] = lut_ref((q == 2) ? 1 : 0, z[q]);
          end
          cn = h_fma(g[1], cm[i], h_fma(g[0], g[2], 16'h0000));
          tc = lut_ref(1, cn);
          cm[i] = cn;
          e = r2i10(h2r(h_fma(h_fma(g[3], tc, 16'h0000), osc, 16'h0000)));
        end
      endcase
      checks++;
      if (txl(r, c, int'(d.out_off) + i) != e)
        fail($sformatf("DPU (%0d,%0d) mode %0d out %0d: %0d vs %0d", r, c, d.mode, i,
                       txl(r, c, int'(d.out_off) + i), e));
    end
  endtask

  task automatic run_dpu(input int r, input int c, input dpu_cmd_t d, input int lat);
    int x [LN], n;
    for (int l = 0; l < LN; l++) x[l] = rxl(r, c, l);
    start_dpu(r, c, d);
    tick();
    wait_done(r, c, n);
    checks++;
    if (n != int'(d.count) + lat) fail($sformatf("DPU (%0d,%0d) took %0d cycles", r, c, n));
    check_dpu(r, c, d, x);
    case (d.mode)
      DPU_DCONV: n_dconv++;
      DPU_CONV_AUX: n_aux++;
      default: n_lstm++;
    endcase
  endtask

  task automatic run_cim(input int r, input int c);
    int x [LN], n, acc, e, v;
    for (int l = 0; l < LN; l++) x[l] = rxl(r, c, l);
    unit_cmd[r][c].start = 1'b1;
    tick();
    wait_done(r, c, n);
    checks++;
    if (n != 40) fail($sformatf("CiM (%0d,%0d) took %0d cycles", r, c, n));
    for (int j = 0; j < LN; j++) begin
      acc = 0;
      for (int i = 0; i < LN; i++) begin
        v = x[i] >>> in_sh[r][c];
        v = (v > 127) ? 127 : (v < -128) ? -128 : v;
        acc += v * (gp[r][c][i][j] - gm[r][c][i][j]);
      end
      e = acc >>> adc_sh[r][c];
      e = (e > 511) ? 511 : (e < -512) ? -512 : e;
      checks++;
      if (txl(r, c, j) != e) fail($sformatf("CiM (%0d,%0d) column %0d: %0d vs %0d", r, c, j, txl(r, c, j), e));
    end
    n_vmm++;
  endtask

  // ------------------------------------------------------------------ configuration
  task automatic cfg_dpu(input int r, input int c, input int kind);
    for (int t = 0; t < 3; t++)
      for (int s = 0; s < 32; s++)
        cfg(r, c, 20'h08000 | 20'(t << 5) | 20'(s), {pwl_slope(t, s), pwl_offset(t, s)});
    for (int row = 0; row < 8; row++)
      for (int wd = 0; wd < 8; wd++) begin
        case (kind)
          0: pm[r][c][row][wd] = r2h((real'($urandom % 2000) - 1000.0) / 8000.0);     // conv
          1: pm[r][c][row][wd] = (wd == 0) ? r2h(real'($urandom % 1000 + 200) / 2000.0)
                                           : r2h((real'($urandom % 1000) - 500.0) / 100.0);
          default: pm[r][c][row][wd] = (wd % 2 == 0) ? r2h(real'($urandom % 1000 + 10) / 100000.0)
                                                     : r2h((real'($urandom % 1000) - 500.0) / 1000.0);
        endcase
        cfg(r, c, 20'((row << 3) | wd), 32'(pm[r][c][row][wd]));
      end
    cfg(r, c, 20'h0C000, 32'(osc));
  endtask

  task automatic cfg_cim(input int r, input int c, input int ish, input int ash);
    for (int i = 0; i < LN; i++)
      for (int j = 0; j < LN; j++) begin
        gp[r][c][i][j] = int'($urandom % 16);
        gm[r][c][i][j] = int'($urandom % 16);
        cfg(r, c, 20'((i << CB) | j), 32'((gm[r][c][i][j] << 4) | gp[r][c][i][j]));
      end
    in_sh[r][c] = ish;
    adc_sh[r][c] = ash;
    cfg(r, c, 20'hC0000, 32'((ash << 8) | ish));
  endtask

  // ------------------------------------------------------------------ the run
  int sample_q [$];                          // channel 2, as the buffer should hold it
  dpu_cmd_t d_conv, d_aux, d_lstm;

  always @(posedge clk) begin
    if (!rst && la_step) begin
      n_step++;
      if (base_valid) n_emit++; else n_stay++;
    end
  end

  initial begin
    int n;
    clear_cmds();
    cfg_we = 1'b0; cfg_row = '0; cfg_col = '0; cfg_addr = '0; cfg_data = '0;
    io_wr_valid = 1'b0; io_wr_ch = '0; io_wr_sample = '0;
    osc = r2h(200.0);
    for (int j = 0; j < CD; j++) cm[j] = 16'h0000;
    repeat (3) @(posedge clk);
    #1;
    rst = 1'b0;

    cfg_dpu(1, 0, 0);
    cfg_dpu(3, 0, 1);
    cfg_dpu(3, 1, 2);
    cfg_cim(2, 0, 2, 6);
    cfg_cim(4, 1, 0, 5);

    // overflow: channel 7 gets more samples than it holds
    for (int i = 0; i < SD + 3; i++) begin
      io_wr_valid = 1'b1; io_wr_ch = 3'd7; io_wr_sample = 16'(i);
      @(posedge clk);
      #1;
    end
    io_wr_valid = 1'b0;
    checks++;
    if (!sb_overflow || sb_overflow_cnt != 32'd3) fail("overflow not counted");
    else n_over++;

    d_conv = '0; d_conv.mode = DPU_DCONV; d_conv.act_tab = 2'd2; d_conv.count = OFF_W'(8);
    d_conv.in_off = OFF_W'(0); d_conv.out_off = OFF_W'(0); d_conv.pbase = OFF_W'(0);
    d_conv.nch = OFF_W'(2); d_conv.stride = 4'd2;
    d_aux = '0; d_aux.mode = DPU_CONV_AUX; d_aux.act_tab = 2'd2; d_aux.count = OFF_W'(8);
    d_aux.in_off = OFF_W'(0); d_aux.out_off = OFF_W'(8); d_aux.pbase = OFF_W'(0);
    d_aux.nch = OFF_W'(8);
    d_lstm = '0; d_lstm.mode = DPU_LSTM; d_lstm.count = OFF_W'(4); d_lstm.in_off = OFF_W'(0);
    d_lstm.out_off = OFF_W'(16); d_lstm.pbase = OFF_W'(0);

    for (int t = 0; t < T; t++) begin
      int sb_n;
      // 16 new raw samples into channel 2
      for (int i = 0; i < 16; i++) begin
        int s;
        s = int'($urandom % 4000) - 2000;
        sample_q.push_back(s);
        io_wr_valid = 1'b1; io_wr_ch = 3'd2; io_wr_sample = 16'(s);
        @(posedge clk);
        #1;
      end
      io_wr_valid = 1'b0;
      // signal buffer: read 16 samples to lanes 0..15, shift 2
      unit_cmd[0][0].start = 1'b1;
      unit_cmd[0][0].sb.ch = 9'd2; unit_cmd[0][0].sb.count = OFF_W'(16);
      unit_cmd[0][0].sb.out_off = '0; unit_cmd[0][0].sb.shift = 4'd2;
      tick();
      wait_done(0, 0, sb_n);
      checks++;
      if (sb_n != 17) fail($sformatf("buffer read took %0d cycles", sb_n));
      for (int l = 0; l < 16; l++) begin
        int s, e;
        s = sample_q.pop_front();
        e = s >>> 2;
        e = (e > 511) ? 511 : (e < -512) ? -512 : e;
        checks++;
        if (txl(0, 0, l) != e) fail($sformatf("buffer lane %0d: %0d vs %0d", l, txl(0, 0, l), e));
      end
      // multicast down column 0 to DPUs (1,0) and (3,0)
      xfer(0, 0, 1'b1, 0, 16, '{1, 3}, '{0, 0}, 1'b1);
      run_dpu(1, 0, d_conv, 18);
      run_dpu(3, 0, d_aux, 9);
      // concatenation: (1,0) lanes 0-7 and (3,0) lanes 8-15 in the same cycle to CiM (2,0)
      node_cmd[1][0].tx_y = 1'b1; node_cmd[1][0].tx_off = '0; node_cmd[1][0].tx_len = LEN_W'(8);
      node_cmd[3][0].tx_y = 1'b1; node_cmd[3][0].tx_off = OFF_W'(8); node_cmd[3][0].tx_len = LEN_W'(8);
      tick(); tick();
      node_cmd[2][0].rx_y = 1'b1; node_cmd[2][0].rx_off = '0; node_cmd[2][0].rx_len = LEN_W'(16);
      tick();
      for (int l = 0; l < 16; l++) begin
        checks++;
        if (rxl(2, 0, l) != txl((l < 8) ? 1 : 3, 0, l)) begin
          fail($sformatf("concatenation lane %0d", l));
          break;
        end
      end
      n_cat++;
      // gates: CiM (2,0), then row 2, turn at (2,1), down column 1 to DPU (3,1)
      run_cim(2, 0);
      xfer(2, 0, 1'b0, 0, 16, '{3}, '{1}, 1'b1, 2, 1);
      run_dpu(3, 1, d_lstm, 26);
      // hidden state down column 1 to the scoring tile (4,1)
      xfer(3, 1, 1'b1, 16, 4, '{4}, '{1}, 1'b1);
      run_cim(4, 1);
      // scores along row 4, turn at (4,0), down column 0 to the decoder (5,0)
      xfer(4, 1, 1'b0, 0, 20, '{5}, '{0}, 1'b1, 4, 0);
      unit_cmd[5][0].start = 1'b1;
      unit_cmd[5][0].la_off = '0;
      tick();
    end
    // the decoder needs 2*L_TP + 2*L_MLP + 1 = 11 timesteps before its first step; the
    // step of the last timestep is seen one edge after it was accepted
    tick();
    checks++;
    if (n_step != T - 11) fail($sformatf("decoder stepped %0d times, expected %0d", n_step, T - 11));

    // a deliberate conflict: two nodes of row 0 drive lane 3
    node_cmd[0][1].tx_x = 1'b1; node_cmd[0][1].tx_off = '0; node_cmd[0][1].tx_len = LEN_W'(8);
    node_cmd[0][2].tx_x = 1'b1; node_cmd[0][2].tx_off = OFF_W'(3); node_cmd[0][2].tx_len = LEN_W'(1);
    tick();
    tick();
    checks++;
    if (!x_conflict[0]) fail("conflict not flagged"); else n_conf++;
    tick();

    checks++;
    if (n_over == 0 || n_mcast == 0 || n_cat == 0 || n_turn == 0 || n_dconv == 0 || n_aux == 0 ||
        n_lstm == 0 || n_vmm == 0 || n_step == 0 || n_emit + n_stay != n_step || n_conf == 0)
      fail("a mechanism never happened");
    $display("overflow %0d multicast %0d concat %0d turns %0d transfers %0d dconv %0d aux %0d lstm %0d vmm %0d",
             n_over, n_mcast, n_cat, n_turn, n_xfer, n_dconv, n_aux, n_lstm, n_vmm);
    $display("decoder steps %0d emitted %0d stays %0d conflicts %0d", n_step, n_emit, n_stay, n_conf);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
