// dpu: Digital Processing Unit of the CiMBA accelerator.
//
// Every CiM tile is paired with a DPU that does the work the crossbar cannot: the
// non-linear and element-wise parts of each layer, and the first convolution, which is
// too small and too noise-sensitive for an analog tile. The DPU receives a vector of INT10
// values from the mesh, runs one of three flows over it element by element in binary16,
// and leaves an INT10 result vector for the mesh:
//   DPU_DCONV     digital convolution: for output i (channel ch = i mod nch, position
//                 t = i div nch) the FMA tree computes sum_k in[in_off + t*stride + k] *
//                 w[ch][k] + b[ch], then the activation LUT (swish or clamp) is applied.
//   DPU_CONV_AUX  convolution auxiliary: y = act(x*scale[ch] + bias[ch]) for the output of
//                 a convolution or fully connected layer computed on a CiM tile (batch
//                 norm and any affine re-scaling folded into one scale and bias).
//   DPU_LSTM      LSTM auxiliary: for hidden unit j the gates at lanes in_off + 4j .. +3
//                 (i, f, g, o) go through dpu_lstm_aux; h goes to lane out_off + j and the
//                 new c replaces the old one in the cell-state SRAM.
// The three flows, binary16 arithmetic, SRAM banks, FMA tree, LUT + FMA activations and
// the LSTM auxiliary block are the paper's. The bank organisation, the address map and
// the command format are this design's.
//
// SRAM banks (all written through cfg_*, 32-bit data):
//   parameter bank  PARAM_DEPTH rows x 8 binary16 words   addr[15]=0: row addr[12:3],
//                   word addr[2:0], data[15:0]. DCONV row: w0..w(K-1), bias in word K;
//                   CONV_AUX row: scale, bias; LSTM row: scale/bias of i, f, g, o.
//   LUT tables      addr[15:13]=3'b100: table addr[6:5], segment addr[4:0],
//                   data = {slope, offset}; table 0 sigmoid, 1 tanh, 2.. activations.
//   cell state      addr[15:12]=4'hA: unit addr[7:0], data[15:0] (initial c).
//   output scale    addr 16'hC000: binary16 factor applied to h before rounding.
//   input / output vector banks: the input vector is latched when an operation starts;
//   results are written into the output vector, whose other lanes keep their value.
//
// Timing: start (with cmd) is taken when not busy. One element is issued per cycle; the
// parameter SRAM read takes 1 cycle, then CONV_AUX takes 1 (INT10 to binary16) + 3 (FMA)
// + 4 (LUT) cycles, DCONV 1 + 12 (FMA tree) + 4, LSTM 25 (dpu_lstm_aux). done pulses one
// cycle after the last result is written; busy is high from start until then.
module dpu
  import fp16_pkg::*;
  import cimba_pkg::*;
#(
  parameter int LANES       = 512,
  parameter int PARAM_DEPTH = 1024,
  parameter int CELL_DEPTH  = 256,
  parameter int K           = 5,
  parameter int N_TAB       = 3,
  parameter int N_SEG       = 32
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        cfg_we,
  input  logic [15:0] cfg_addr,
  input  logic [31:0] cfg_data,
  input  int10_t      in_vec  [LANES],
  input  logic        start,
  input  dpu_cmd_t    cmd,
  output logic        busy,
  output logic        done,
  output int10_t      out_vec [LANES]
);
  localparam int PW = $clog2(PARAM_DEPTH);
  localparam int CW = $clog2(CELL_DEPTH);
  localparam int TW = $clog2(N_TAB);
  localparam int GW = $clog2(N_SEG);
  localparam int LW = $clog2(LANES);

  typedef fp16_t row_t [8];

  // ---------------------------------------------------------------- configuration
  fp16_t pmem [PARAM_DEPTH][8];
  fp16_t cmem [CELL_DEPTH];
  fp16_t out_scale;

  logic lut_we;
  assign lut_we = cfg_we && (cfg_addr[15:13] == 3'b100);

  // ---------------------------------------------------------------- command / issue
  dpu_cmd_t cq;
  logic [OFF_W-1:0] n_iss, n_done, ch, pos;
  int10_t in_buf [LANES];

  function automatic int10_t lane_rd(input int i);
    if (i >= 0 && i < LANES) return in_buf[i];
    return '0;
  endfunction

  logic issue;
  assign issue = busy && (n_iss < cq.count);

  // R stage: SRAM reads and input gathering
  logic      r_v;
  dpu_mode_e r_mode;
  int        r_lane;
  logic [CW-1:0] r_j;
  int10_t    r_x;
  int10_t    r_win [K];
  int10_t    r_gate [4];
  row_t      r_row;
  fp16_t     r_cprev;

  // write-back ports of the three paths
  logic   wa_v, wd_v, wl_v, wc_v;
  int     wa_lane, wd_lane;
  logic [CW-1:0] wl_j, wc_j;
  int10_t wa_y, wd_y, wl_y;
  fp16_t  wc_c;

  always_ff @(posedge clk) begin
    if (rst) begin
      busy      <= 1'b0;
      done      <= 1'b0;
      cq        <= '0;
      n_iss     <= '0;
      n_done    <= '0;
      ch        <= '0;
      pos       <= '0;
      out_scale <= FP16_ONE;
      r_v       <= 1'b0;
      r_mode    <= DPU_CONV_AUX;
      r_lane    <= 0;
      r_j       <= '0;
      r_x       <= '0;
      r_cprev   <= FP16_ZERO;
      for (int k = 0; k < K; k++) r_win[k] <= '0;
      for (int g = 0; g < 4; g++) r_gate[g] <= '0;
      for (int w = 0; w < 8; w++) r_row[w] <= FP16_ZERO;
      for (int l = 0; l < LANES; l++) begin
        in_buf[l]  <= '0;
        out_vec[l] <= '0;
      end
      for (int j = 0; j < CELL_DEPTH; j++) cmem[j] <= FP16_ZERO;
    end else begin
      done <= 1'b0;
      // configuration writes
      if (cfg_we && !cfg_addr[15]) pmem[cfg_addr[PW+2:3]][cfg_addr[2:0]] <= cfg_data[15:0];
      if (cfg_we && cfg_addr == 16'hC000) out_scale <= cfg_data[15:0];
      if (cfg_we && cfg_addr[15:12] == 4'hA) cmem[cfg_addr[CW-1:0]] <= cfg_data[15:0];

      // start
      if (start && !busy) begin
        busy   <= 1'b1;
        cq     <= cmd;
        n_iss  <= '0;
        n_done <= '0;
        ch     <= '0;
        pos    <= '0;
        in_buf <= in_vec;
      end

      // issue one element: read SRAM banks and gather inputs
      r_v <= issue;
      if (issue) begin
        r_mode  <= cq.mode;
        r_j     <= CW'(n_iss);
        r_x     <= lane_rd(int'(cq.in_off) + int'(n_iss));
        for (int k = 0; k < K; k++)
          r_win[k] <= lane_rd(int'(cq.in_off) + int'(pos) * int'(cq.stride) + k);
        for (int g = 0; g < 4; g++)
          r_gate[g] <= lane_rd(int'(cq.in_off) + 4 * int'(n_iss) + g);
        r_cprev <= cmem[CW'(n_iss)];
        r_lane  <= int'(cq.out_off) + int'(n_iss);
        case (cq.mode)
          DPU_CONV_AUX, DPU_DCONV: r_row <= pmem[PW'(int'(cq.pbase) + int'(ch))];
          default:                 r_row <= pmem[PW'(int'(cq.pbase) + int'(n_iss))];
        endcase
        n_iss <= n_iss + 1'b1;
        if (ch + 1'b1 >= cq.nch) begin
          ch  <= '0;
          pos <= pos + 1'b1;
        end else begin
          ch <= ch + 1'b1;
        end
      end

      // write-back
      if (wa_v && wa_lane < LANES) out_vec[LW'(wa_lane)] <= wa_y;
      if (wd_v && wd_lane < LANES) out_vec[LW'(wd_lane)] <= wd_y;
      if (wl_v && int'(cq.out_off) + int'(wl_j) < LANES)
        out_vec[LW'(int'(cq.out_off) + int'(wl_j))] <= wl_y;
      if (wc_v) cmem[wc_j] <= wc_c;
      if (busy && (wa_v || wd_v || wl_v)) begin
        n_done <= n_done + 1'b1;
        if (n_done + 1'b1 == cq.count) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
      if (start && !busy && cmd.count == '0) begin
        busy <= 1'b0;
        done <= 1'b1;
      end
    end
  end

  // ---------------------------------------------------------------- CONV_AUX path
  logic  ca_v;
  fp16_t ca_x, ca_s, ca_b;
  int    ca_lane;
  always_ff @(posedge clk) begin
    if (rst) begin
      ca_v <= 1'b0; ca_x <= FP16_ZERO; ca_s <= FP16_ZERO; ca_b <= FP16_ZERO; ca_lane <= 0;
    end else begin
      ca_v    <= r_v && (r_mode == DPU_CONV_AUX);
      ca_x    <= int10_to_fp16(r_x);
      ca_s    <= r_row[0];
      ca_b    <= r_row[1];
      ca_lane <= r_lane;
    end
  end

  logic  bn_v, act_a_v;
  fp16_t bn_y, act_a_y;
  fp16_fma #(.LAT(3)) u_bn (
    .clk, .rst, .in_valid(ca_v), .a(ca_x), .b(ca_s), .c(ca_b), .out_valid(bn_v), .y(bn_y)
  );
  dpu_lut #(.N_TAB(N_TAB), .N_SEG(N_SEG)) u_act_a (
    .clk, .rst, .cfg_we(lut_we), .cfg_tab(cfg_addr[5 +: TW]), .cfg_seg(cfg_addr[GW-1:0]),
    .cfg_slope(cfg_data[31:16]), .cfg_offset(cfg_data[15:0]),
    .in_valid(bn_v), .tab_sel(cq.act_tab[TW-1:0]), .x(bn_y), .out_valid(act_a_v), .y(act_a_y)
  );
  logic [31:0] ca_lane_d;
  pipe_delay #(.W(32), .D(7)) u_da (.clk, .rst, .d(32'(ca_lane)), .q(ca_lane_d));
  assign wa_v    = act_a_v;
  assign wa_lane = int'(ca_lane_d);
  assign wa_y    = fp16_to_int10(act_a_y);

  // ---------------------------------------------------------------- DCONV path
  logic  dc_v;
  fp16_t dc_a [K], dc_w [K], dc_b;
  int    dc_lane;
  always_ff @(posedge clk) begin
    if (rst) begin
      dc_v <= 1'b0; dc_b <= FP16_ZERO; dc_lane <= 0;
      for (int k = 0; k < K; k++) begin dc_a[k] <= FP16_ZERO; dc_w[k] <= FP16_ZERO; end
    end else begin
      dc_v    <= r_v && (r_mode == DPU_DCONV);
      for (int k = 0; k < K; k++) begin
        dc_a[k] <= int10_to_fp16(r_win[k]);
        dc_w[k] <= r_row[k];
      end
      dc_b    <= r_row[K];
      dc_lane <= r_lane;
    end
  end

  logic  tr_v, act_d_v;
  fp16_t tr_y, act_d_y;
  dpu_fma_tree #(.K(K), .LAT_FMA(3)) u_tree (
    .clk, .rst, .in_valid(dc_v), .act(dc_a), .wgt(dc_w), .bias(dc_b), .out_valid(tr_v), .y(tr_y)
  );
  dpu_lut #(.N_TAB(N_TAB), .N_SEG(N_SEG)) u_act_d (
    .clk, .rst, .cfg_we(lut_we), .cfg_tab(cfg_addr[5 +: TW]), .cfg_seg(cfg_addr[GW-1:0]),
    .cfg_slope(cfg_data[31:16]), .cfg_offset(cfg_data[15:0]),
    .in_valid(tr_v), .tab_sel(cq.act_tab[TW-1:0]), .x(tr_y), .out_valid(act_d_v), .y(act_d_y)
  );
  logic [31:0] dc_lane_d;
  pipe_delay #(.W(32), .D(3 * (1 + $clog2(K)) + 4)) u_dd (
    .clk, .rst, .d(32'(dc_lane)), .q(dc_lane_d)
  );
  assign wd_v    = act_d_v;
  assign wd_lane = int'(dc_lane_d);
  assign wd_y    = fp16_to_int10(act_d_y);

  // ---------------------------------------------------------------- LSTM path
  fp16_t ls_s [4], ls_b [4];
  always_comb
    for (int g = 0; g < 4; g++) begin
      ls_s[g] = r_row[2*g];
      ls_b[g] = r_row[2*g + 1];
    end

  dpu_lstm_aux #(.IDX_W(CW), .N_TAB(N_TAB), .N_SEG(N_SEG)) u_lstm (
    .clk, .rst,
    .cfg_we(lut_we), .cfg_tab(cfg_addr[5 +: TW]), .cfg_seg(cfg_addr[GW-1:0]),
    .cfg_slope(cfg_data[31:16]), .cfg_offset(cfg_data[15:0]), .out_scale,
    .in_valid(r_v && (r_mode == DPU_LSTM)), .in_idx(r_j), .gate(r_gate),
    .scale(ls_s), .bias(ls_b), .c_prev(r_cprev),
    .c_valid(wc_v), .c_idx(wc_j), .c_out(wc_c),
    .h_valid(wl_v), .h_idx(wl_j), .h_out(wl_y)
  );

  // unused configuration address bits
  logic unused_cfg;
  assign unused_cfg = ^{cfg_addr[14:13], cfg_data[31:16]};
endmodule
