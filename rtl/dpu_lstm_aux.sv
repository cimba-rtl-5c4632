// dpu_lstm_aux: the LSTM auxiliary datapath of a DPU, for one hidden unit per cycle.
//
// A CiM tile computes the four LSTM gate pre-activations of every hidden unit as one
// vector-matrix product. Because the weights are mapped interleaved, the four gate values
// of hidden unit j arrive next to each other (order i, f, g, o in this design). This unit
// then does, for each hidden unit:
//   1. INT10 -> binary16 conversion of the four gate values,
//   2. affine scaling  z = x*scale + bias  (the LSTM bias is folded into the bias term),
//   3. i = sigmoid(z_i), f = sigmoid(z_f), g = tanh(z_g), o = sigmoid(z_o) by LUT + FMA,
//   4. c = f*c_prev + i*g   (one MUL, then one FMA),
//   5. h = o*tanh(c)        (LUT + FMA, then MUL),
//   6. h scaled by out_scale and rounded to INT10 for the mesh.
// The new cell state c is returned (c_valid, c_idx, c_out) so the DPU can overwrite the
// previous one in its cell-state SRAM. Steps 1-6 are the paper's; the gate order, the
// output scale and the stage split are this design's.
//
// Timing: pipelined, one hidden unit per cycle. Stage latencies (clock edges): input
// register 1, conversion 1, affine 3, activation 4, MUL 3, FMA 3, tanh 4, MUL 3, output
// scale and rounding 3: h leaves 25 cycles after the unit is presented, the paper's
// latency for the LSTM auxiliary operation. The new c leaves after 15 cycles.
// The sigmoid table is LUT table 0, tanh table 1; both are written through cfg_*.
module dpu_lstm_aux
  import fp16_pkg::*;
#(
  parameter int IDX_W = 9,
  parameter int N_TAB = 3,
  parameter int N_SEG = 32
) (
  input  logic                     clk,
  input  logic                     rst,
  // LUT table programming (broadcast to every LUT instance)
  input  logic                     cfg_we,
  input  logic [$clog2(N_TAB)-1:0] cfg_tab,
  input  logic [$clog2(N_SEG)-1:0] cfg_seg,
  input  fp16_t                    cfg_slope,
  input  fp16_t                    cfg_offset,
  input  fp16_t                    out_scale,
  // one hidden unit
  input  logic                     in_valid,
  input  logic [IDX_W-1:0]         in_idx,
  input  int10_t                   gate [4],     // i, f, g, o
  input  fp16_t                    scale [4],
  input  fp16_t                    bias [4],
  input  fp16_t                    c_prev,
  // new cell state (15 cycles)
  output logic                     c_valid,
  output logic [IDX_W-1:0]         c_idx,
  output fp16_t                    c_out,
  // new hidden state (25 cycles)
  output logic                     h_valid,
  output logic [IDX_W-1:0]         h_idx,
  output int10_t                   h_out
);
  localparam int TW = $clog2(N_TAB);

  // stage 1: input register
  logic v1;
  logic [IDX_W-1:0] idx1;
  int10_t g1 [4];
  fp16_t  s1 [4], b1 [4], c1;
  always_ff @(posedge clk) begin
    if (rst) begin
      v1 <= 1'b0; idx1 <= '0; c1 <= FP16_ZERO;
      for (int k = 0; k < 4; k++) begin g1[k] <= '0; s1[k] <= FP16_ZERO; b1[k] <= FP16_ZERO; end
    end else begin
      v1 <= in_valid; idx1 <= in_idx; c1 <= c_prev;
      for (int k = 0; k < 4; k++) begin g1[k] <= gate[k]; s1[k] <= scale[k]; b1[k] <= bias[k]; end
    end
  end

  // stage 2: INT10 -> fp16
  logic v2;
  logic [IDX_W-1:0] idx2;
  fp16_t x2 [4], s2 [4], b2 [4], c2;
  always_ff @(posedge clk) begin
    if (rst) begin
      v2 <= 1'b0; idx2 <= '0; c2 <= FP16_ZERO;
      for (int k = 0; k < 4; k++) begin x2[k] <= FP16_ZERO; s2[k] <= FP16_ZERO; b2[k] <= FP16_ZERO; end
    end else begin
      v2 <= v1; idx2 <= idx1; c2 <= c1;
      for (int k = 0; k < 4; k++) begin x2[k] <= int10_to_fp16(g1[k]); s2[k] <= s1[k]; b2[k] <= b1[k]; end
    end
  end

  // stage 3: affine (3 cycles) then activation (4 cycles)
  fp16_t z [4], act [4];
  logic  vz [4], va [4];
  for (genvar k = 0; k < 4; k++) begin : g_gate
    fp16_fma #(.LAT(3)) u_aff (
      .clk, .rst, .in_valid(v2), .a(x2[k]), .b(s2[k]), .c(b2[k]),
      .out_valid(vz[k]), .y(z[k])
    );
    dpu_lut #(.N_TAB(N_TAB), .N_SEG(N_SEG)) u_act (
      .clk, .rst, .cfg_we, .cfg_tab, .cfg_seg, .cfg_slope, .cfg_offset,
      .in_valid(vz[k]), .tab_sel((k == 2) ? TW'(1) : TW'(0)), .x(z[k]),
      .out_valid(va[k]), .y(act[k])
    );
  end

  // side band: index and c_prev delayed by 7 to meet the activations (edge 9)
  logic [IDX_W-1:0] idx9;
  fp16_t c9;
  pipe_delay #(.W(IDX_W + 16), .D(7)) u_d9 (.clk, .rst, .d({idx2, c2}), .q({idx9, c9}));

  // i*g (edges 10-12); f, o, c_prev, idx wait 3
  fp16_t ig, f12, o12, c12;
  logic [IDX_W-1:0] idx12;
  logic v12;
  fp16_fma #(.LAT(3)) u_ig (
    .clk, .rst, .in_valid(va[0]), .a(act[0]), .b(act[2]), .c(FP16_ZERO),
    .out_valid(v12), .y(ig)
  );
  pipe_delay #(.W(IDX_W + 48), .D(3)) u_d12 (
    .clk, .rst, .d({idx9, act[1], act[3], c9}), .q({idx12, f12, o12, c12})
  );

  // c = f*c_prev + i*g (edges 13-15)
  fp16_t c15, o15;
  logic [IDX_W-1:0] idx15;
  logic v15;
  fp16_fma #(.LAT(3)) u_c (
    .clk, .rst, .in_valid(v12), .a(f12), .b(c12), .c(ig), .out_valid(v15), .y(c15)
  );
  pipe_delay #(.W(IDX_W + 16), .D(3)) u_d15 (.clk, .rst, .d({idx12, o12}), .q({idx15, o15}));

  assign c_valid = v15;
  assign c_idx   = idx15;
  assign c_out   = c15;

  // tanh(c) (edges 16-19)
  fp16_t tc, o19;
  logic [IDX_W-1:0] idx19;
  logic v19;
  dpu_lut #(.N_TAB(N_TAB), .N_SEG(N_SEG)) u_tanh (
    .clk, .rst, .cfg_we, .cfg_tab, .cfg_seg, .cfg_slope, .cfg_offset,
    .in_valid(v15), .tab_sel(TW'(1)), .x(c15), .out_valid(v19), .y(tc)
  );
  pipe_delay #(.W(IDX_W + 16), .D(4)) u_d19 (.clk, .rst, .d({idx15, o15}), .q({idx19, o19}));

  // h = o*tanh(c) (edges 20-22)
  fp16_t h22;
  logic v22;
  logic [IDX_W-1:0] idx22;
  fp16_fma #(.LAT(3)) u_h (
    .clk, .rst, .in_valid(v19), .a(o19), .b(tc), .c(FP16_ZERO), .out_valid(v22), .y(h22)
  );
  pipe_delay #(.W(IDX_W), .D(3)) u_d22 (.clk, .rst, .d(idx19), .q(idx22));

  // output scale (edges 23-25), rounding to INT10 at the output
  fp16_t h25;
  fp16_fma #(.LAT(3)) u_os (
    .clk, .rst, .in_valid(v22), .a(h22), .b(out_scale), .c(FP16_ZERO),
    .out_valid(h_valid), .y(h25)
  );
  pipe_delay #(.W(IDX_W), .D(3)) u_d25 (.clk, .rst, .d(idx22), .q(h_idx));
  assign h_out = fp16_to_int10(h25);

  // the four gate paths run in lock step
  logic unused_v;
  assign unused_v = ^{vz[1], vz[2], vz[3], va[1], va[2], va[3]};
endmodule
