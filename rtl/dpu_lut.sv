// dpu_lut: piecewise-linear activation unit of the DPU (look-up table followed by an FMA).
//
// Non-linear functions (sigmoid, tanh, swish) are approximated piecewise-linearly: the
// input's segment selects a slope and an offset from a table, and an FMA computes
// y = x*slope + offset. A clamp is obtained by writing slope 0 and the bound as offset in
// the outer segments, so clamp layers need no extra hardware. This structure (LUT, then
// FMA applying the selected slope and offset; clamp through the table's bounds) follows
// the paper. The segmentation is this design's: N_SEG uniform segments of width
// 2^-SEG_SHIFT starting at -N_SEG/2 * 2^-SEG_SHIFT (32 segments of 0.5 covering [-8, 8));
// inputs below or above the range use the first or last segment.
//
// Tables: N_TAB tables, written through the cfg port (cfg_tab, cfg_seg, slope, offset).
// By convention of this design table 0 holds sigmoid, 1 tanh and 2 the convolution
// activation (swish or clamp), but the unit itself does not care.
//
// Timing: pipelined, one input per cycle. One cycle for the table read, then the FMA's
// LAT_FMA cycles: LAT = 4 cycles in all, the paper's figure for LUT / Swish.
module dpu_lut
  import fp16_pkg::*;
#(
  parameter int N_TAB     = 3,
  parameter int N_SEG     = 32,
  parameter int SEG_SHIFT = 1,
  parameter int LAT_FMA   = 3
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     cfg_we,
  input  logic [$clog2(N_TAB)-1:0] cfg_tab,
  input  logic [$clog2(N_SEG)-1:0] cfg_seg,
  input  fp16_t                    cfg_slope,
  input  fp16_t                    cfg_offset,
  input  logic                     in_valid,
  input  logic [$clog2(N_TAB)-1:0] tab_sel,
  input  fp16_t                    x,
  output logic                     out_valid,
  output fp16_t                    y
);
  localparam int SW = $clog2(N_SEG);

  fp16_t slope_mem  [N_TAB][N_SEG];
  fp16_t offset_mem [N_TAB][N_SEG];

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int t = 0; t < N_TAB; t++)
        for (int s = 0; s < N_SEG; s++) begin
          slope_mem[t][s]  <= FP16_ZERO;
          offset_mem[t][s] <= FP16_ZERO;
        end
    end else if (cfg_we) begin
      slope_mem[cfg_tab][cfg_seg]  <= cfg_slope;
      offset_mem[cfg_tab][cfg_seg] <= cfg_offset;
    end
  end

  // Segment index: floor(x * 2^SEG_SHIFT) + N_SEG/2, clamped to [0, N_SEG-1].
  function automatic logic [SW-1:0] seg_of(input fp16_t v);
    int s;
    s = fp16_floor_scaled(v, SEG_SHIFT) + N_SEG / 2;
    if (s < 0) s = 0;
    if (s > N_SEG - 1) s = N_SEG - 1;
    return SW'(s);
  endfunction

  logic  v1;
  fp16_t x1, sl1, of1;
  logic [SW-1:0] seg;
  assign seg = seg_of(x);

  always_ff @(posedge clk) begin
    if (rst) begin
      v1  <= 1'b0;
      x1  <= FP16_ZERO;
      sl1 <= FP16_ZERO;
      of1 <= FP16_ZERO;
    end else begin
      v1  <= in_valid;
      x1  <= x;
      sl1 <= slope_mem[tab_sel][seg];
      of1 <= offset_mem[tab_sel][seg];
    end
  end

  fp16_fma #(.LAT(LAT_FMA)) u_fma (
    .clk, .rst, .in_valid(v1), .a(x1), .b(sl1), .c(of1), .out_valid, .y
  );
endmodule
