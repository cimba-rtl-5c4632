// cim_postproc: digital post-processing of a CiM tile's ADC outputs.
//
// Each of the tile's column ADCs has its own gain error from circuit mismatch. This block
// corrects it per column with one multiply and one add, y = round(adc * gain / 256) +
// offset, saturated to INT10, for all COLS columns in parallel. The per-column gain
// (signed, 8 fractional bits: 256 = 1.0) and offset (INT10) are written through cfg_*.
// That the block corrects ADC gain variation with MUL/ADD is the paper's; the number
// formats and the rounding (half up) are this design's.
//
// Timing: one register stage: in_valid and adc are sampled at a clock edge and y with
// out_valid appear after it. Gains reset to 1.0 and offsets to 0.
module cim_postproc
  import fp16_pkg::*;
#(
  parameter int COLS = 512
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic                    cfg_we,
  input  logic [$clog2(COLS)-1:0] cfg_col,
  input  logic signed [15:0]      cfg_gain,
  input  int10_t                  cfg_offset,
  input  logic                    in_valid,
  input  int10_t                  adc [COLS],
  output logic                    out_valid,
  output int10_t                  y   [COLS]
);
  logic signed [15:0] gain [COLS];
  int10_t             offs [COLS];

  function automatic int10_t corr(input int10_t a, input logic signed [15:0] g, input int10_t o);
    logic signed [31:0] p;
    p = (32'(a) * 32'(g) + 32'sd128) >>> 8;
    p = p + 32'(o);
    if (p > 32'sd511)  return int10_t'(511);
    if (p < -32'sd512) return int10_t'(-512);
    return int10_t'(p);
  endfunction

  always_ff @(posedge clk) begin
    if (rst) begin
      out_valid <= 1'b0;
      for (int c = 0; c < COLS; c++) begin
        gain[c] <= 16'sd256;
        offs[c] <= '0;
        y[c]    <= '0;
      end
    end else begin
      if (cfg_we) begin
        gain[cfg_col] <= cfg_gain;
        offs[cfg_col] <= cfg_offset;
      end
      out_valid <= in_valid;
      if (in_valid)
        for (int c = 0; c < COLS; c++) y[c] <= corr(adc[c], gain[c], offs[c]);
    end
  end
endmodule
