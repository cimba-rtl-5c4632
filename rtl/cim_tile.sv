// cim_tile: behavioural model of an analog compute-in-memory tile (PCM crossbar, PWM input
// drivers, CCO-based ADCs) with its digital post-processing block.
//
// This is a behavioural model, not synthesizable logic of the real part: the crossbar,
// the pulse-width modulators and the ADCs are analog and mixed-signal circuits. The model
// reproduces their function with ideal integer arithmetic and the tile's latency.
//
// What the real tile does: the weights of a layer are stored as conductances in ROWS x
// COLS unit cells, each made of two PCM devices so that w = G+ - G-. An input vector is
// applied to all rows at once, every element as a voltage pulse whose width encodes a
// signed 8-bit value; each column's current integrates the dot product of the input with
// the column's weights, and a CCO-based ADC per column turns it into a signed 10-bit
// integer. The digital post-processing block (cim_postproc, real RTL) then corrects each
// ADC's gain. One VMM takes VMM_LAT = 40 cycles.
//
// Model details (this design's choices where the paper gives none): conductances are
// 4-bit levels (0..15), so w ranges from -15 to 15; inputs arrive as INT10 from the mesh
// and the PWM stage saturates x >>> in_shift to 8 bits; the ADC output is the exact dot
// product shifted right by adc_shift (arithmetic) and saturated to INT10. Programming
// noise, read noise and conductance drift are not modelled. The model computes CPC
// columns per cycle so that all COLS columns are done before the 40 cycles end.
//
// Interface: cfg_* writes (20-bit address, 32-bit data):
//   addr[19] = 0      unit cell: row = addr[RB+CB-1:CB], column = addr[CB-1:0],
//                     data[3:0] = G+ level, data[7:4] = G- level
//   addr[19:18] = 10  post-processing of column addr[CB-1:0]: data[15:0] gain (256 = 1.0),
//                     data[25:16] offset
//   addr = 20'hC0000  data[3:0] in_shift, data[11:8] adc_shift
// start (when not busy) latches in_vec (element i drives row i); VMM_LAT cycles later
// done pulses and out_vec (element j from column j) holds the result until the next VMM.
module cim_tile
  import fp16_pkg::*;
#(
  parameter int ROWS    = 512,
  parameter int COLS    = 512,
  parameter int VMM_LAT = 40
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        cfg_we,
  input  logic [19:0] cfg_addr,
  input  logic [31:0] cfg_data,
  input  logic        start,
  input  int10_t      in_vec  [ROWS],
  output logic        busy,
  output logic        done,
  output int10_t      out_vec [COLS]
);
  localparam int RB  = $clog2(ROWS);
  localparam int CB  = $clog2(COLS);
  localparam int CPC = (COLS + VMM_LAT - 3) / (VMM_LAT - 2);   // columns per cycle
  localparam int NB  = (COLS + CPC - 1) / CPC;                // compute cycles

  logic [7:0]        wmem [COLS][ROWS];  // per column and row: {G-, G+}
  logic signed [7:0] x8 [ROWS];
  int10_t            adc [COLS];
  logic [3:0]        in_shift, adc_shift;
  logic [$clog2(VMM_LAT+1)-1:0] t;
  logic              pp_v;
  logic              unused_cfg;
  assign unused_cfg = ^cfg_data[31:26];   // data bits no configuration word uses

  function automatic logic signed [7:0] pwm_level(input int10_t x, input logic [3:0] sh);
    int10_t v;
    v = x >>> sh;
    if (v > 10'sd127)  return 8'sd127;
    if (v < -10'sd128) return -8'sd128;
    return 8'(v);
  endfunction

  function automatic int10_t adc_conv(input int acc, input logic [3:0] sh);
    int v;
    v = acc >>> sh;
    if (v > 511)  return int10_t'(511);
    if (v < -512) return int10_t'(-512);
    return int10_t'(v);
  endfunction

  // the CPC column dot products of the current compute cycle
  int dot [CPC];
  for (genvar j = 0; j < CPC; j++) begin : g_col
    logic [7:0] w [ROWS];
    assign w = wmem[CB'((int'(t) * CPC + j) % COLS)];
    always_comb begin
      dot[j] = 0;
      for (int r = 0; r < ROWS; r++)
        dot[j] += int'(x8[r]) * (int'(w[r][3:0]) - int'(w[r][7:4]));
    end
  end

  // PWM drivers: the input latched at start
  for (genvar r = 0; r < ROWS; r++) begin : g_row
    always_ff @(posedge clk) begin
      if (rst)                 x8[r] <= '0;
      else if (start && !busy) x8[r] <= pwm_level(in_vec[r], in_shift);
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      busy      <= 1'b0;
      pp_v      <= 1'b0;
      t         <= '0;
      in_shift  <= '0;
      adc_shift <= '0;
      adc       <= '{default: '0};
      wmem      <= '{default: '0};
    end else begin
      pp_v <= 1'b0;
      if (cfg_we && !cfg_addr[19])
        wmem[cfg_addr[CB-1:0]][cfg_addr[RB+CB-1:CB]] <= cfg_data[7:0];
      if (cfg_we && cfg_addr == 20'hC0000) begin
        in_shift  <= cfg_data[3:0];
        adc_shift <= cfg_data[11:8];
      end
      if (start && !busy) begin
        busy <= 1'b1;
        t    <= '0;
      end else if (busy) begin
        t <= t + 1'b1;
        if (int'(t) < NB)
          for (int j = 0; j < CPC; j++)
            if (int'(t) * CPC + j < COLS)
              adc[CB'(int'(t) * CPC + j)] <= adc_conv(dot[j], adc_shift);
        if (int'(t) == VMM_LAT - 2) begin
          pp_v <= 1'b1;
          busy <= 1'b0;
        end
      end
    end
  end

  cim_postproc #(.COLS(COLS)) u_pp (
    .clk, .rst,
    .cfg_we(cfg_we && cfg_addr[19:18] == 2'b10), .cfg_col(cfg_addr[CB-1:0]),
    .cfg_gain(cfg_data[15:0]), .cfg_offset(cfg_data[25:16]),
    .in_valid(pp_v), .adc, .out_valid(done), .y(out_vec)
  );
endmodule
