// cimba_top: the CiMBA basecalling accelerator: a 6 x 4 grid of units joined by a 2D mesh.
//
// What it does: it runs a basecaller network (for example AL-Dorado) on raw nanopore
// samples and emits bases. Samples enter the signal buffer from the IO interface; the
// schedule moves them, as INT10 vectors over the mesh, through digital convolution and
// auxiliary operations in the DPUs, matrix-vector multiplications in the CiM tiles and
// the LSTM auxiliary operations in the DPUs, and finally to the lookahead (LA) decoder,
// which turns the 20 transition scores of every timestep into a base.
//
// Floorplan (row, column), as in the paper's chip figure; the IO interface is on the left:
//   row 0:  SB   CIM  CIM  CIM
//   row 1:  DPU  DPU  DPU  DPU
//   row 2:  CIM  CIM  CIM  CIM
//   row 3:  DPU  DPU  DPU  DPU
//   row 4:  CIM  CIM  CIM  CIM
//   row 5:  LA   DPU  DPU  DPU
// i.e. 11 CiM tiles, 11 DPUs, one signal buffer (SB) and one decoder. Every unit reads
// its input vector from its mesh node's rx_data and offers its output vector as the
// node's tx_data; a CiM tile's row i is lane i and its column j drives lane j.
//
// How it is controlled: statically. node_cmd[r][c] (cimba_pkg::mesh_cmd_t) is the mesh
// command and unit_cmd[r][c] (cimba_pkg::unit_cmd_t) the unit command of node (r, c) in
// the current cycle; only the fields of the unit placed there are used. The schedule
// (which the paper compiles ahead of time) is supplied by the environment of this module.
// For the decoder, unit_cmd.start accepts one timestep: the 20 scores are lanes
// [la_off, la_off+20) of its node's rx_data in that cycle.
// Configuration (weights, parameters, tables) is written through one bus: cfg_we with
// cfg_row/cfg_col selecting the unit and cfg_addr/cfg_data as in cim_tile and dpu.
// The IO interface cannot be built from the paper; its sample stream is brought out as
// the io_wr_* ports, which write the signal buffer.
//
// Timing: that of the units (CiM VMM 40 cycles, DPU operations 3-25 cycles, signal
// buffer 1 cycle per sample, decoder 2*L_TP + 2*L_MLP + 1 = 11 cycles) and of the mesh
// (3 cycles per transfer, 3 more per turn).
// What follows the paper: the floorplan, the unit types and counts, the mesh and the
// latencies. This design's choices: the command format, the configuration bus, INT10
// lanes (LANES = 512 wires per direction read as 512 INT10 lanes), and that the decoder
// reads its scores straight from the mesh.
module cimba_top
  import fp16_pkg::*;
  import cimba_pkg::*;
#(
  parameter int NR          = 6,
  parameter int NC          = 4,
  parameter int LANES       = 512,
  parameter int VMM_LAT     = 40,
  parameter int PARAM_DEPTH = 1024,
  parameter int CELL_DEPTH  = 256,
  parameter int SB_CH       = 512,
  parameter int SB_DEPTH    = 1225,
  parameter int L_TP        = 4,
  parameter int L_MLP       = 1
) (
  input  logic                     clk,
  input  logic                     rst,
  // schedule
  input  mesh_cmd_t                node_cmd [NR][NC],
  input  unit_cmd_t                unit_cmd [NR][NC],
  // configuration bus
  input  logic                     cfg_we,
  input  logic [2:0]               cfg_row,
  input  logic [1:0]               cfg_col,
  input  logic [19:0]              cfg_addr,
  input  logic [31:0]              cfg_data,
  // IO interface: raw samples
  input  logic                     io_wr_valid,
  input  logic [$clog2(SB_CH)-1:0] io_wr_ch,
  input  logic [15:0]              io_wr_sample,
  // status
  output logic                     unit_busy [NR][NC],
  output logic                     unit_done [NR][NC],
  output logic                     sb_overflow,
  output logic [31:0]              sb_overflow_cnt,
  output logic                     sb_underflow,
  output logic                     x_conflict [NR],
  output logic                     y_conflict [NC],
  // called bases
  output logic                     la_step,
  output logic                     base_valid,
  output logic [1:0]               base
);
  localparam int U_SB = 0, U_CIM = 1, U_DPU = 2, U_LA = 3;

  function automatic int unit_kind(input int r, input int c);
    if (r == 0)           return (c == 0) ? U_SB : U_CIM;
    if (r == NR - 1)      return (c == 0) ? U_LA : U_DPU;
    return (r % 2 == 1) ? U_DPU : U_CIM;
  endfunction

  logic [9:0] tx_data [NR][NC][LANES];
  logic [9:0] rx_data [NR][NC][LANES];

  mesh_2d #(.NR(NR), .NC(NC), .LANES(LANES), .W(10)) u_mesh (
    .clk, .rst, .cmd(node_cmd), .tx_data, .rx_data, .x_conflict, .y_conflict
  );

  for (genvar r = 0; r < NR; r++) begin : g_row
    for (genvar c = 0; c < NC; c++) begin : g_col
      localparam int KIND = unit_kind(r, c);
      int10_t in_vec  [LANES];   // unused at the signal buffer, which only sends
      int10_t out_vec [LANES];
      for (genvar l = 0; l < LANES; l++) begin : g_lane
        assign in_vec[l]        = int10_t'(rx_data[r][c][l]);
        assign tx_data[r][c][l] = out_vec[l];
      end

      if (KIND == U_SB) begin : g_sb
        signal_buffer #(.N_CH(SB_CH), .DEPTH(SB_DEPTH), .SAMPLE_W(16), .LANES(LANES)) u_sb (
          .clk, .rst,
          .wr_valid(io_wr_valid), .wr_ch(io_wr_ch), .wr_sample(io_wr_sample),
          .start(unit_cmd[r][c].start), .cmd(unit_cmd[r][c].sb),
          .busy(unit_busy[r][c]), .done(unit_done[r][c]), .out_vec,
          .overflow(sb_overflow), .overflow_cnt(sb_overflow_cnt), .underflow(sb_underflow)
        );
      end else if (KIND == U_CIM) begin : g_cim
        cim_tile #(.ROWS(LANES), .COLS(LANES), .VMM_LAT(VMM_LAT)) u_cim (
          .clk, .rst, .cfg_we(cfg_we && int'(cfg_row) == r && int'(cfg_col) == c), .cfg_addr, .cfg_data,
          .start(unit_cmd[r][c].start), .in_vec,
          .busy(unit_busy[r][c]), .done(unit_done[r][c]), .out_vec
        );
      end else if (KIND == U_DPU) begin : g_dpu
        dpu #(.LANES(LANES), .PARAM_DEPTH(PARAM_DEPTH), .CELL_DEPTH(CELL_DEPTH)) u_dpu (
          .clk, .rst, .cfg_we(cfg_we && int'(cfg_row) == r && int'(cfg_col) == c), .cfg_addr(cfg_addr[15:0]), .cfg_data,
          .in_vec, .start(unit_cmd[r][c].start), .cmd(unit_cmd[r][c].dpu),
          .busy(unit_busy[r][c]), .done(unit_done[r][c]), .out_vec
        );
      end else begin : g_la
        logic signed [9:0] tp [la_pkg::N_TR];
        for (genvar k = 0; k < la_pkg::N_TR; k++) begin : g_tp
          assign tp[k] = (int'(unit_cmd[r][c].la_off) + k < LANES)
                       ? in_vec[int'(unit_cmd[r][c].la_off) + k] : '0;
        end
        la_decoder #(.L_TP(L_TP), .L_MLP(L_MLP), .IN_W(10)) u_la (
          .clk, .rst, .en(unit_cmd[r][c].start), .tp_in(tp),
          .step(la_step), .valid(base_valid), .base
        );
        assign unit_busy[r][c] = 1'b0;
        assign unit_done[r][c] = la_step;
        for (genvar l = 0; l < LANES; l++) begin : g_zero
          assign out_vec[l] = '0;
        end
      end
    end
  end
endmodule
