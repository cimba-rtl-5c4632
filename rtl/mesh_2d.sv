// mesh_2d: the 2D mesh interconnect that moves activation vectors between the units of
// the CiMBA accelerator.
//
// The units sit on an NR x NC grid of nodes. Every node row has an X line and every node
// column a Y line, each a bundle of LANES parallel lanes of W bits, and each line crosses
// every node on it. Transfers along X and along Y are independent, so many run at once.
// The network is deterministic and statically scheduled: there is no request, grant or
// handshake; a schedule tells each node, per cycle, what to do (cimba_pkg::mesh_cmd_t):
//   tx_x / tx_y     drive lanes [tx_off, tx_off+tx_len) of the row's X / column's Y line
//                   with those lanes of the node's tx_data vector.
//   rx_x / rx_y     capture lanes [rx_off, rx_off+rx_len) of the X / Y line into the
//                   node's rx_data vector; all other lanes of rx_data keep their value.
//   turn_xy/turn_yx capture lanes [rx_off, rx_off+rx_len) from the X (Y) line and drive
//                   them onto the node's Y (X) line.
// Implicit concatenation: several sources drive disjoint lane ranges of one line in the
// same cycle, or a destination captures different lane ranges at different times (for
// example the input and the hidden vector of an LSTM layer). Multicast: any number of
// nodes on a line may capture the same transfer. Two drivers on one lane in one cycle is
// a schedule error: the lane then carries the OR of the drivers, the line's conflict flag
// is set, and an assertion warns.
// The X/Y line structure, concatenation, multicast and the absence of handshakes are
// the paper's; modelling each line as one multi-drop bundle per row/column, the lane
// ranges and the command format are this design's.
//
// Timing (3 cycles per transfer and 3 more per turn, the paper's mesh latencies): a node
// issuing tx at cycle t has its data registered at the edge ending t (source register),
// the line is registered at the next edge (t+1), and a destination issuing rx at cycle
// t+2 holds the data in rx_data after the edge ending t+2. A turn is issued at t+2 in
// place of an rx; the turned data is on the other line's register after t+4 and a
// destination captures it with rx at t+5, 3 cycles after a plain transfer.
module mesh_2d
  import cimba_pkg::*;
#(
  parameter int NR    = 6,
  parameter int NC    = 4,
  parameter int LANES = 512,
  parameter int W     = 10
) (
  input  logic         clk,
  input  logic         rst,
  input  mesh_cmd_t    cmd     [NR][NC],
  input  logic [W-1:0] tx_data [NR][NC][LANES],
  output logic [W-1:0] rx_data [NR][NC][LANES],
  output logic         x_conflict [NR],
  output logic         y_conflict [NC]
);
  typedef logic [W-1:0] vec_t [LANES];

  function automatic logic in_rng(input int l, input logic [OFF_W-1:0] off,
                                  input logic [LEN_W-1:0] len);
    return (l >= int'(off)) && (l < int'(off) + int'(len));
  endfunction

  // source registers
  vec_t             txd [NR][NC];
  logic             txe_x [NR][NC], txe_y [NR][NC];
  logic [OFF_W-1:0] tx_o [NR][NC];
  logic [LEN_W-1:0] tx_l [NR][NC];
  // turn pipeline (2 stages), dir = 1: X to Y
  vec_t             t1d [NR][NC], t2d [NR][NC];
  logic             t1v [NR][NC], t2v [NR][NC], t1dir [NR][NC], t2dir [NR][NC];
  logic [OFF_W-1:0] t1o [NR][NC], t2o [NR][NC];
  logic [LEN_W-1:0] t1l [NR][NC], t2l [NR][NC];
  // line registers
  vec_t xb [NR];
  vec_t yb [NC];

  // line drivers, lane by lane
  vec_t             xbus [NR];
  vec_t             ybus [NC];
  logic [LANES-1:0] xlc [NR];     // lane has more than one driver
  logic [LANES-1:0] ylc [NC];
  logic             xcf [NR];
  logic             ycf [NC];

  for (genvar r = 0; r < NR; r++) begin : g_xl
    for (genvar l = 0; l < LANES; l++) begin : g_lane
      always_comb begin
        int n;
        n = 0;
        xbus[r][l] = '0;
        for (int c = 0; c < NC; c++) begin
          if (txe_x[r][c] && in_rng(l, tx_o[r][c], tx_l[r][c])) begin
            xbus[r][l] = xbus[r][l] | txd[r][c][l];
            n++;
          end
          if (t2v[r][c] && !t2dir[r][c] && in_rng(l, t2o[r][c], t2l[r][c])) begin
            xbus[r][l] = xbus[r][l] | t2d[r][c][l];
            n++;
          end
        end
        xlc[r][l] = (n > 1);
      end
    end
    assign xcf[r] = |xlc[r];
    always_ff @(posedge clk) begin
      if (rst) begin
        xb[r]         <= '{default: '0};
        x_conflict[r] <= 1'b0;
      end else begin
        xb[r]         <= xbus[r];
        x_conflict[r] <= xcf[r];
      end
    end
  end

  for (genvar c = 0; c < NC; c++) begin : g_yl
    for (genvar l = 0; l < LANES; l++) begin : g_lane
      always_comb begin
        int n;
        n = 0;
        ybus[c][l] = '0;
        for (int r = 0; r < NR; r++) begin
          if (txe_y[r][c] && in_rng(l, tx_o[r][c], tx_l[r][c])) begin
            ybus[c][l] = ybus[c][l] | txd[r][c][l];
            n++;
          end
          if (t2v[r][c] && t2dir[r][c] && in_rng(l, t2o[r][c], t2l[r][c])) begin
            ybus[c][l] = ybus[c][l] | t2d[r][c][l];
            n++;
          end
        end
        ylc[c][l] = (n > 1);
      end
    end
    assign ycf[c] = |ylc[c];
    always_ff @(posedge clk) begin
      if (rst) begin
        yb[c]         <= '{default: '0};
        y_conflict[c] <= 1'b0;
      end else begin
        yb[c]         <= ybus[c];
        y_conflict[c] <= ycf[c];
      end
    end
  end

  // node registers
  for (genvar r = 0; r < NR; r++) begin : g_nr
    for (genvar c = 0; c < NC; c++) begin : g_nc
      always_ff @(posedge clk) begin
        if (rst) begin
          txe_x[r][c] <= 1'b0; txe_y[r][c] <= 1'b0; tx_o[r][c] <= '0; tx_l[r][c] <= '0;
          t1v[r][c] <= 1'b0; t2v[r][c] <= 1'b0; t1dir[r][c] <= 1'b0; t2dir[r][c] <= 1'b0;
          t1o[r][c] <= '0; t1l[r][c] <= '0; t2o[r][c] <= '0; t2l[r][c] <= '0;
          txd[r][c]     <= '{default: '0};
          t1d[r][c]     <= '{default: '0};
          t2d[r][c]     <= '{default: '0};
        end else begin
          // source register
          txd[r][c]   <= tx_data[r][c];
          txe_x[r][c] <= cmd[r][c].tx_x;
          txe_y[r][c] <= cmd[r][c].tx_y;
          tx_o[r][c]  <= cmd[r][c].tx_off;
          tx_l[r][c]  <= cmd[r][c].tx_len;
          // turn pipeline
          t1v[r][c]   <= cmd[r][c].turn_xy || cmd[r][c].turn_yx;
          t1dir[r][c] <= cmd[r][c].turn_xy;
          t1o[r][c]   <= cmd[r][c].rx_off;
          t1l[r][c]   <= cmd[r][c].rx_len;
          t1d[r][c]   <= cmd[r][c].turn_xy ? xb[r] : yb[c];
          t2v[r][c]   <= t1v[r][c];
          t2dir[r][c] <= t1dir[r][c];
          t2o[r][c]   <= t1o[r][c];
          t2l[r][c]   <= t1l[r][c];
          t2d[r][c]   <= t1d[r][c];
        end
      end
      // capture, lane by lane
      for (genvar l = 0; l < LANES; l++) begin : g_cap
        always_ff @(posedge clk) begin
          if (rst)
            rx_data[r][c][l] <= '0;
          else if ((cmd[r][c].rx_x || cmd[r][c].rx_y) && in_rng(l, cmd[r][c].rx_off, cmd[r][c].rx_len))
            rx_data[r][c][l] <= cmd[r][c].rx_x ? xb[r][l] : yb[c][l];
        end
      end
    end
  end

  // a lane must have at most one driver per cycle
  always_comb begin
    for (int r = 0; r < NR; r++)
      a_x_one_driver: assert (!xcf[r] || rst) else $warning("mesh: X line %0d driven twice", r);
    for (int c = 0; c < NC; c++)
      a_y_one_driver: assert (!ycf[c] || rst) else $warning("mesh: Y line %0d driven twice", c);
  end
endmodule
