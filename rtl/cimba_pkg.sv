// cimba_pkg: command types shared by the CiMBA accelerator's units, its mesh and its top.
//
// The accelerator runs a deterministic, statically scheduled dataflow: there is no
// handshake between nodes. An external schedule (a host or sequencer, not part of this
// RTL) issues, per mesh node and per cycle, a mesh command (what the node sends, captures
// or turns) and a unit command (start an operation on the unit at that node). These
// structs are those commands. Field widths fit the default 512-lane mesh.
package cimba_pkg;

  localparam int OFF_W = 10;   // lane offset (0..511)
  localparam int LEN_W = 11;   // lane count  (0..512)

  // Mesh command of one node, see mesh_2d for the timing.
  typedef struct packed {
    logic             tx_x;     // drive lanes [tx_off, tx_off+tx_len) of this row's X line
    logic             tx_y;     // ... of this column's Y line
    logic [OFF_W-1:0] tx_off;
    logic [LEN_W-1:0] tx_len;
    logic             rx_x;     // capture lanes [rx_off, rx_off+rx_len) from the X line
    logic             rx_y;     // ... from the Y line
    logic             turn_xy;  // capture that range from X and re-drive it on Y
    logic             turn_yx;  // capture that range from Y and re-drive it on X
    logic [OFF_W-1:0] rx_off;
    logic [LEN_W-1:0] rx_len;
  } mesh_cmd_t;

  typedef enum logic [1:0] {
    DPU_CONV_AUX = 2'd0,        // batch norm / affine + activation on a CiM result
    DPU_DCONV    = 2'd1,        // digital convolution (FMA tree) + activation
    DPU_LSTM     = 2'd2         // LSTM auxiliary operations
  } dpu_mode_e;

  typedef struct packed {
    dpu_mode_e        mode;
    logic [1:0]       act_tab;  // LUT table used as activation in the convolution modes
    logic [OFF_W-1:0] count;    // number of outputs
    logic [OFF_W-1:0] in_off;   // first input lane
    logic [OFF_W-1:0] out_off;  // first output lane
    logic [OFF_W-1:0] pbase;    // first parameter row
    logic [OFF_W-1:0] nch;      // channels (convolution modes)
    logic [3:0]       stride;   // input step between output positions (DCONV)
  } dpu_cmd_t;

  typedef struct packed {
    logic [8:0]       ch;       // flow-cell channel
    logic [OFF_W-1:0] count;    // samples to read
    logic [OFF_W-1:0] out_off;  // first output lane
    logic [3:0]       shift;    // arithmetic right shift before saturation to INT10
  } sb_cmd_t;

  // Unit command of one node; only the fields of the unit placed there are used.
  typedef struct packed {
    logic             start;    // start (CiM VMM, DPU operation, buffer read) or, for the
                                // decoder, accept one timestep
    dpu_cmd_t         dpu;
    sb_cmd_t          sb;
    logic [OFF_W-1:0] la_off;   // first lane of the 20 transition scores (decoder)
  } unit_cmd_t;

endpackage
