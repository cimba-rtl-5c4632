// tb_mesh_2d: self-checking testbench of the 2D mesh interconnect.
//
// It runs scripted transfers on the full 6 x 4 grid (with 32 lanes per line to keep the
// simulation small) and checks, cycle by cycle:
//   - an X transfer and a Y transfer arrive 3 cycles after they are sent (the paper's
//     E-W / N-S latency) and a capture one cycle early still sees the old line value,
//   - implicit concatenation: two sources on disjoint lane ranges of one line in the same
//     cycle are captured as one vector,
//   - multicast: two destinations capture the same transfer,
//   - a turn from X to Y and from Y to X adds 3 cycles (the paper's turn latency),
//   - lanes outside a capture range keep their value,
//   - two drivers on one lane raise the line's conflict flag (and only then),
//   - many random concurrent transfers on different rows and columns, against a model.
// Each mechanism is counted; one that never happened counts as a failure.
module tb_mesh_2d;
  import cimba_pkg::*;

  localparam int NR = 6, NC = 4, L = 32, W = 10;

  logic clk = 1'b0, rst = 1'b1;
  mesh_cmd_t cmd [NR][NC];
  logic [W-1:0] txv [NR][NC][L];
  logic [W-1:0] rxv [NR][NC][L];
  logic xcf [NR], ycf [NC];
  int checks = 0, failures = 0;
  int n_x = 0, n_y = 0, n_cat = 0, n_mc = 0, n_turn = 0, n_conf = 0, n_rand = 0;

  mesh_2d #(.NR(NR), .NC(NC), .LANES(L), .W(W)) dut (
    .clk, .rst, .cmd, .tx_data(txv), .rx_data(rxv), .x_conflict(xcf), .y_conflict(ycf)
  );

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic idle_all();
    for (int r = 0; r < NR; r++) for (int c = 0; c < NC; c++) cmd[r][c] = '0;
  endtask
  task automatic new_data();
    for (int r = 0; r < NR; r++) for (int c = 0; c < NC; c++) for (int l = 0; l < L; l++)
      txv[r][c][l] = W'($urandom);
  endtask
  // advance one cycle with the commands set, then clear them
  task automatic tick();
    @(posedge clk);
    #1;
    idle_all();
  endtask
  function automatic mesh_cmd_t tx(input bit y, input int off, input int len);
    mesh_cmd_t m;
    m = '0;
    if (y) m.tx_y = 1'b1; else m.tx_x = 1'b1;
    m.tx_off = OFF_W'(off); m.tx_len = LEN_W'(len);
    return m;
  endfunction
  function automatic mesh_cmd_t rx(input bit y, input int off, input int len);
    mesh_cmd_t m;
    m = '0;
    if (y) m.rx_y = 1'b1; else m.rx_x = 1'b1;
    m.rx_off = OFF_W'(off); m.rx_len = LEN_W'(len);
    return m;
  endfunction
  function automatic mesh_cmd_t turn(input bit xy, input int off, input int len);
    mesh_cmd_t m;
    m = '0;
    if (xy) m.turn_xy = 1'b1; else m.turn_yx = 1'b1;
    m.rx_off = OFF_W'(off); m.rx_len = LEN_W'(len);
    return m;
  endfunction

  // compare lanes [off, off+len) of node (r, c) with expected values
  task automatic expect_rx(input string what, input int r, input int c, input int off,
                           input int len, input logic [W-1:0] ev [L]);
    checks++;
    for (int l = off; l < off + len; l++)
      if (rxv[r][c][l] !== ev[l]) begin
        failures++;
        $display("%s: node (%0d,%0d) lane %0d got %h expected %h", what, r, c, l, rxv[r][c][l], ev[l]);
        break;
      end
  endtask

  logic [W-1:0] ev [L], keep [L];

  initial begin
    idle_all();
    new_data();
    repeat (3) @(posedge clk);
    rst <= 1'b0;
    @(posedge clk);
    #1;

    // 1. X transfer (1,0) -> (1,3); a capture one cycle early sees the old (reset) line
    cmd[1][0] = tx(0, 0, 8);
    for (int l = 0; l < L; l++) ev[l] = txv[1][0][l];
    tick();                                  // edge t: source register
    cmd[1][2] = rx(0, 0, 8);                 // edge t+1: too early
    tick();
    cmd[1][3] = rx(0, 0, 8);                 // edge t+2: arrives
    tick();
    checks++;
    for (int l = 0; l < 8; l++)
      if (rxv[1][2][l] !== '0) begin
        failures++;
        $display("early capture already saw the data");
        break;
      end
    expect_rx("X", 1, 3, 0, 8, ev);
    n_x++;

    // 2. Y transfer (0,1) -> (4,1) lanes [4, 20), lanes outside keep their value
    new_data();
    for (int l = 0; l < L; l++) keep[l] = rxv[4][1][l];
    cmd[0][1] = tx(1, 4, 16);
    for (int l = 0; l < L; l++) ev[l] = (l >= 4 && l < 20) ? txv[0][1][l] : keep[l];
    tick(); tick();
    cmd[4][1] = rx(1, 4, 16);
    tick();
    expect_rx("Y", 4, 1, 0, L, ev);
    n_y++;

    // 3. concatenation on row 2 and multicast to (2,2), (2,3)
    new_data();
    cmd[2][0] = tx(0, 0, 10);
    cmd[2][1] = tx(0, 10, 22);
    for (int l = 0; l < L; l++) ev[l] = (l < 10) ? txv[2][0][l] : txv[2][1][l];
    tick();
    checks++;
    tick();
    if (xcf[2]) begin failures++; $display("false conflict"); end
    cmd[2][2] = rx(0, 0, L);
    cmd[2][3] = rx(0, 0, L);
    tick();
    expect_rx("concat", 2, 2, 0, L, ev);
    expect_rx("multicast", 2, 3, 0, L, ev);
    n_cat++;
    n_mc++;

    // 4. turn X -> Y at (3,2): (3,0) sends on row 3, (0,2) receives on column 2
    new_data();
    cmd[3][0] = tx(0, 0, 16);
    for (int l = 0; l < L; l++) ev[l] = txv[3][0][l];
    tick(); tick();
    cmd[3][2] = turn(1, 0, 16);              // t+2
    tick(); tick(); tick();
    cmd[0][2] = rx(1, 0, 16);                // t+5
    tick();
    expect_rx("turn XY", 0, 2, 0, 16, ev);
    n_turn++;

    // 5. turn Y -> X at (5,3): (1,3) sends on column 3, (5,1) receives on row 5
    new_data();
    cmd[1][3] = tx(1, 16, 16);
    for (int l = 0; l < L; l++) ev[l] = txv[1][3][l];
    tick(); tick();
    cmd[5][3] = turn(0, 16, 16);
    tick(); tick(); tick();
    cmd[5][1] = rx(0, 16, 16);
    tick();
    expect_rx("turn YX", 5, 1, 16, 16, ev);
    n_turn++;

    // 6. conflict: (4,0) and (4,2) both drive lane 7 of row 4
    cmd[4][0] = tx(0, 0, 8);
    cmd[4][2] = tx(0, 7, 4);
    tick();
    tick();
    checks++;
    if (!xcf[4]) begin failures++; $display("conflict not flagged"); end
    else n_conf++;
    tick();
    checks++;
    if (xcf[4]) begin failures++; $display("conflict flag stuck"); end

    // 7. random concurrent transfers: every row sends from one node to another, and
    //    every column likewise (all on lanes [0, L/2)), captured 2 cycles after sending
    for (int it = 0; it < 200; it++) begin
      int sc [NR], dc [NR], sr [NC], dr [NC];
      logic [W-1:0] exr [NR][L], exc [NC][L];
      new_data();
      for (int r = 0; r < NR; r++) begin
        sc[r] = int'($urandom % NC);
        dc[r] = (sc[r] + 1 + int'($urandom % (NC - 1))) % NC;
        cmd[r][sc[r]] = tx(0, 0, L / 2);
        for (int l = 0; l < L; l++) exr[r][l] = txv[r][sc[r]][l];
      end
      for (int c = 0; c < NC; c++) begin
        sr[c] = int'($urandom % NR);
        dr[c] = (sr[c] + 1 + int'($urandom % (NR - 1))) % NR;
        cmd[sr[c]][c].tx_y   = 1'b1;          // a node may send on X and Y at once,
        cmd[sr[c]][c].tx_off = OFF_W'(0);     // but with one range: use full width on Y
        cmd[sr[c]][c].tx_len = LEN_W'(L / 2);
        for (int l = 0; l < L; l++) exc[c][l] = txv[sr[c]][c][l];
      end
      // a node sending on both X and Y drives the same lanes on both
      tick(); tick();
      for (int r = 0; r < NR; r++) cmd[r][dc[r]] = rx(0, 0, L / 2);
      for (int c = 0; c < NC; c++)
        if (!(cmd[dr[c]][c].rx_x)) cmd[dr[c]][c] = rx(1, 0, L / 2);
        else dr[c] = -1;                     // that node captures from X this cycle
      tick();
      for (int r = 0; r < NR; r++) expect_rx("random X", r, dc[r], 0, L / 2, exr[r]);
      for (int c = 0; c < NC; c++)
        if (dr[c] >= 0) begin
          logic [W-1:0] e2 [L];
          for (int l = 0; l < L; l++) e2[l] = exc[c][l];
          expect_rx("random Y", dr[c], c, 0, L / 2, e2);
        end
      n_rand++;
    end

    checks += 7;
    if (n_x == 0 || n_y == 0 || n_cat == 0 || n_mc == 0 || n_turn < 2 || n_conf == 0 || n_rand == 0) begin
      failures++;
      $display("a mechanism was not exercised");
    end
    $display("X %0d Y %0d concat %0d multicast %0d turns %0d conflicts %0d random %0d",
             n_x, n_y, n_cat, n_mc, n_turn, n_conf, n_rand);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
