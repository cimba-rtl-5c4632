// pipe_delay: a chain of D registers of width W, used to keep side-band values (indices,
// operands consumed later, valid bits) aligned with the pipelined arithmetic units of the
// DPU. Reset clears every stage. D = 0 is a plain wire.
module pipe_delay #(
  parameter int W = 1,
  parameter int D = 1
) (
  input  logic         clk,
  input  logic         rst,
  input  logic [W-1:0] d,
  output logic [W-1:0] q
);
  if (D == 0) begin : g_wire
    assign q = d;
  end else begin : g_regs
    logic [W-1:0] st [D];
    always_ff @(posedge clk) begin
      if (rst) begin
        for (int i = 0; i < D; i++) st[i] <= '0;
      end else begin
        st[0] <= d;
        for (int i = 1; i < D; i++) st[i] <= st[i-1];
      end
    end
    assign q = st[D-1];
  end
endmodule
