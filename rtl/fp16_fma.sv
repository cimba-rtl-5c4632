// fp16_fma: pipelined binary16 fused multiply-add, y = a*b + c.
//
// This is the arithmetic element of the DPU: its FMA tree, the affine scaling, the batch
// normalisation and the element-wise ADD and MUL of the LSTM auxiliary flow are all
// instances of it (ADD is a*1+c, MUL is a*b+0). The result is computed exactly and
// rounded once to nearest-even (see fp16_pkg).
//
// Timing: fully pipelined, one operation per cycle; the result and out_valid appear LAT
// clock edges after in_valid and the operands are sampled. LAT defaults to 3 cycles, the
// latency the paper gives for BatchNorm, ADD and MUL in the DPU. How the work is spread
// over the stages is this design's choice: the arithmetic is done in the first stage and
// the remaining stages are registers that a synthesis tool may retime.
module fp16_fma
  import fp16_pkg::*;
#(
  parameter int LAT = 3
) (
  input  logic  clk,
  input  logic  rst,
  input  logic  in_valid,
  input  fp16_t a,
  input  fp16_t b,
  input  fp16_t c,
  output logic  out_valid,
  output fp16_t y
);
  fp16_t r [LAT];
  logic  v [LAT];

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < LAT; i++) begin
        r[i] <= FP16_ZERO;
        v[i] <= 1'b0;
      end
    end else begin
      r[0] <= fp16_fma_f(a, b, c);
      v[0] <= in_valid;
      for (int i = 1; i < LAT; i++) begin
        r[i] <= r[i-1];
        v[i] <= v[i-1];
      end
    end
  end

  assign y         = r[LAT-1];
  assign out_valid = v[LAT-1];
endmodule
