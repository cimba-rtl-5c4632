// dpu_fma_tree: dot product of K binary16 activations with K weights plus a bias, built
// as a tree of fused multiply-add units. It is the digital-convolution engine of the DPU
// (the first 1x5 convolution of the basecaller runs here rather than on a CiM tile).
//
// How it works: the first level multiplies every activation by its weight, with the bias
// added into lane 0 by the same FMA (a*w + bias). Each following level adds pairs with
// FMAs (x*1 + y); an odd element out passes through an FMA as x*1 + 0, which is exact,
// so every path has the same depth. After 1 + ceil(log2 K) levels one value remains.
// The paper says convolution is performed by a tree of FMA units; the pairing order and
// the bias placement are this design's.
//
// Timing: pipelined, one dot product per cycle. Latency is LAT_FMA * (1 + ceil(log2 K))
// cycles: 12 for K = 5 and 3-cycle FMAs.
module dpu_fma_tree
  import fp16_pkg::*;
#(
  parameter int K       = 5,
  parameter int LAT_FMA = 3
) (
  input  logic  clk,
  input  logic  rst,
  input  logic  in_valid,
  input  fp16_t act  [K],
  input  fp16_t wgt  [K],
  input  fp16_t bias,
  output logic  out_valid,
  output fp16_t y
);
  localparam int NLEV = (K > 1) ? $clog2(K) : 0;

  // number of values left after level l (level 0 = products)
  function automatic int cnt(input int l);
    int n;
    n = K;
    for (int i = 0; i < l; i++) n = (n + 1) / 2;
    return n;
  endfunction

  fp16_t lvl [NLEV+1][K];
  logic  vl  [NLEV+1];

  for (genvar i = 0; i < K; i++) begin : g_mul
    logic v_unused;
    fp16_fma #(.LAT(LAT_FMA)) u_mul (
      .clk, .rst, .in_valid(in_valid), .a(act[i]), .b(wgt[i]),
      .c((i == 0) ? bias : FP16_ZERO),
      .out_valid(v_unused), .y(lvl[0][i])
    );
    if (i == 0) begin : g_v
      assign vl[0] = v_unused;
    end
  end

  for (genvar l = 1; l <= NLEV; l++) begin : g_lev
    for (genvar i = 0; i < cnt(l); i++) begin : g_add
      logic  v_unused;
      fp16_t cin;
      if (2*i + 1 < cnt(l-1)) begin : g_pair
        assign cin = lvl[l-1][2*i+1];
      end else begin : g_odd
        assign cin = FP16_ZERO;
      end
      fp16_fma #(.LAT(LAT_FMA)) u_add (
        .clk, .rst, .in_valid(vl[l-1]), .a(lvl[l-1][2*i]), .b(FP16_ONE),
        .c(cin),
        .out_valid(v_unused), .y(lvl[l][i])
      );
      if (i == 0) begin : g_v
        assign vl[l] = v_unused;
      end
    end
    for (genvar i = cnt(l); i < K; i++) begin : g_pad
      assign lvl[l][i] = FP16_ZERO;
    end
  end

  assign y         = lvl[NLEV][0];
  assign out_valid = vl[NLEV];
endmodule
