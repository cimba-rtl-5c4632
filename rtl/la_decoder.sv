// la_decoder: LookAround (LA) CRF decoder, one timestep per cycle.
//
// Full CRF decoding needs every timestep of a chunk before the first base can be decided
// (a forward pass, then a backward pass). The LA decoder replaces this by a sliding
// window: timestep n looks one step back (n-1) and L steps ahead (n+1 .. n+L), so
// timesteps can be dropped as soon as the window has passed and bases stream out.
// It works in two symmetric halves, as in the paper's block diagram:
//
//   TP half (transition probabilities, log-sum-exp arithmetic)
//     lookbehind: a[d] = logsumexp of the 20 raw scores of timestep n-1 ending in state d
//       (one row of 5); lb_n[k] = x_n[k] + a[src(k)] - min(a).
//     shift register of 2*L_TP timesteps of lb.
//     L_TP lookahead elements, one per future timestep, chained from n+L_TP back to n+1:
//       beta_out[c] = logsumexp over the transitions k leaving c of
//                     (lb_m[k] + beta_in[dst(k)] - min(beta_in)),  beta_in = 0 for the first.
//     log(softmax): tp_n[k] = p[k] - logsumexp(p),  p[k] = lb_n[k] + beta[dst(k)] - min(beta).
//   MLP half (most likely path, max arithmetic): the same structure on tp with max in place
//     of logsumexp and L_MLP elements, ending in an argmax over the 20 transitions.
//   CTC: the winning transition k emits a base when k mod 5 != 0 (k mod 5 == 0 is the
//     stay); the base is (k >> 2) mod 4, both as printed in the diagram.
//
// Number format (this design's choice): scores are signed fixed point in natural-log
// units with FRAC fractional bits; INT10 inputs are read in that format. Sums saturate
// to SW bits. logsumexp(a, b) = max(a, b) + LUT(|a - b|), LUT(d) = round(2^FRAC * ln(1 +
// exp(-d / 2^FRAC))) for d below 8, 0 above. Wider sets are reduced pairwise, level by
// level (an odd element passes to the next level). The min subtraction keeps the
// added per-state terms non-negative and bounded. Ties of the argmax go to the lower k.
//
// Timing: with en high every cycle, the result for the sample taken at edge t is in the
// output registers after edge t + 2*L_TP + 2*L_MLP + 1 (11 cycles at L_TP = 4,
// L_MLP = 1, the paper's decode latency), and one timestep is decoded per cycle. The TP
// shift register holds 2*L_TP timesteps and the MLP one 2*L_MLP, as the paper counts.
// Every register advances only when en is high. The control FSM (CTL) counts the first
// 2*L_TP + 2*L_MLP + 1 samples after reset (FILL) and then enables step (RUN): step marks
// a cycle in which a decoded timestep leaves, valid a step that emits a base.
// The lookahead elements read fixed taps of the shift registers (element e reads tap 2e);
// the multiplexers drawn in the diagram would select taps for other L at run time.
module la_decoder
  import la_pkg::*;
#(
  parameter int L_TP  = 4,
  parameter int L_MLP = 1,
  parameter int IN_W  = 10,
  parameter int SW    = 16,
  parameter int FRAC  = 4
) (
  input  logic                   clk,
  input  logic                   rst,
  input  logic                   en,
  input  logic signed [IN_W-1:0] tp_in [N_TR],
  output logic                   step,
  output logic                   valid,
  output logic [1:0]             base
);
  typedef logic signed [SW-1:0] sc_t;
  typedef sc_t vec_t [N_TR];
  typedef sc_t st_t  [N_ST];

  localparam int LUT_N = 8 << FRAC;
  localparam int LAT   = 2 * L_TP + 2 * L_MLP + 1;
  localparam sc_t SMAX = sc_t'({1'b0, {(SW-1){1'b1}}});
  localparam sc_t SMIN = sc_t'({1'b1, {(SW-1){1'b0}}});

  typedef int lut_t [LUT_N];
  function automatic lut_t mk_lut();
    lut_t t;
    for (int i = 0; i < LUT_N; i++)
      t[i] = $rtoi($ln(1.0 + $exp(-real'(i) / real'(1 << FRAC))) * real'(1 << FRAC) + 0.5);
    return t;
  endfunction
  localparam lut_t LSE_LUT = mk_lut();

  // ---------------------------------------------------------------- arithmetic helpers
  function automatic sc_t sat_add(input sc_t a, input sc_t b);
    logic signed [SW:0] s;
    s = {a[SW-1], a} + {b[SW-1], b};
    if (s > (SW+1)'(SMAX)) return SMAX;
    if (s < (SW+1)'(SMIN)) return SMIN;
    return sc_t'(s);
  endfunction

  function automatic sc_t sat_sub(input sc_t a, input sc_t b);
    logic signed [SW:0] s;
    s = {a[SW-1], a} - {b[SW-1], b};
    if (s > (SW+1)'(SMAX)) return SMAX;
    if (s < (SW+1)'(SMIN)) return SMIN;
    return sc_t'(s);
  endfunction

  function automatic sc_t lse2(input sc_t a, input sc_t b);
    sc_t mx, d;
    mx = (a > b) ? a : b;
    d  = (a > b) ? sat_sub(a, b) : sat_sub(b, a);
    if (d < sc_t'(LUT_N)) return sat_add(mx, sc_t'(LSE_LUT[d[$clog2(LUT_N)-1:0]]));
    return mx;
  endfunction

  function automatic sc_t red2(input sc_t a, input sc_t b, input logic use_max);
    if (use_max) return (a > b) ? a : b;
    return lse2(a, b);
  endfunction

  // pairwise level-by-level reduction of v[0..n-1]
  function automatic sc_t reduce(input vec_t v, input int n, input logic use_max);
    vec_t w;
    int m;
    w = v;
    m = n;
    while (m > 1) begin
      for (int i = 0; i < m / 2; i++) w[i] = red2(w[2*i], w[2*i+1], use_max);
      if (m % 2 == 1) w[m/2] = w[m-1];
      m = (m + 1) / 2;
    end
    return w[0];
  endfunction

  function automatic st_t row_reduce(input vec_t x, input logic use_max);
    st_t  r;
    vec_t g;
    for (int d = 0; d < N_ST; d++) begin
      g = x;
      for (int j = 0; j < N_GRP; j++) g[j] = x[N_GRP*d + j];
      r[d] = reduce(g, N_GRP, use_max);
    end
    return r;
  endfunction

  function automatic sc_t st_min(input st_t s);
    sc_t m;
    m = s[0];
    for (int d = 1; d < N_ST; d++) if (s[d] < m) m = s[d];
    return m;
  endfunction

  // lookbehind: x[k] + a[src(k)] - min(a)
  function automatic vec_t look_behind(input vec_t x, input st_t a);
    vec_t y;
    sc_t  mn;
    mn = st_min(a);
    for (int k = 0; k < N_TR; k++) y[k] = sat_add(x[k], sat_sub(a[SRC_IDX[k]], mn));
    return y;
  endfunction

  // x[k] + b[dst(k)] - min(b)
  function automatic vec_t add_ahead(input vec_t x, input st_t b);
    vec_t y;
    sc_t  mn;
    mn = st_min(b);
    for (int k = 0; k < N_TR; k++) y[k] = sat_add(x[k], sat_sub(b[dst_of(k)], mn));
    return y;
  endfunction

  // one lookahead element: gather per source state
  function automatic st_t look_ahead(input vec_t x, input st_t b, input logic use_max);
    vec_t v, g;
    st_t  r;
    v = add_ahead(x, b);
    for (int c = 0; c < N_ST; c++) begin
      g = v;
      for (int j = 0; j < N_GRP; j++) g[j] = v[SRC_GRP[c][j]];
      r[c] = reduce(g, N_GRP, use_max);
    end
    return r;
  endfunction

  // ---------------------------------------------------------------- control FSM
  typedef enum logic {S_FILL, S_RUN} ctl_e;
  ctl_e ctl;
  logic [$clog2(LAT+1)-1:0] fill_cnt;

  always_ff @(posedge clk) begin
    if (rst) begin
      ctl      <= S_FILL;
      fill_cnt <= '0;
    end else if (en && ctl == S_FILL) begin
      fill_cnt <= fill_cnt + 1'b1;
      if (int'(fill_cnt) == LAT - 1) ctl <= S_RUN;
    end
  end

  // ---------------------------------------------------------------- TP half
  vec_t xin;
  always_comb
    for (int k = 0; k < N_TR; k++) xin[k] = sc_t'(tp_in[k]);

  st_t  a_prev;                     // logsumexp rows of the previous raw input
  vec_t tp_sr [2*L_TP];
  st_t  tp_br [L_TP];               // beta entering element e (index 0 unused)
  st_t  tp_bo [L_TP];               // beta leaving element e
  vec_t tp_q;                       // log-softmax result

  always_comb begin
    for (int e = 0; e < L_TP; e++) begin
      st_t bin;
      for (int d = 0; d < N_ST; d++) bin[d] = (e == 0) ? sc_t'(0) : tp_br[e][d];
      tp_bo[e] = look_ahead(tp_sr[2*e], bin, 1'b0);
    end
  end

  vec_t tp_post, tp_next;
  always_comb begin
    sc_t tot;
    tp_post = add_ahead(tp_sr[2*L_TP-1], tp_bo[L_TP-1]);
    tot     = reduce(tp_post, N_TR, 1'b0);
    for (int k = 0; k < N_TR; k++) tp_next[k] = sat_sub(tp_post[k], tot);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int d = 0; d < N_ST; d++) a_prev[d] <= '0;
      for (int i = 0; i < 2*L_TP; i++) for (int k = 0; k < N_TR; k++) tp_sr[i][k] <= '0;
      for (int e = 0; e < L_TP; e++) for (int d = 0; d < N_ST; d++) tp_br[e][d] <= '0;
      for (int k = 0; k < N_TR; k++) tp_q[k] <= '0;
    end else if (en) begin
      a_prev   <= row_reduce(xin, 1'b0);
      tp_sr[0] <= look_behind(xin, a_prev);
      for (int i = 1; i < 2*L_TP; i++) tp_sr[i] <= tp_sr[i-1];
      for (int e = 1; e < L_TP; e++) tp_br[e] <= tp_bo[e-1];
      tp_q <= tp_next;
    end
  end

  // ---------------------------------------------------------------- MLP half
  st_t  m_prev;                     // row maxima of the previous TP result
  vec_t ml_sr [2*L_MLP];
  st_t  ml_br [L_MLP];
  st_t  ml_bo [L_MLP];

  always_comb begin
    for (int e = 0; e < L_MLP; e++) begin
      st_t bin;
      for (int d = 0; d < N_ST; d++) bin[d] = (e == 0) ? sc_t'(0) : ml_br[e][d];
      ml_bo[e] = look_ahead(ml_sr[2*e], bin, 1'b1);
    end
  end

  vec_t ml_post;
  logic [4:0] am;
  always_comb begin
    sc_t best;
    ml_post = add_ahead(ml_sr[2*L_MLP-1], ml_bo[L_MLP-1]);
    am   = '0;
    best = ml_post[0];
    for (int k = 1; k < N_TR; k++)
      if (ml_post[k] > best) begin
        best = ml_post[k];
        am   = 5'(k);
      end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int d = 0; d < N_ST; d++) m_prev[d] <= '0;
      for (int i = 0; i < 2*L_MLP; i++) for (int k = 0; k < N_TR; k++) ml_sr[i][k] <= '0;
      for (int e = 0; e < L_MLP; e++) for (int d = 0; d < N_ST; d++) ml_br[e][d] <= '0;
    end else if (en) begin
      m_prev   <= row_reduce(tp_q, 1'b1);
      ml_sr[0] <= look_behind(tp_q, m_prev);
      for (int i = 1; i < 2*L_MLP; i++) ml_sr[i] <= ml_sr[i-1];
      for (int e = 1; e < L_MLP; e++) ml_br[e] <= ml_bo[e-1];
    end
  end

  // ---------------------------------------------------------------- CTC output
  always_ff @(posedge clk) begin
    if (rst) begin
      step  <= 1'b0;
      valid <= 1'b0;
      base  <= '0;
    end else begin
      step  <= en && (ctl == S_RUN);
      valid <= en && (ctl == S_RUN) && ((am % 5'd5) != 5'd0);
      if (en) base <= 2'((am >> 2) % 5'd4);
    end
  end

  // the decoder takes exactly one timestep per enabled cycle; step can only follow en
  logic en_q;
  always_ff @(posedge clk) en_q <= rst ? 1'b0 : en;
  always_comb
    if (step) a_step_follows_en: assert (en_q) else $error("step without an accepted sample");
endmodule
