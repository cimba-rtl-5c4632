// tb_la_decoder: self-checking testbench of the lookahead (LA) CTC decoder.
//
// Two decoders run side by side on the same stream of 20 transition scores per timestep:
// one with the paper's defaults (L_TP = 4, L_MLP = 1) and one with L_TP = 2, L_MLP = 3
// (the lookahead depth drawn in the paper's decoder figure). For each, an independent
// model written over whole time series (not as a pipeline) gives the expected outputs:
//   alpha(n)  = per-state logsumexp of the scores of timestep n (rows of 5 transitions),
//   Y(n)[k]   = x(n)[k] + alpha(n-1)[src(k)] - min alpha(n-1)          (lookbehind)
//   beta      = chained lookahead over Y(n+L) .. Y(n+1), starting from 0 (per source
//               state: logsumexp over the 5 transitions leaving it of Y + beta[dst])
//   Q(n)      = Y(n) + beta[dst] - min beta, minus the logsumexp of all 20 (log-softmax)
// and the same again with max in place of logsumexp on Q (the MLP half), whose argmax k
// gives the CTC output: valid = (k mod 5 != 0), base = (k >> 2) mod 4.
// Checks: every step/valid/base bit for timesteps from 1 on (timestep 0 depends on reset
// values), the latency (the result for timestep n is registered at the edge that accepts
// timestep n + 2*L_TP + 2*L_MLP + 1, i.e. 11 cycles after it when en is high every cycle;
// step rises with the 12th accepted timestep), the stall behaviour when en is low (nothing
// moves), throughput of one timestep per cycle, and, on a planted path of strongly
// favoured transitions, that the decoder emits exactly the bases of that path.
module tb_la_decoder;
  localparam int N_TR = 20;
  localparam int N    = 400;             // random timesteps
  localparam int NP   = 120;             // planted-path timesteps
  localparam int NT   = N + NP + 20;
  localparam int FRAC = 4;
  localparam int LUT_N = 8 << FRAC;

  logic clk = 1'b0, rst = 1'b1, en;
  logic signed [9:0] tp [N_TR];
  logic step_a, valid_a, step_b, valid_b;
  logic [1:0] base_a, base_b;
  int checks = 0, failures = 0;

  la_decoder dut_a (.clk, .rst, .en, .tp_in(tp), .step(step_a), .valid(valid_a), .base(base_a));
  la_decoder #(.L_TP(2), .L_MLP(3)) dut_b (.clk, .rst, .en, .tp_in(tp), .step(step_b),
                                          .valid(valid_b), .base(base_b));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------------ reference model
  typedef int vec_t [N_TR];
  typedef int st_t [4];
  int lut [LUT_N];
  int xs [NT][N_TR];

  function automatic int sat(input int v);
    if (v > 32767)  return 32767;
    if (v < -32768) return -32768;
    return v;
  endfunction
  function automatic int src(input int k);  // state a transition leaves
    return (k % 5 == 0) ? k / 5 : k % 5 - 1;
  endfunction
  function automatic int dst(input int k);  // state a transition enters
    return k / 5;
  endfunction
  function automatic int comb2(input int a, input int b, input bit mx);
    int m, d;
    m = (a > b) ? a : b;
    if (mx) return m;
    d = sat((a > b) ? a - b : b - a);
    return (d < LUT_N) ? sat(m + lut[d]) : m;
  endfunction
  // pairwise tree, odd element passed up
  function automatic int tree(input int v [$], input bit mx);
    int w [$];
    while (v.size() > 1) begin
      w = {};
      for (int i = 0; i + 1 < v.size(); i += 2) w.push_back(comb2(v[i], v[i+1], mx));
      if (v.size() % 2 == 1) w.push_back(v[v.size()-1]);
      v = w;
    end
    return v[0];
  endfunction
  function automatic st_t rows(input vec_t x, input bit mx);
    st_t r;
    for (int d = 0; d < 4; d++) r[d] = tree('{x[5*d], x[5*d+1], x[5*d+2], x[5*d+3], x[5*d+4]}, mx);
    return r;
  endfunction
  function automatic int mn4(input st_t s);
    int m;
    m = s[0];
    for (int d = 1; d < 4; d++) if (s[d] < m) m = s[d];
    return m;
  endfunction
  function automatic vec_t behind(input vec_t x, input st_t a);
    vec_t y;
    for (int k = 0; k < N_TR; k++) y[k] = sat(x[k] + sat(a[src(k)] - mn4(a)));
    return y;
  endfunction
  function automatic vec_t ahead(input vec_t x, input st_t b);
    vec_t y;
    for (int k = 0; k < N_TR; k++) y[k] = sat(x[k] + sat(b[dst(k)] - mn4(b)));
    return y;
  endfunction
  // beta step: per source state, combine the transitions leaving it (in the order of
  // the paper's lookbehind table: the stay first, then by destination)
  function automatic st_t beta_step(input vec_t y, input st_t b, input bit mx);
    vec_t v;
    st_t r;
    int q [$];
    v = ahead(y, b);
    for (int c = 0; c < 4; c++) begin
      q = {};
      q.push_back(v[5*c]);
      for (int d = 0; d < 4; d++)
        for (int k = 0; k < N_TR; k++)
          if (k % 5 != 0 && src(k) == c && dst(k) == d) q.push_back(v[k]);
      r[c] = tree(q, mx);
    end
    return r;
  endfunction

  // expected argmax per timestep for lookahead depths lt, lm
  function automatic void model(input int lt, input int lm, output int am [NT]);
    vec_t x, y [NT], q [NT], z [NT];
    st_t a_prev, m_prev, b;
    vec_t post;
    int tot, best;
    for (int d = 0; d < 4; d++) a_prev[d] = 0;
    for (int n = 0; n < NT; n++) begin
      for (int k = 0; k < N_TR; k++) x[k] = xs[n][k];
      y[n] = behind(x, a_prev);
      a_prev = rows(x, 1'b0);
    end
    for (int n = 0; n + lt < NT; n++) begin
      int qq [$];
      for (int d = 0; d < 4; d++) b[d] = 0;
      for (int j = lt; j >= 1; j--) b = beta_step(y[n+j], b, 1'b0);
      post = ahead(y[n], b);
      qq = {};
      for (int k = 0; k < N_TR; k++) qq.push_back(post[k]);
      tot = tree(qq, 1'b0);
      for (int k = 0; k < N_TR; k++) q[n][k] = sat(post[k] - tot);
    end
    for (int d = 0; d < 4; d++) m_prev[d] = 0;
    for (int n = 0; n + lt < NT; n++) begin
      z[n] = behind(q[n], m_prev);
      m_prev = rows(q[n], 1'b1);
    end
    for (int n = 0; n < NT; n++) am[n] = -1;
    for (int n = 0; n + lt + lm < NT; n++) begin
      for (int d = 0; d < 4; d++) b[d] = 0;
      for (int j = lm; j >= 1; j--) b = beta_step(z[n+j], b, 1'b1);
      post = ahead(z[n], b);
      best = 0;
      for (int k = 1; k < N_TR; k++) if (post[k] > post[best]) best = k;
      am[n] = best;
    end
  endfunction

  // ------------------------------------------------------------------ stimulus, checks
  int am_a [NT], am_b [NT];
  int path_k [NT];
  int n_acc = 0;                         // accepted timesteps
  int n_stall = 0, n_valid = 0, n_stay = 0, n_path_ok = 0;

  task automatic check_out(input string nm, input logic st, input logic v, input logic [1:0] bs,
                           input int lat, input int am [NT]);
    int t;
    t = n_acc - 1 - lat;                 // timestep whose result was registered now
    checks++;
    if (st !== (n_acc - 1 >= lat)) begin
      failures++;
      $display("%s: step %0b at accepted %0d", nm, st, n_acc - 1);
    end
    if (st && t >= 1 && t < NT && am[t] >= 0) begin
      checks += 2;
      if (v !== (am[t] % 5 != 0)) begin
        failures++;
        if (failures < 10) $display("%s: valid mismatch t=%0d am=%0d", nm, t, am[t]);
      end
      if (v && bs !== 2'((am[t] >> 2) % 4)) begin
        failures++;
        if (failures < 10) $display("%s: base mismatch t=%0d", nm, t);
      end
      if (nm == "A") begin
        if (v) n_valid++; else n_stay++;
        if (path_k[t] >= 0) begin
          checks++;
          if (v !== (path_k[t] % 5 != 0) || (v && bs !== 2'((path_k[t] >> 2) % 4))) begin
            failures++;
            $display("planted path lost at t=%0d: transition %0d", t, path_k[t]);
          end else n_path_ok++;
        end
      end
    end
  endtask

  logic [1:0] base_a_q, base_b_q;
  logic       valid_a_q;
  always @(posedge clk) begin
    logic e;
    e = en;                              // en as sampled by this edge
    #1;
    if (!rst) begin
      if (e) begin
        n_acc++;
        check_out("A", step_a, valid_a, base_a, 11, am_a);
        check_out("B", step_b, valid_b, base_b, 11, am_b);
      end else begin
        // stalled: no step, outputs held
        n_stall++;
        checks += 2;
        if (step_a || step_b) begin
          failures++;
          $display("step during stall");
        end
        if (base_a !== base_a_q || base_b !== base_b_q) begin
          failures++;
          $display("base changed during stall");
        end
      end
      base_a_q = base_a;
      base_b_q = base_b;
    end
  end

  initial begin
    int s;
    for (int i = 0; i < LUT_N; i++)
      lut[i] = int'($floor($ln(1.0 + $exp(-real'(i) / real'(1 << FRAC))) * real'(1 << FRAC) + 0.5));
    for (int n = 0; n < NT; n++) path_k[n] = -1;
    // random scores, then a planted path of consistent transitions
    for (int n = 0; n < N; n++)
      for (int k = 0; k < N_TR; k++) xs[n][k] = int'($urandom % 321) - 160;
    s = 0;
    for (int n = N; n < NT; n++) begin
      int k;
      k = int'($urandom % 5);
      k = (k == 0) ? 5 * s : 5 * (int'($urandom % 4)) + k;   // stay in s, or a step
      while (src(k) != s) k = 5 * (int'($urandom % 4)) + s + 1;
      for (int j = 0; j < N_TR; j++) xs[n][j] = int'($urandom % 41) - 300;
      xs[n][k] = 300;
      if (n >= N + 10 && n < NT - 12) path_k[n] = k;
      s = dst(k);
    end
    model(4, 1, am_a);
    model(2, 3, am_b);

    en = 1'b0;
    for (int k = 0; k < N_TR; k++) tp[k] = '0;
    repeat (3) @(posedge clk);
    rst <= 1'b0;
    @(posedge clk);
    for (int n = 0; n < NT; n++) begin
      // occasional stall cycles
      if (n > 20 && ($urandom % 8) == 0) begin
        en <= 1'b0;
        @(posedge clk);
      end
      en <= 1'b1;
      for (int k = 0; k < N_TR; k++) tp[k] <= 10'(xs[n][k]);
      @(posedge clk);
    end
    en <= 1'b0;
    repeat (3) @(posedge clk);
    checks += 4;
    if (n_stall == 0) begin failures++; $display("no stall exercised"); end
    if (n_valid == 0 || n_stay == 0) begin failures++; $display("valid/stay not both seen"); end
    if (n_path_ok < NP - 30) begin failures++; $display("planted path checked only %0d", n_path_ok); end
    if (n_acc != NT) begin failures++; $display("accepted %0d", n_acc); end
    $display("stalls %0d emitted %0d stays %0d path steps %0d", n_stall, n_valid, n_stay, n_path_ok);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
