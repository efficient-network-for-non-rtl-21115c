// nbqc_tb_core: stimulus, reference model and checker for the decoder.
//
// Drives a nbqc_decoder instance through its ports (the testbench top
// instantiates the decoder and this core side by side).  For each run it
// makes channel reliabilities for the all-zero codeword with a number of
// symbol errors, decodes with a given iteration count and compares every
// hard decision with a reference decoder written here in the natural
// column order of the code: the parity-check matrix is rebuilt from the
// Class-II construction (W(i,j) = (delta_i + delta_j) + (beta_k + beta_l),
// each entry replaced by its circulant), and every layer is processed
// column by column, without any shuffle network, with the same fixed-point
// rules (normalise to minimum 0, saturate to BQ bits).  The check node
// answer is formed by folding the elementary Min-Max operation over all
// other edges, independent of the forward-backward order of the hardware.
// It also checks the cycle count of every decode and counts the mechanisms
// exercised: layer transitions per non-zero shift, the wrap from the last
// layer to the first, absent edges (zero circulants), saturations and
// corrected symbols.  Each must occur at least once over the whole test.
module nbqc_tb_core #(
  parameter int unsigned M     = 3,
  parameter int unsigned T     = 1,
  parameter int unsigned RHO   = 8,
  parameter int unsigned GAMMA = 8,
  parameter int unsigned BQ    = 6,
  parameter int unsigned ITW   = 8,
  parameter int unsigned NRUNS = 3,
  parameter int unsigned NERR  = 3
) (
  input  logic                        clk,
  output logic                        rst_n,
  output logic                        start,
  output logic [ITW-1:0]              max_iter,
  output logic [(1<<M)-1:0][BQ:0]     chan_llr [RHO*((1<<M)-1)],
  input  logic [M-1:0]                dec_sym  [RHO*((1<<M)-1)],
  input  logic [ITW-1:0]              iter,
  input  logic                        busy,
  input  logic                        done,
  output int                          checks,
  output int                          failures,
  output logic                        finished
);
  localparam int Q    = 1 << M;
  localparam int W    = Q - 1;
  localparam int N    = 1 << T;
  localparam int NV   = RHO * W;
  localparam int VMAX = (1 << BQ) - 1;

  // Loop bounds held in variables so that the simulator keeps the
  // reference model's loops as loops.
  int qn, wn, rhon, nvn, gamman, nerrn;

  int exp_t [W];
  int log_t [Q];
  int L   [NV][Q];
  int R   [GAMMA][NV][Q];
  int n_sat, n_absent, n_wrap, n_corr;
  int n_shift [Q];

  // Subset vectors in the order of the paper's index assignment, written out
  // by hand.  Three exponents: 0, {0}, {1}, {2}, {0,1}, {0,2}, {1,2}, {0,1,2};
  // up to two exponents: 0, {0}, {1}, {0,1}, i.e. the index itself.
  function automatic int sub_vec(int idx, int bits);
    int tbl [8] = '{0, 1, 2, 4, 3, 5, 6, 7};
    return (bits == 3) ? tbl[idx] : idx;
  endfunction

  function automatic int vec_of(int k);   // block row / column number
    return (sub_vec(k / N, M - T) << T) | sub_vec(k % N, T);
  endfunction

  function automatic int mul(int a, int b);
    if (a == 0 || b == 0) return 0;
    return exp_t[(log_t[a] + log_t[b]) % W];
  endfunction

  function automatic int sat(int v);
    if (v > VMAX) begin
      n_sat++;
      return VMAX;
    end
    return v;
  endfunction

  task automatic norm(inout int v [Q]);
    int mn;
    mn = v[0];
    for (int i = 1; i < qn; i++) if (v[i] < mn) mn = v[i];
    for (int i = 0; i < qn; i++) v[i] = sat(v[i] - mn);
  endtask

  // L_v is kept exactly (no saturation), only shifted to minimum 0.
  task automatic shift_min(inout int v [Q]);
    int mn;
    mn = v[0];
    for (int i = 1; i < qn; i++) if (v[i] < mn) mn = v[i];
    for (int i = 0; i < qn; i++) v[i] = v[i] - mn;
  endtask

  // Z = X (*) Y, Z(b) = min_a max(X(a), Y(a ^ b)).
  task automatic elem(input int x [Q], input int y [Q], output int z [Q]);
    for (int b = 0; b < qn; b++) begin
      z[b] = 1 << 30;
      for (int a = 0; a < qn; a++) begin
        int c;
        c = (x[a] > y[a ^ b]) ? x[a] : y[a ^ b];
        if (c < z[b]) z[b] = c;
      end
    end
  endtask

  task automatic ref_layer(input int v);
    int lam;
    lam = vec_of(v);
    for (int r = 0; r < wn; r++) begin
      int   ev   [RHO];   // variable on each edge, -1 if absent
      int   hv   [RHO];
      int   msg  [RHO][Q];
      int   lcv  [RHO][Q];
      for (int j = 0; j < rhon; j++) begin
        int e;
        e = lam ^ vec_of(j);
        if (e == 0) begin
          ev[j] = -1;
          n_absent++;
        end else begin
          hv[j] = mul(exp_t[r], e);
          ev[j] = j * W + (r + log_t[e]) % W;
          for (int a = 0; a < qn; a++) lcv[j][a] = L[ev[j]][a] - R[v][ev[j]][a];
          norm(lcv[j]);
          for (int a = 0; a < qn; a++) msg[j][mul(hv[j], a)] = lcv[j][a];
        end
      end
      for (int j = 0; j < rhon; j++) begin
        if (ev[j] >= 0) begin
          int acc [Q];
          int tmp [Q];
          for (int b = 0; b < qn; b++) acc[b] = (b == 0) ? 0 : VMAX;
          for (int u = 0; u < rhon; u++)
            if (u != j && ev[u] >= 0) begin
              elem(acc, msg[u], tmp);
              acc = tmp;
            end
          for (int a = 0; a < qn; a++) begin
            R[v][ev[j]][a] = acc[mul(hv[j], a)];
            L[ev[j]][a]    = lcv[j][a] + R[v][ev[j]][a];
          end
          shift_min(L[ev[j]]);
        end
      end
    end
    // Variables without an edge in this layer are left alone.
    n_shift[lam ^ vec_of((v + 1) % GAMMA)]++;
    if (v == GAMMA - 1) n_wrap++;
  endtask

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 12) $display("FAIL %s", what);
    end
  endtask

  initial assert (M - T <= 3 && T <= 3) else $fatal(1, "reference model covers up to 3-bit subsets");

  initial begin
    int x;
    qn = Q; wn = W; rhon = RHO; nvn = NV; gamman = GAMMA; nerrn = NERR;
    checks = 0;
    failures = 0;
    finished = 0;
    n_sat = 0; n_absent = 0; n_wrap = 0; n_corr = 0;
    for (int i = 0; i < qn; i++) n_shift[i] = 0;
    x = 1;
    for (int i = 0; i < wn; i++) begin
      exp_t[i] = x;
      log_t[x] = i;
      x = x << 1;
      if (x & Q) x = x ^ ((M == 3) ? 'b1011 : (M == 4) ? 'b10011 : (M == 5) ? 'b100101 : 'b1000011);
    end
    rst_n = 0;
    start = 0;
    max_iter = '0;
    for (int i = 0; i < nvn; i++) chan_llr[i] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int run = 0; run < NRUNS; run++) begin
      int iters, cyc, exp_cyc, n_wrong_in, n_wrong_out;
      iters = 1 + run % 3;
      // Channel: symbol 0 favoured, random noise, NERR symbols in error.
      for (int i = 0; i < nvn; i++) begin
        for (int a = 0; a < qn; a++) L[i][a] = (a == 0) ? 0 : $urandom_range(VMAX / 4, VMAX);
        if (i % 5 == 1) L[i][$urandom_range(1, Q - 1)] = 0;   // ties
        if (run % 3 == 2 && i % 7 == 0) for (int a = 1; a < qn; a++) L[i][a] = VMAX;
      end
      for (int e = 0; e < nerrn; e++) begin
        int i;
        i = $urandom_range(0, NV - 1);
        L[i][0] = $urandom_range(2, VMAX / 4);
        L[i][$urandom_range(1, Q - 1)] = 0;
      end
      n_wrong_in = 0;
      for (int i = 0; i < nvn; i++) begin
        int best;
        best = 0;
        for (int a = 1; a < qn; a++) if (L[i][a] < L[i][best]) best = a;
        if (best != 0) n_wrong_in++;
        for (int a = 0; a < qn; a++) chan_llr[i][a] = (BQ+1)'(L[i][a]);
      end
      for (int g = 0; g < gamman; g++)
        for (int i = 0; i < nvn; i++)
          for (int a = 0; a < qn; a++) R[g][i][a] = 0;
      // Hardware run.
      max_iter = ITW'(iters);
      @(negedge clk) start = 1;
      @(negedge clk) start = 0;
      cyc = 1;
      while (!done) begin
        @(negedge clk);
        cyc++;
      end
      // Reference run.
      for (int it = 0; it < iters; it++)
        for (int v = 0; v < gamman; v++) ref_layer(v);
      exp_cyc = 3 + iters * GAMMA * (3 * (RHO - 2) * Q + 7);
      check(cyc == exp_cyc, $sformatf("run %0d: %0d cycles, expected %0d", run, cyc, exp_cyc));
      check(int'(iter) == iters, "iteration count");
      n_wrong_out = 0;
      for (int i = 0; i < nvn; i++) begin
        int best;
        best = 0;
        for (int a = 1; a < qn; a++) if (L[i][a] < L[i][best]) best = a;
        if (best != 0) n_wrong_out++;
        check(int'(dec_sym[i]) == best,
              $sformatf("run %0d var %0d: decided %0d, reference %0d", run, i, dec_sym[i], best));
      end
      if (n_wrong_out < n_wrong_in) n_corr += n_wrong_in - n_wrong_out;
      $display("run %0d: %0d iterations, %0d cycles, %0d symbols wrong before, %0d after",
               run, iters, cyc, n_wrong_in, n_wrong_out);
      repeat (2) @(negedge clk);
    end
    begin
      int kinds;
      kinds = 0;
      for (int d = 1; d < qn; d++) if (n_shift[d] > 0) kinds++;
      $display("mechanisms: shifts of %0d kinds, wraps %0d, absent edges %0d, saturations %0d, corrected %0d",
               kinds, n_wrap, n_absent, n_sat, n_corr);
      check(kinds > 0 && n_wrap > 0, "layer shifts and wrap exercised");
      check(n_absent > 0, "absent edges exercised");
      check(n_sat > 0, "saturation exercised");
      check(n_corr > 0, "symbol errors corrected");
    end
    finished = 1;
  end
endmodule
