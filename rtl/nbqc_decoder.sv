// nbqc_decoder: layered Min-Max decoder for Class-II non-binary QC-LDPC codes
// with a local shuffle network (default: the 32-ary (992, 496) rate-0.5 code,
// m = 5, t = 2, rho = 32 block columns, gamma = 16 block rows).
//
// Organisation (the paper's Fig. 2): q-1 check node units (one layer is one
// row of circulants, q-1 checks), the de-/permutation stage, the global
// shuffle network (GSN) and rho*(q-1) variable node units with the local
// shuffle network (LSN) that feeds each VNU's result back into the VNU array.
//
// Main idea: thanks to the symmetry of Class-II codes, block position x of
// the VNU array always meets the circulant of the field element x, provided
// that before layer v it holds the variable block whose field vector is
// x + lambda_v.  The LSN restores that arrangement after every layer by
// moving whole VNU blocks (a translation of the block positions), so the GSN
// is a fixed set of wires and the R memories never move.
//
// Interface: load the channel reliabilities on `chan_llr` (variable
// j*(q-1)+p is position p of block column j, one BQ+1-bit value per symbol,
// 0 = most likely) and pulse `start`; `max_iter` iterations are run (0 is
// taken as 1).  `done` pulses when `dec_sym` holds the hard decisions in the
// same variable order.  `chan_llr` is sampled in the cycle after `start`.
// Timing: per layer 3*(rho-2)*q + 7 cycles; `done` is seen
// 3 + iterations*gamma*(3*(rho-2)*q + 7) cycles after the start pulse.
//
// Departures from the paper, all this design's choices: full q-entry
// messages (no n_m truncation), BQ = 8 bit unsigned reliabilities with
// normalisation (L_v kept in BQ+1 bits), a fixed iteration count, LSN ports ordered by field vector,
// and rho must equal q (the un-truncated width of the Class-II base matrix).
module nbqc_decoder #(
  parameter int unsigned M     = 5,    // q = 2^M
  parameter int unsigned T     = 2,    // n = 2^T
  parameter int unsigned RHO   = 32,   // block columns
  parameter int unsigned GAMMA = 16,   // block rows = layers
  parameter int unsigned BQ    = 8,    // bits per reliability
  parameter int unsigned ITW   = 8     // width of max_iter
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic [ITW-1:0]       max_iter,
  input  logic [(1<<M)-1:0][BQ:0]   chan_llr [RHO*((1<<M)-1)],
  output logic [M-1:0]         dec_sym  [RHO*((1<<M)-1)],
  output logic [ITW-1:0]       iter,
  output logic                 busy,
  output logic                 done
);
  import nbldpc_pkg::*;

  localparam int unsigned Q = 1 << M;
  localparam int unsigned W = Q - 1;
  localparam int unsigned K = $clog2(RHO);

  // ---------------------------------------------------------------- control
  logic                     load, cv_en, perm_en, cnu_start, deperm_en;
  logic                     upd_en, shf_en, dec_en, cnu_done;
  logic [$clog2(GAMMA)-1:0] layer;
  logic [W-1:0]             cnu_dn, cnu_busy;

  layer_ctrl #(.GAMMA(GAMMA), .ITW(ITW)) u_ctrl (
    .clk, .rst_n, .start, .max_iter, .cnu_done,
    .load, .cv_en, .perm_en, .cnu_start, .deperm_en, .upd_en, .shf_en,
    .dec_en, .layer, .iter, .busy, .done
  );

  assign cnu_done = &cnu_dn;   // all CNUs finish in the same cycle

  // ----------------------------------------------------------- data arrays
  // One message is a packed vector of Q reliabilities; a VNU block packs
  // the W messages of its positions.
  logic [W-1:0][Q-1:0][BQ-1:0] v_lcv  [RHO];   // VNU -> GSN
  logic [W-1:0][Q-1:0][BQ-1:0] v_rin  [RHO];   // GSN -> VNU
  logic [W-1:0][Q-1:0][BQ:0]   v_lnew [RHO];   // VNU -> LSN (L_v: BQ+1 bits)
  logic [W-1:0][Q-1:0][BQ:0]   v_lin  [RHO];   // LSN -> VNU
  logic [Q-1:0][BQ-1:0] g_to_p [W][RHO];       // GSN -> permutation
  logic [Q-1:0][BQ-1:0] p_to_g [W][RHO];       // de-permutation -> GSN
  logic [Q-1:0][BQ-1:0] p_to_c [W][RHO];       // permutation -> CNU
  logic [Q-1:0][BQ-1:0] c_to_p [W][RHO];       // CNU -> de-permutation
  logic [M-1:0]  coef     [W][RHO];
  logic          lsn_ctrl [2*K-1][RHO/2];

  // Edge coefficients: check r meets block position x with alpha^r * x.
  for (genvar r = 0; r < W; r++) begin : g_coef_r
    for (genvar x = 0; x < RHO; x++) begin : g_coef_x
      localparam logic [MAX_M-1:0] H = gf_mul(gf_alpha_pow(r, M), MAX_M'(x), M);
      assign coef[r][x] = H[M-1:0];
    end
  end

  // ------------------------------------------------------------ VNU array
  for (genvar x = 0; x < RHO; x++) begin : g_vblk
    // Block position x holds block column COL at layer 0 of every iteration.
    localparam int unsigned COL = class2_col(x, M, T);
    for (genvar p = 0; p < W; p++) begin : g_vnu
      vnu #(.M(M), .BQ(BQ), .GAMMA(GAMMA)) u_vnu (
        .clk, .rst_n, .load,
        .chan   (chan_llr[COL*W + p]),
        .layer, .cv_en,
        .lcv    (v_lcv[x][p]),
        .upd_en,
        .active (x != 0),            // block 0 meets the zero circulant
        .r_in   (v_rin[x][p]),
        .lnew   (v_lnew[x][p]),
        .shf_en,
        .l_in   (v_lin[x][p]),
        .dec_en,
        .dec    (dec_sym[COL*W + p])
      );
    end
  end

  // ------------------------------------------------- local shuffle network
  lsn_lut #(.M(M), .T(T), .RHO(RHO), .GAMMA(GAMMA)) u_lut (
    .layer, .ctrl(lsn_ctrl)
  );

  lsn_class2 #(.M(M), .BQ(BQ + 1), .RHO(RHO)) u_lsn (
    .data_in(v_lnew), .ctrl(lsn_ctrl), .data_out(v_lin)
  );

  // ------------------------------------------------ global shuffle network
  gsn #(.M(M), .BQ(BQ), .RHO(RHO)) u_gsn (
    .vnu_out(v_lcv), .cnu_in(g_to_p), .cnu_out(p_to_g), .vnu_in(v_rin)
  );

  // ---------------------------------------------------- de-/permutation
  perm_block #(.M(M), .BQ(BQ), .RHO(RHO)) u_perm (
    .clk, .coef,
    .perm_en,   .from_gsn(g_to_p), .to_cnu(p_to_c),
    .deperm_en, .from_cnu(c_to_p), .to_gsn(p_to_g)
  );

  // ------------------------------------------------------------- CNUs
  for (genvar r = 0; r < W; r++) begin : g_cnu
    cnu_minmax #(.M(M), .BQ(BQ), .DC(RHO)) u_cnu (
      .clk, .rst_n,
      .start   (cnu_start),
      .in_msg  (p_to_c[r]),
      .out_msg (c_to_p[r]),
      .busy    (cnu_busy[r]),
      .done    (cnu_dn[r])
    );
  end

  // The check node units run in lock step.
  a_cnu_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
    (cnu_busy == '0) || (cnu_busy == '1));

  initial assert (RHO == Q && T < M && GAMMA >= 2 && GAMMA <= Q)
    else $error("nbqc_decoder: needs rho = q, t < m and 2 <= gamma <= q");

endmodule
