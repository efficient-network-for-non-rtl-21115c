// perm_block: the de-/permutation stage between the global shuffle network
// and the check node units.
//
// Each edge (check r, block column x) of a layer carries a GF(2^M)
// coefficient h.  The check equation sum(h * a_v) = 0 becomes a plain XOR
// sum once every variable-to-check message is re-indexed by b = h * a
// (permutation); the check-to-variable answer is mapped back with
// a = b / h (de-permutation):
//   permute   : to_cnu[b]    = from_gsn[a]  for b = h * a
//   depermute : to_gsn[a]    = from_cnu[h * a]
// An edge with h = 0 (a zero circulant) does not exist: it sends the neutral
// Min-Max message (0 for symbol 0, maximum elsewhere) to the check and an
// all-zero message back to the variable.
//
// The coefficients come in on `coef`, one M-bit entry per edge, i.e. the
// p*(q-1)*rho LUT bits that the paper's Table I lists for its flexible
// networks; the decoder feeds it from a constant table.
//
// Interface / timing: `perm_en` registers the permuted vectors into
// `to_cnu`, `deperm_en` the de-permuted vectors into `to_gsn`, each on the
// next clock edge.  The outputs hold their value otherwise.  The paper only
// names this block; the registered, one-cycle organisation is this design's.
module perm_block #(
  parameter int unsigned M   = 5,
  parameter int unsigned BQ  = 8,
  parameter int unsigned RHO = 32
) (
  input  logic               clk,
  input  logic [M-1:0]       coef      [(1<<M)-1][RHO],
  input  logic               perm_en,
  input  logic [(1<<M)-1:0][BQ-1:0] from_gsn [(1<<M)-1][RHO],
  output logic [(1<<M)-1:0][BQ-1:0] to_cnu   [(1<<M)-1][RHO],
  input  logic               deperm_en,
  input  logic [(1<<M)-1:0][BQ-1:0] from_cnu [(1<<M)-1][RHO],
  output logic [(1<<M)-1:0][BQ-1:0] to_gsn   [(1<<M)-1][RHO]
);
  import nbldpc_pkg::*;

  localparam int unsigned Q = 1 << M;
  localparam int unsigned W = Q - 1;

  always_ff @(posedge clk) begin
    if (perm_en) begin
      for (int r = 0; r < W; r++)
        for (int x = 0; x < RHO; x++)
          for (int a = 0; a < Q; a++) begin
            if (coef[r][x] == '0)
              to_cnu[r][x][a] <= (a == 0) ? '0 : '1;
            else
              to_cnu[r][x][M'(gf_mul(MAX_M'(coef[r][x]), MAX_M'(a), M))] <= from_gsn[r][x][a];
          end
    end
    if (deperm_en) begin
      for (int r = 0; r < W; r++)
        for (int x = 0; x < RHO; x++)
          for (int a = 0; a < Q; a++) begin
            if (coef[r][x] == '0)
              to_gsn[r][x][a] <= '0;
            else
              to_gsn[r][x][a] <= from_cnu[r][x][M'(gf_mul(MAX_M'(coef[r][x]), MAX_M'(a), M))];
          end
    end
  end

endmodule
