// gsn: global shuffle network between the VNU array and the check node units.
//
// The VNUs form RHO blocks of q-1 (block column x, position p).  In the layer
// frame that the local shuffle network maintains, block x always meets the
// circulant of field element x (as a bit vector): check row r of every layer
// is connected to position p = (r + log x) mod (q-1) of block x.  The network
// is therefore the same for every layer and is built from fixed wires only,
// in both directions:
//   gather : cnu_in[r][x]  = vnu_out[x][(r + log x) mod (q-1)]
//   scatter: vnu_in[x][p]  = cnu_out[(p - log x) mod (q-1)][x]
// Block 0 meets the zero circulant: it has no edge, and the wires used for it
// carry values that the de-/permutation stage replaces with neutral ones.
//
// This corresponds to the wire-only global network of the paper (Table I
// column #1: no de-multiplexers and no LUT); the paper's flexible variants
// add de-multiplexers so that a different code can be loaded.  The network
// is purely combinational.
module gsn #(
  parameter int unsigned M   = 5,
  parameter int unsigned BQ  = 8,
  parameter int unsigned RHO = 32
) (
  input  logic [(1<<M)-2:0][(1<<M)-1:0][BQ-1:0] vnu_out [RHO],
  output logic [(1<<M)-1:0][BQ-1:0]              cnu_in  [(1<<M)-1][RHO],
  input  logic [(1<<M)-1:0][BQ-1:0]              cnu_out [(1<<M)-1][RHO],
  output logic [(1<<M)-2:0][(1<<M)-1:0][BQ-1:0] vnu_in  [RHO]
);
  import nbldpc_pkg::*;

  localparam int unsigned W = (1 << M) - 1;

  for (genvar x = 0; x < RHO; x++) begin : g_blk
    localparam int unsigned LX = (x == 0) ? 0 : gf_log(MAX_M'(x), M);
    for (genvar r = 0; r < W; r++) begin : g_row
      assign cnu_in[r][x] = vnu_out[x][(r + LX) % W];
    end
    for (genvar p = 0; p < W; p++) begin : g_pos
      assign vnu_in[x][p] = cnu_out[(p + W - LX) % W][x];
    end
  end

endmodule
