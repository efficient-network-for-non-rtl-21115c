// lsn_lut: control-bit table of the Class-II local shuffle network.
//
// Layer v of a Class-II code (block row v = i*n + k of the base matrix) is
// described by the field vector lambda_v = delta_i + beta_k.  The decoder
// keeps in block position x the variable block whose field vector is
// x + lambda_v, so that every layer sees the same circulants at the same
// positions.  Going from layer v to layer v+1 (and from the last layer back
// to layer 0) every block therefore moves from position y to y + d with
// d = lambda_v + lambda_(v+1): for the beta part this is the paper's
// "index_(v-1,i) -> index_(v,i)" step of Scheduling Algorithm II, read
// through INDEX^(n) (Eq. 12).  A translation by d is routed by the second
// half of the Benes network alone (stages K-1 .. 2K-2, on bits K-1 .. 0):
// the stage on bit b crosses all of its switches when bit b of d is 1.  The
// first K-1 stages stay straight, as the first two stages of Fig. 6 do.
//
// The table stores, per layer, the K x RHO/2 control bits of those stages:
// GAMMA*RHO*log2(RHO)/2 bits, the LUT size the paper gives in Table I.  It
// is a constant computed at elaboration; `layer` selects the row
// combinationally.  Ordering the network ports by field vector (rather than
// by block index) is this design's choice; it turns every step into a
// translation.
module lsn_lut #(
  parameter int unsigned M     = 5,
  parameter int unsigned T     = 2,
  parameter int unsigned RHO   = 32,
  parameter int unsigned GAMMA = 16
) (
  input  logic [$clog2(GAMMA)-1:0] layer,
  output logic                     ctrl [2*$clog2(RHO)-1][RHO/2]
);
  import nbldpc_pkg::*;

  localparam int unsigned K    = $clog2(RHO);
  localparam int unsigned ROWB = K * (RHO / 2);

  function automatic logic [GAMMA*ROWB-1:0] build_table();
    logic [GAMMA*ROWB-1:0] tbl;
    int unsigned d;
    tbl = '0;
    for (int unsigned v = 0; v < GAMMA; v++) begin
      d = class2_vec(v, M, T) ^ class2_vec((v + 1) % GAMMA, M, T);
      for (int unsigned s = 0; s < K; s++)
        for (int unsigned j = 0; j < RHO / 2; j++)
          tbl[v*ROWB + s*(RHO/2) + j] = d[K-1-s];
    end
    return tbl;
  endfunction

  localparam logic [GAMMA*ROWB-1:0] TABLE = build_table();

  always_comb begin
    for (int s = 0; s < 2 * K - 1; s++)
      for (int j = 0; j < RHO / 2; j++)
        ctrl[s][j] = (s < K - 1) ? 1'b0
                   : TABLE[int'(layer)*ROWB + (s - (K - 1))*(RHO/2) + j];
  end

endmodule
