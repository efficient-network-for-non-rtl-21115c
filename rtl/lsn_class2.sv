// lsn_class2: local shuffle network for Class-II codes (a Benes network).
//
// Between two layers the a-posteriori messages of whole VNU blocks (q-1
// vectors each) are moved from one block position to another; positions
// inside a block are kept.  Any such block permutation can be set up on a
// Benes network of 2x2 crossbar switches: RHO = 2^K ports, 2K-1 stages and
// RHO/2 switches per stage, RHO*(K - 1/2) switches in all, as counted in the
// paper.  Stage s switches the port pairs whose numbers differ only in bit
// 0, 1, ..., K-1, ..., 1, 0 (s = 0 .. 2K-2); this is the Benes network drawn
// without the inter-stage wiring.  For 4 ports it is the network of the
// paper's Fig. 6: first and last stage switch the pairs (0,1) and (2,3).
//
// BQ is the width of one reliability value as carried here (the decoder
// passes its L_v width).  ctrl[s][j] = 1 crosses switch j of stage s (its ports exchange their
// data), 0 passes straight.  Switch j of a stage on bit b joins port
// lo = j with a 0 inserted at bit b, and hi = lo | (1 << b).
//
// Interface / timing: purely combinational, data_out follows data_in and
// ctrl.  The control bits come from lsn_lut.
module lsn_class2 #(
  parameter int unsigned M   = 5,
  parameter int unsigned BQ  = 8,
  parameter int unsigned RHO = 32
) (
  input  logic [(1<<M)-2:0][(1<<M)-1:0][BQ-1:0] data_in  [RHO],
  input  logic          ctrl     [2*$clog2(RHO)-1][RHO/2],
  output logic [(1<<M)-2:0][(1<<M)-1:0][BQ-1:0] data_out [RHO]
);
  import nbldpc_pkg::*;

  localparam int unsigned K  = $clog2(RHO);
  localparam int unsigned NS = 2 * K - 1;

  for (genvar s = 0; s < NS; s++) begin : g_stage
    localparam int unsigned B = benes_bit(s, K);
    logic [(1<<M)-2:0][(1<<M)-1:0][BQ-1:0] prev [RHO];
    logic [(1<<M)-2:0][(1<<M)-1:0][BQ-1:0] nxt  [RHO];
    if (s == 0) begin : g_first
      assign prev = data_in;
    end else begin : g_next
      assign prev = g_stage[s-1].nxt;
    end
    for (genvar j = 0; j < RHO / 2; j++) begin : g_sw
      localparam int unsigned LO = benes_lo(j, B);
      localparam int unsigned HI = LO | (1 << B);
      assign nxt[LO] = ctrl[s][j] ? prev[HI] : prev[LO];
      assign nxt[HI] = ctrl[s][j] ? prev[LO] : prev[HI];
    end
  end

  assign data_out = g_stage[NS-1].nxt;

  initial assert (RHO == (1 << K) && RHO >= 2)
    else $error("lsn_class2 needs a power-of-two port count");

endmodule
