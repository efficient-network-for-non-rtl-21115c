// vnu: variable node unit of the layered Min-Max decoder.
//
// Holds the a-posteriori reliability vector L_v (one BQ+1-bit value per
// field symbol) of the variable that currently sits in this VNU, and a
// memory of
// the GAMMA check-to-variable messages R (BQ bits), one per layer.  Per
// layer it does
// the two variable-node steps of the layered Min-Max algorithm:
//   cv_en : L_cv = L_v - R_old[layer]            (step 1)
//   upd_en: R[layer] = R_new; L_new = L_cv + R_new (step 3)
// A VNU whose variable has no edge in the layer (`active` low: its block
// meets a zero circulant) passes L_new = L_v unchanged and keeps R.
// Both results are normalised so that their smallest entry is 0.  L_cv is
// then saturated to BQ bits.  L_new = L_cv + R_new is at most 2*(2^BQ - 1)
// and is kept exactly in BQ+1 bits: a saturated L_v would turn into a wrong
// L_cv once R_old is subtracted from it in the next iteration.  L_new leaves on `lnew` towards the local shuffle
// network; `shf_en` loads L_v from `l_in`, the network's output, so the
// message arrives in the VNU that serves the variable in the next layer.
//
// R is indexed by layer and stays in the VNU: with the local shuffle the
// VNU at a given position always holds the same variable in a given layer,
// so its R entries never have to move.
//
// Interface / timing: every enable acts on the next clock edge, one cycle
// each.  `load` writes the channel vector and clears all R entries.
// `dec_en` registers the hard decision (the symbol of smallest L_v).
//
// The subtraction/addition follow the paper's layered equations; the
// normalisation, saturation and R memory organisation are this design's
// choices (the paper does not describe the VNU's insides).
module vnu #(
  parameter int unsigned M     = 5,
  parameter int unsigned BQ    = 8,
  parameter int unsigned GAMMA = 16
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       load,
  input  logic [(1<<M)-1:0][BQ:0]   chan,
  input  logic [$clog2(GAMMA)-1:0]   layer,
  input  logic                       cv_en,
  output logic [(1<<M)-1:0][BQ-1:0] lcv,
  input  logic                       upd_en,
  input  logic                       active,
  input  logic [(1<<M)-1:0][BQ-1:0] r_in,
  output logic [(1<<M)-1:0][BQ:0]   lnew,
  input  logic                       shf_en,
  input  logic [(1<<M)-1:0][BQ:0]   l_in,
  input  logic                       dec_en,
  output logic [M-1:0]               dec
);
  localparam int unsigned Q    = 1 << M;
  localparam logic signed [BQ+2:0] VMAX = (BQ+3)'((1 << BQ) - 1);

  logic [Q-1:0][BQ:0]   lv;
  logic [Q-1:0][BQ-1:0] rmem [GAMMA];

  // Normalise a signed vector to min 0 and saturate to BQ bits.
  function automatic void normalise(input  logic signed [BQ+2:0] v   [Q],
                                    output logic [Q-1:0][BQ-1:0] res);
    logic signed [BQ+2:0] mn;
    logic signed [BQ+2:0] d;
    mn = v[0];
    for (int i = 1; i < Q; i++) if (v[i] < mn) mn = v[i];
    for (int i = 0; i < Q; i++) begin
      d      = v[i] - mn;
      res[i] = (d > VMAX) ? BQ'(VMAX) : BQ'(d);
    end
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dec <= '0;
      lv   <= '0;
      lcv  <= '0;
      lnew <= '0;
    end else begin
      if (load) begin
        lv <= chan;
        for (int g = 0; g < GAMMA; g++) rmem[g] <= '0;
      end
      if (cv_en) begin
        logic signed [BQ+2:0] diff [Q];
        logic [Q-1:0][BQ-1:0] res;
        for (int i = 0; i < Q; i++)
          diff[i] = $signed({2'b00, lv[i]}) - $signed({3'b000, rmem[layer][i]});
        normalise(diff, res);
        lcv <= res;
      end
      if (upd_en) begin
        logic signed [BQ+2:0] sum [Q];
        logic signed [BQ+2:0] mn;
        for (int i = 0; i < Q; i++)
          sum[i] = $signed({3'b000, lcv[i]}) + $signed({3'b000, r_in[i]});
        mn = sum[0];
        for (int i = 1; i < Q; i++) if (sum[i] < mn) mn = sum[i];
        if (active) begin
          for (int i = 0; i < Q; i++) lnew[i] <= (BQ+1)'(sum[i] - mn);
          rmem[layer] <= r_in;
        end else begin
          lnew <= lv;
        end
      end
      if (shf_en) lv <= l_in;
      if (dec_en) begin
        logic [M-1:0]  best;
        logic [BQ:0]   bv;
        best = '0;
        bv   = lv[0];
        for (int i = 1; i < Q; i++)
          if (lv[i] < bv) begin
            bv   = lv[i];
            best = M'(i);
          end
        dec <= best;
      end
    end
  end

endmodule
