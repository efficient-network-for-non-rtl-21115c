// layer_ctrl: sequencer of the layered decoder.
//
// Runs a fixed number of decoding iterations, each a pass over the GAMMA
// layers in order 0..GAMMA-1.  Per layer it issues one-cycle strobes:
//   cv_en     VNUs form L_cv = L_v - R_old
//   perm_en   the permutation stage registers the check inputs
//   cnu_start check node units start, then wait for cnu_done
//   deperm_en the de-permutation stage registers the check outputs
//   upd_en    VNUs store R_new and form L_new = L_cv + R_new
//   shf_en    VNUs load L_new through the local shuffle network
// so a layer takes 6 cycles plus the check node run time.  `layer` is the
// index of the layer in progress and also selects the shuffle network's
// control row for the step to the next layer.  After the last layer of the
// last iteration `dec_en` registers the hard decisions and `done` pulses.
//
// Interface: `start` (one cycle, while idle) begins a decode with
// `max_iter` iterations (0 is treated as 1); `load` is issued in the first
// cycle.  The paper gives the layered schedule but not its controller; the
// strobe sequence, the fixed iteration count and the lack of early
// termination are this design's choices.
module layer_ctrl #(
  parameter int unsigned GAMMA = 16,
  parameter int unsigned ITW   = 8     // width of the iteration count
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  logic [ITW-1:0]           max_iter,
  input  logic                     cnu_done,
  output logic                     load,
  output logic                     cv_en,
  output logic                     perm_en,
  output logic                     cnu_start,
  output logic                     deperm_en,
  output logic                     upd_en,
  output logic                     shf_en,
  output logic                     dec_en,
  output logic [$clog2(GAMMA)-1:0] layer,
  output logic [ITW-1:0]           iter,
  output logic                     busy,
  output logic                     done
);
  typedef enum logic [3:0] {
    S_IDLE, S_LOAD, S_CV, S_PERM, S_GO, S_WAIT, S_DEPERM, S_UPD, S_SHF,
    S_DEC, S_DONE
  } state_t;

  state_t         state;
  logic [ITW-1:0] n_iter;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      layer  <= '0;
      iter   <= '0;
      n_iter <= '0;
    end else begin
      case (state)
        S_IDLE:   if (start) begin
                    state  <= S_LOAD;
                    n_iter <= (max_iter == '0) ? ITW'(1) : max_iter;
                    layer  <= '0;
                    iter   <= '0;
                  end
        S_LOAD:   state <= S_CV;
        S_CV:     state <= S_PERM;
        S_PERM:   state <= S_GO;
        S_GO:     state <= S_WAIT;
        S_WAIT:   if (cnu_done) state <= S_DEPERM;
        S_DEPERM: state <= S_UPD;
        S_UPD:    state <= S_SHF;
        S_SHF: begin
          if (layer == $clog2(GAMMA)'(GAMMA - 1)) begin
            layer <= '0;
            iter  <= iter + 1'b1;
            state <= (iter + 1'b1 == n_iter) ? S_DEC : S_CV;
          end else begin
            layer <= layer + 1'b1;
            state <= S_CV;
          end
        end
        S_DEC:    state <= S_DONE;
        default:  state <= S_IDLE;   // S_DONE
      endcase
    end
  end

  assign load      = (state == S_LOAD);
  assign cv_en     = (state == S_CV);
  assign perm_en   = (state == S_PERM);
  assign cnu_start = (state == S_GO);
  assign deperm_en = (state == S_DEPERM);
  assign upd_en    = (state == S_UPD);
  assign shf_en    = (state == S_SHF);
  assign dec_en    = (state == S_DEC);
  assign done      = (state == S_DONE);
  assign busy      = (state != S_IDLE);

endmodule
