// cnu_minmax: Min-Max check node unit over GF(2^M).
//
// Computes, for each of the DC edges of one check, the check-to-variable
// message R(b) = min over all symbol configurations of the other edges whose
// sum (XOR) is b of the max of their input reliabilities (step 2 of the
// layered Min-Max algorithm).  Messages are already in the permuted domain
// (multiplied by the H coefficient), so the parity check is a plain XOR sum.
// Values are BQ-bit non-negative reliabilities, 0 = most likely.
//
// How it works: the forward-backward recursion with one "elementary Min-Max"
// unit.  One elementary operation Z = X (*) Y,
// Z(b) = min_a max(X(a), Y(a ^ b)), takes Q cycles: all Q output symbols b
// are formed in parallel lanes while a steps through the field.  The forward
// pass stores F[i] = in[0] (*) ... (*) in[i]; the backward pass keeps a
// running B and emits out[i] = F[i-1] (*) B, then B = B (*) in[i].
// In all 3*(DC-2) elementary operations are done.
//
// Interface / timing: pulse `start` for one cycle with `in_msg` valid; the
// inputs must stay stable until `done`.  `done` pulses one cycle, exactly
// 3*(DC-2)*Q + 1 cycles after the start pulse; `out_msg` then holds the
// result until the next start.  An absent edge is fed the neutral message
// (0 for symbol 0, maximum elsewhere).
//
// The paper gives the Min-Max equation only; the forward-backward schedule,
// the serial-in-a / parallel-in-b organisation and the full q-entry messages
// (no truncation to n_m entries) are this design's choices.
module cnu_minmax #(
  parameter int unsigned M  = 5,   // log2 of the field size q
  parameter int unsigned BQ = 8,   // bits per reliability value
  parameter int unsigned DC = 32   // check node degree (block columns rho)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic [(1<<M)-1:0][BQ-1:0] in_msg  [DC],
  output logic [(1<<M)-1:0][BQ-1:0] out_msg [DC],
  output logic                 busy,
  output logic                 done
);
  localparam int unsigned Q = 1 << M;

  typedef enum logic [1:0] {S_IDLE, S_FWD, S_BOUT, S_BUPD} state_t;

  state_t               state;
  logic [Q-1:0][BQ-1:0] fwd [DC];
  logic [Q-1:0][BQ-1:0] bwd;
  logic [Q-1:0][BQ-1:0] acc;
  logic [$clog2(DC)-1:0] idx;
  logic [M-1:0]         a;

  // Operand selection of the elementary unit.
  logic [BQ-1:0]        xs;
  logic [Q-1:0][BQ-1:0] yv;
  logic [Q-1:0][BQ-1:0] nacc;

  always_comb begin
    xs = (state == S_BUPD) ? bwd[a] : fwd[idx - 1'b1][a];
    for (int b = 0; b < Q; b++)
      yv[b] = (state == S_BOUT) ? bwd[a ^ M'(b)] : in_msg[idx][a ^ M'(b)];
    for (int b = 0; b < Q; b++) begin
      logic [BQ-1:0] cand;
      cand    = (xs > yv[b]) ? xs : yv[b];
      nacc[b] = (a == '0 || cand < acc[b]) ? cand : acc[b];
    end
  end

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      done  <= 1'b0;
      idx   <= '0;
      a     <= '0;
      acc   <= '0;
      bwd   <= '0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          fwd[0] <= in_msg[0];
          idx    <= 1;
          a      <= '0;
          state  <= S_FWD;
        end
        S_FWD: begin
          acc <= nacc;
          a   <= a + 1'b1;
          if (a == M'(Q - 1)) begin
            fwd[idx] <= nacc;
            if (idx == $clog2(DC)'(DC - 2)) begin
              out_msg[DC-1] <= nacc;
              bwd           <= in_msg[DC-1];
              state         <= S_BOUT;
            end else begin
              idx <= idx + 1'b1;
            end
          end
        end
        S_BOUT: begin
          acc <= nacc;
          a   <= a + 1'b1;
          if (a == M'(Q - 1)) begin
            out_msg[idx] <= nacc;
            state        <= S_BUPD;
          end
        end
        default: begin // S_BUPD
          acc <= nacc;
          a   <= a + 1'b1;
          if (a == M'(Q - 1)) begin
            bwd <= nacc;
            if (idx == 1) begin
              out_msg[0] <= nacc;
              done       <= 1'b1;
              state      <= S_IDLE;
            end else begin
              idx   <= idx - 1'b1;
              state <= S_BOUT;
            end
          end
        end
      endcase
    end
  end

  initial assert (DC >= 3) else $error("cnu_minmax needs DC >= 3");

endmodule
