// tb_lsn_lut: self-checking test of the local shuffle network control table
// for the 32-ary Class-II code (m = 5, t = 2, rho = 32, gamma = 16).
//
// The expected layer vectors are written out here by hand: beta indices
// 0..3 are the vectors 0,1,2,3 (INDEX^(4) of the paper's Eq. 12, row 1 of
// which is also checked against the package's index function), delta
// indices 0..7 over alpha^2..alpha^4 are 0, {2}, {3}, {4}, {2,3}, {2,4},
// {3,4}, {2,3,4}.  For each layer v the table must cross every switch of
// Benes stage 2K-2-b exactly when bit b of lambda_v ^ lambda_(v+1) is set,
// and keep the first K-1 stages straight.
module tb_lsn_lut;
  import nbldpc_pkg::*;
  localparam int unsigned M = 5, T = 2, RHO = 32, GAMMA = 16;
  localparam int unsigned K = 5;

  logic [3:0] layer;
  logic       ctrl [2*K-1][RHO/2];
  logic       clk = 0;
  int checks = 0, failures = 0;

  lsn_lut #(.M(M), .T(T), .RHO(RHO), .GAMMA(GAMMA)) dut (.layer, .ctrl);

  always #5 clk = ~clk;
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int beta_vec  [4] = '{0, 1, 2, 3};
  int delta_vec [8] = '{0, 4, 8, 16, 12, 20, 24, 28};
  int index4 [4][4] = '{'{0, 1, 2, 3}, '{1, 0, 3, 2}, '{2, 3, 0, 1}, '{3, 2, 1, 0}};

  function automatic int lambda(int v);
    return delta_vec[v / 4] | beta_vec[v % 4];
  endfunction

  initial begin
    for (int i = 0; i < 4; i++)
      for (int j = 0; j < 4; j++) begin
        checks++;
        if (index_entry(i, j, 2) != index4[i][j]) begin
          failures++;
          $display("INDEX(%0d,%0d) = %0d", i, j, index_entry(i, j, 2));
        end
      end
    for (int v = 0; v < GAMMA; v++) begin
      int d;
      d = lambda(v) ^ lambda((v + 1) % GAMMA);
      layer = 4'(v);
      #1;
      for (int s = 0; s < 2 * K - 1; s++)
        for (int j = 0; j < RHO / 2; j++) begin
          logic e;
          e = (s < K - 1) ? 1'b0 : d[2*K-2-s];
          checks++;
          if (ctrl[s][j] != e) begin
            failures++;
            if (failures < 10) $display("layer %0d stage %0d switch %0d: %0d", v, s, j, ctrl[s][j]);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
