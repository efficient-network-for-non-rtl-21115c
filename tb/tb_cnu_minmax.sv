// tb_cnu_minmax: self-checking test of the Min-Max check node unit.
//
// Drives random input messages (some replaced by the neutral message of an
// absent edge, some saturated) into a GF(8), degree-5 unit and compares
// every output with a brute-force reference that enumerates all q^DC symbol
// configurations: for each configuration and each edge v, the other edges'
// XOR sum b and the max of their reliabilities give a candidate for
// out[v][b], and the reference keeps the minimum.  Also checks that `done`
// arrives exactly 3*(DC-2)*q + 1 cycles after `start`.
module tb_cnu_minmax;
  localparam int unsigned M  = 3;
  localparam int unsigned BQ = 6;
  localparam int unsigned DC = 5;
  localparam int unsigned Q  = 1 << M;
  localparam int unsigned NTRIAL = 25;

  logic clk = 0;
  logic rst_n = 0;
  logic start = 0;
  logic [Q-1:0][BQ-1:0] in_msg  [DC];
  logic [Q-1:0][BQ-1:0] out_msg [DC];
  logic busy, done;
  int checks = 0, failures = 0;

  cnu_minmax #(.M(M), .BQ(BQ), .DC(DC)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int unsigned ref_out [DC][Q];

  task automatic reference();
    int unsigned sym [DC];
    for (int v = 0; v < DC; v++)
      for (int b = 0; b < Q; b++) ref_out[v][b] = (1 << BQ) - 1;
    for (int unsigned cfg = 0; cfg < Q ** DC; cfg++) begin
      for (int v = 0; v < DC; v++) sym[v] = (cfg >> (M * v)) % Q;
      for (int v = 0; v < DC; v++) begin
        int unsigned b, mx;
        b  = 0;
        mx = 0;
        for (int u = 0; u < DC; u++)
          if (u != v) begin
            b = b ^ sym[u];
            if (int'(in_msg[u][sym[u]]) > int'(mx)) mx = in_msg[u][sym[u]];
          end
        if (mx < ref_out[v][b]) ref_out[v][b] = mx;
      end
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int tr = 0; tr < NTRIAL; tr++) begin
      int cyc;
      for (int v = 0; v < DC; v++) begin
        for (int a = 0; a < Q; a++) in_msg[v][a] = BQ'($urandom_range(0, (1 << BQ) - 1));
        in_msg[v][$urandom_range(0, Q - 1)] = '0;
        if ($urandom_range(0, 5) == 0)
          for (int a = 0; a < Q; a++) in_msg[v][a] = (a == 0) ? '0 : '1;
      end
      reference();
      @(negedge clk) start = 1;
      @(negedge clk) start = 0;
      cyc = 1;
      while (!done) begin
        @(negedge clk);
        cyc++;
      end
      checks++;
      if (cyc != 3 * (DC - 2) * Q + 1) begin
        failures++;
        $display("latency %0d, expected %0d", cyc, 3 * (DC - 2) * Q + 1);
      end
      for (int v = 0; v < DC; v++)
        for (int b = 0; b < Q; b++) begin
          checks++;
          if (out_msg[v][b] != BQ'(ref_out[v][b])) begin
            failures++;
            if (failures < 10)
              $display("trial %0d edge %0d sym %0d: got %0d expected %0d",
                       tr, v, b, out_msg[v][b], ref_out[v][b]);
          end
        end
      repeat ($urandom_range(0, 3)) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
