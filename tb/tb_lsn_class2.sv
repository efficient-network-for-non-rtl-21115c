// tb_lsn_class2: self-checking test of the Class-II local shuffle network.
//
// Part 1 reproduces the setting printed in the 4-port example network
// (first two stages straight, last stage crossed): inputs 0,1,2,3 must leave
// as 1,0,3,2.
// Part 2 (8 ports) sets, for every translation d, the last log2(rho) stages
// (on bits 2,1,0) to the bits of d and checks out[x] = in[x ^ d].
// Part 3 applies random control bits to the 8-port network and compares
// with a port-by-port trace of the Benes graph built here from its
// definition (stage s exchanges ports differing in bit 0,1,2,1,0).
module tb_lsn_class2;
  localparam int unsigned M  = 2;
  localparam int unsigned BQ = 4;
  localparam int unsigned Q  = 1 << M;
  localparam int unsigned W  = Q - 1;

  logic clk = 0;
  int checks = 0, failures = 0;

  logic [W-1:0][Q-1:0][BQ-1:0] in4 [4], out4 [4];
  logic                        c4  [3][2];
  logic [W-1:0][Q-1:0][BQ-1:0] in8 [8], out8 [8];
  logic                        c8  [5][4];

  lsn_class2 #(.M(M), .BQ(BQ), .RHO(4)) dut4 (.data_in(in4), .ctrl(c4), .data_out(out4));
  lsn_class2 #(.M(M), .BQ(BQ), .RHO(8)) dut8 (.data_in(in8), .ctrl(c8), .data_out(out8));

  always #5 clk = ~clk;
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    int pos [8];
    int exp_port [8];
    // Part 1: Fig. 6 setting.
    for (int x = 0; x < 4; x++) in4[x] = {(W*Q){BQ'(x + 1)}};
    for (int s = 0; s < 3; s++) for (int j = 0; j < 2; j++) c4[s][j] = (s == 2);
    #1;
    check(out4[0] == in4[1] && out4[1] == in4[0] && out4[2] == in4[3] && out4[3] == in4[2],
          "fig6 example");
    // Part 2: translations.
    for (int x = 0; x < 8; x++)
      for (int p = 0; p < W; p++)
        for (int a = 0; a < Q; a++) in8[x][p][a] = BQ'($urandom);
    for (int d = 0; d < 8; d++) begin
      for (int s = 0; s < 5; s++)
        for (int j = 0; j < 4; j++) c8[s][j] = (s >= 2) ? d[4-s] : 1'b0;
      #1;
      for (int x = 0; x < 8; x++) check(out8[x] == in8[x ^ d], $sformatf("xor d=%0d x=%0d", d, x));
    end
    // Part 3: random settings traced through the graph.
    for (int trial = 0; trial < 200; trial++) begin
      for (int s = 0; s < 5; s++) for (int j = 0; j < 4; j++) c8[s][j] = 1'($urandom);
      for (int x = 0; x < 8; x++) pos[x] = x;      // where input x currently is
      for (int s = 0; s < 5; s++) begin
        int b;
        b = (s < 3) ? s : 4 - s;
        for (int x = 0; x < 8; x++) begin
          int lo, j;
          lo = pos[x] & ~(1 << b);
          j  = ((lo >> (b + 1)) << b) | (lo & ((1 << b) - 1));
          if (c8[s][j]) pos[x] = pos[x] ^ (1 << b);
        end
      end
      for (int x = 0; x < 8; x++) exp_port[pos[x]] = x;
      #1;
      for (int y = 0; y < 8; y++) check(out8[y] == in8[exp_port[y]], $sformatf("random %0d y=%0d", trial, y));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
