// tb_gsn: self-checking test of the fixed global shuffle network.
//
// Every message entering the network is tagged with its source (block,
// position, symbol) so that each output can be traced to the wire it came
// from.  With log x taken from an exp/log table of GF(16) (x^4 + x + 1)
// built here, the test checks cnu_in[r][x] = vnu_out[x][(r + log x) mod 15]
// and vnu_in[x][p] = cnu_out[(p - log x) mod 15][x] for every block x > 0,
// i.e. check r meets the position of alpha^r * x in circulant CPM(x).
module tb_gsn;
  localparam int unsigned M   = 4;
  localparam int unsigned BQ  = 12;
  localparam int unsigned RHO = 16;
  localparam int unsigned Q   = 1 << M;
  localparam int unsigned W   = Q - 1;

  logic [W-1:0][Q-1:0][BQ-1:0] vnu_out [RHO];
  logic [Q-1:0][BQ-1:0]        cnu_in  [W][RHO];
  logic [Q-1:0][BQ-1:0]        cnu_out [W][RHO];
  logic [W-1:0][Q-1:0][BQ-1:0] vnu_in  [RHO];
  int checks = 0, failures = 0;
  logic clk = 0;

  gsn #(.M(M), .BQ(BQ), .RHO(RHO)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int log_t [Q];

  initial begin
    int v = 1;
    for (int i = 0; i < W; i++) begin
      log_t[v] = i;
      v = v << 1;
      if (v & Q) v = v ^ 'b10011;
    end
    for (int x = 0; x < RHO; x++)
      for (int p = 0; p < W; p++)
        for (int a = 0; a < Q; a++) begin
          vnu_out[x][p][a] = BQ'((x << 8) | (p << 4) | a);
          cnu_out[p][x][a] = BQ'(12'h800 | (p << 7) | (x << 3) | (a & 7));
        end
    #1;
    for (int x = 1; x < RHO; x++) begin
      for (int r = 0; r < W; r++) begin
        checks++;
        if (cnu_in[r][x] != vnu_out[x][(r + log_t[x]) % W]) begin
          failures++;
          if (failures < 10) $display("gather r%0d x%0d wrong", r, x);
        end
      end
      for (int p = 0; p < W; p++) begin
        checks++;
        if (vnu_in[x][p] != cnu_out[(p + W - log_t[x]) % W][x]) begin
          failures++;
          if (failures < 10) $display("scatter x%0d p%0d wrong", x, p);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
