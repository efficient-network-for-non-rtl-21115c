// tb_perm_block: self-checking test of the de-/permutation stage.
//
// GF(8) multiplication is computed here from exp/log tables generated by the
// LFSR of x^3 + x + 1 (independent of the shift-and-reduce multiplier of the
// design).  Random coefficients (about one in six zero) and random messages
// are applied; the test checks to_cnu[h*a] = from_gsn[a], the neutral
// message for h = 0, to_gsn[a] = from_cnu[h*a] and zeros for h = 0, and that
// the outputs hold while the enables are low.
module tb_perm_block;
  localparam int unsigned M   = 3;
  localparam int unsigned BQ  = 5;
  localparam int unsigned RHO = 8;
  localparam int unsigned Q   = 1 << M;
  localparam int unsigned W   = Q - 1;

  logic clk = 0;
  logic [M-1:0] coef [W][RHO];
  logic perm_en = 0, deperm_en = 0;
  logic [Q-1:0][BQ-1:0] from_gsn [W][RHO];
  logic [Q-1:0][BQ-1:0] to_cnu   [W][RHO];
  logic [Q-1:0][BQ-1:0] from_cnu [W][RHO];
  logic [Q-1:0][BQ-1:0] to_gsn   [W][RHO];
  int checks = 0, failures = 0;

  perm_block #(.M(M), .BQ(BQ), .RHO(RHO)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int exp_t [W];
  int log_t [Q];

  function automatic int mul(int a, int b);
    if (a == 0 || b == 0) return 0;
    return exp_t[(log_t[a] + log_t[b]) % W];
  endfunction

  initial begin
    int x = 1;
    for (int i = 0; i < W; i++) begin
      exp_t[i] = x;
      log_t[x] = i;
      x = x << 1;
      if (x & Q) x = x ^ 'b1011;
    end
    for (int trial = 0; trial < 8; trial++) begin
      for (int r = 0; r < W; r++)
        for (int c = 0; c < RHO; c++) begin
          coef[r][c] = ($urandom_range(0, 5) == 0) ? '0 : M'($urandom_range(1, Q - 1));
          for (int a = 0; a < Q; a++) begin
            from_gsn[r][c][a] = BQ'($urandom);
            from_cnu[r][c][a] = BQ'($urandom);
          end
        end
      @(negedge clk) perm_en = 1; deperm_en = 1;
      @(negedge clk) perm_en = 0; deperm_en = 0;
      // Change the inputs: the registered outputs must not follow.
      for (int r = 0; r < W; r++)
        for (int c = 0; c < RHO; c++) begin
          from_gsn[r][c] = ~from_gsn[r][c];
          from_cnu[r][c] = ~from_cnu[r][c];
        end
      @(negedge clk);
      for (int r = 0; r < W; r++)
        for (int c = 0; c < RHO; c++)
          for (int a = 0; a < Q; a++) begin
            int h;
            logic [BQ-1:0] e1, e2;
            h = coef[r][c];
            if (h == 0) begin
              e1 = (a == 0) ? '0 : '1;
              e2 = '0;
            end else begin
              e1 = ~from_gsn[r][c][mul(int'(gf_div(a, h)), 1)];
              e2 = ~from_cnu[r][c][mul(h, a)];
            end
            checks += 2;
            if (to_cnu[r][c][a] != e1) begin
              failures++;
              if (failures < 10) $display("perm r%0d c%0d b%0d: %0d vs %0d", r, c, a, to_cnu[r][c][a], e1);
            end
            if (to_gsn[r][c][a] != e2) begin
              failures++;
              if (failures < 10) $display("deperm r%0d c%0d a%0d: %0d vs %0d", r, c, a, to_gsn[r][c][a], e2);
            end
          end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int gf_div(int b, int h);
    if (b == 0) return 0;
    return exp_t[(log_t[b] + W - log_t[h]) % W];
  endfunction
endmodule
