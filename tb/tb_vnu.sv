// tb_vnu: self-checking test of the variable node unit.
//
// An inactive VNU (no edge in the layer) must pass L_v on unchanged and
// keep its R entry.
// Keeps a software copy of L_v and of the per-layer R memory and walks the
// VNU through load, then several iterations of (cv_en, upd_en, shf_en) over
// the layers with random check messages and random shuffled-in vectors,
// checking L_cv = norm(L_v - R_old) (norm: shift to minimum 0, saturate to
// BQ bits), L_new = L_cv + R_new shifted to minimum 0 without saturation,
// and the hard decision after each iteration.
module tb_vnu;
  localparam int unsigned M     = 3;
  localparam int unsigned BQ    = 5;
  localparam int unsigned GAMMA = 4;
  localparam int unsigned Q     = 1 << M;
  localparam int          VMAX  = (1 << BQ) - 1;

  logic clk = 0;
  logic rst_n = 0;
  logic load = 0, cv_en = 0, upd_en = 0, shf_en = 0, dec_en = 0, active = 1;
  logic [Q-1:0][BQ-1:0] lcv, r_in;
  logic [Q-1:0][BQ:0]   chan, lnew, l_in;
  logic [$clog2(GAMMA)-1:0] layer = '0;
  logic [M-1:0] dec;
  int checks = 0, failures = 0;

  vnu #(.M(M), .BQ(BQ), .GAMMA(GAMMA)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int m_l [Q];
  int m_r [GAMMA][Q];
  int m_cv [Q];
  int m_new [Q];

  function automatic void norm(inout int v [Q]);
    int mn = v[0];
    for (int i = 1; i < Q; i++) if (v[i] < mn) mn = v[i];
    for (int i = 0; i < Q; i++) begin
      v[i] = v[i] - mn;
      if (v[i] > VMAX) v[i] = VMAX;
    end
  endfunction

  function automatic void shift_min(inout int v [Q]);
    int mn = v[0];
    for (int i = 1; i < Q; i++) if (v[i] < mn) mn = v[i];
    for (int i = 0; i < Q; i++) v[i] = v[i] - mn;
  endfunction

  task automatic cmp(input logic [Q-1:0][BQ:0] got, input int expv [Q], input string what);
    for (int i = 0; i < Q; i++) begin
      checks++;
      if (int'(got[i]) != expv[i]) begin
        failures++;
        if (failures < 10) $display("%s[%0d]: got %0d expected %0d", what, i, got[i], expv[i]);
      end
    end
  endtask

  task automatic cmp_cv(input logic [Q-1:0][BQ-1:0] got, input int expv [Q], input string what);
    for (int i = 0; i < Q; i++) begin
      checks++;
      if (int'(got[i]) != expv[i]) begin
        failures++;
        if (failures < 10) $display("%s[%0d]: got %0d expected %0d", what, i, got[i], expv[i]);
      end
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < Q; i++) begin
      chan[i] = (BQ+1)'($urandom_range(0, 2 * VMAX));
      m_l[i]  = chan[i];
    end
    for (int g = 0; g < GAMMA; g++) for (int i = 0; i < Q; i++) m_r[g][i] = 0;
    load = 1;
    @(negedge clk) load = 0;
    for (int it = 0; it < 6; it++) begin
      for (int g = 0; g < GAMMA; g++) begin
        layer = g[$clog2(GAMMA)-1:0];
        cv_en = 1;
        @(negedge clk) cv_en = 0;
        for (int i = 0; i < Q; i++) m_cv[i] = m_l[i] - m_r[g][i];
        norm(m_cv);
        cmp_cv(lcv, m_cv, "lcv");
        active = ($urandom_range(0, 4) != 0);
        for (int i = 0; i < Q; i++) begin
          r_in[i]   = BQ'($urandom_range(0, VMAX));
          if (active) m_r[g][i] = r_in[i];
          m_new[i]  = active ? m_cv[i] + r_in[i] : m_l[i];
        end
        if (active) shift_min(m_new);
        upd_en = 1;
        @(negedge clk) upd_en = 0;
        cmp(lnew, m_new, "lnew");
        // Shuffle in either the VNU's own result or a foreign vector.
        for (int i = 0; i < Q; i++) begin
          l_in[i] = ($urandom_range(0, 1) == 0) ? lnew[i] : (BQ+1)'($urandom_range(0, 2 * VMAX));
          m_l[i]  = l_in[i];
        end
        shf_en = 1;
        @(negedge clk) shf_en = 0;
      end
      dec_en = 1;
      @(negedge clk) dec_en = 0;
      begin
        int best;
        best = 0;
        for (int i = 1; i < Q; i++) if (m_l[i] < m_l[best]) best = i;
        checks++;
        if (int'(dec) != best) begin
          failures++;
          $display("dec: got %0d expected %0d", dec, best);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
