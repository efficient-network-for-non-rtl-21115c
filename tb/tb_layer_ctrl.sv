// tb_layer_ctrl: self-checking test of the layer / iteration sequencer.
//
// A stand-in for the check node units answers each cnu_start with cnu_done
// after a random delay.  The test records the strobes cycle by cycle and
// checks that every layer issues exactly cv, perm, cnu_start, deperm, upd,
// shf in this order on consecutive cycles (apart from the wait), that the
// layer index runs 0..GAMMA-1 once per iteration, that max_iter iterations
// are done (0 counted as 1), and that load comes first and dec_en then done
// come last.
module tb_layer_ctrl;
  localparam int unsigned GAMMA = 4;
  localparam int unsigned ITW   = 4;

  logic clk = 0, rst_n = 0, start = 0, cnu_done = 0;
  logic [ITW-1:0] max_iter;
  logic load, cv_en, perm_en, cnu_start, deperm_en, upd_en, shf_en, dec_en;
  logic [$clog2(GAMMA)-1:0] layer;
  logic [ITW-1:0] iter;
  logic busy, done;
  int checks = 0, failures = 0;

  layer_ctrl #(.GAMMA(GAMMA), .ITW(ITW)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Check node stand-in.
  initial begin
    forever begin
      @(posedge clk);
      if (cnu_start) begin
        repeat ($urandom_range(1, 6)) @(posedge clk);
        cnu_done <= 1;
        @(posedge clk);
        cnu_done <= 0;
      end
    end
  end

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  task automatic run(input int mi);
    string seq;
    string expect_seq;
    int n_iter;
    int lay_seen [$];
    n_iter = (mi == 0) ? 1 : mi;
    max_iter = ITW'(mi);
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    seq = "";
    while (!done) begin
      if (load)      seq = {seq, "L"};
      if (cv_en)     begin seq = {seq, "c"}; lay_seen.push_back(int'(layer)); end
      if (perm_en)   seq = {seq, "p"};
      if (cnu_start) seq = {seq, "s"};
      if (deperm_en) seq = {seq, "d"};
      if (upd_en)    seq = {seq, "u"};
      if (shf_en)    seq = {seq, "h"};
      if (dec_en)    seq = {seq, "D"};
      @(negedge clk);
    end
    expect_seq = "L";
    for (int i = 0; i < n_iter * GAMMA; i++) expect_seq = {expect_seq, "cpsduh"};
    expect_seq = {expect_seq, "D"};
    check(seq == expect_seq, $sformatf("strobe sequence %s", seq));
    check(lay_seen.size() == n_iter * GAMMA, "layer count");
    foreach (lay_seen[i]) check(lay_seen[i] == i % GAMMA, $sformatf("layer order at %0d", i));
    check(int'(iter) == n_iter, "iteration count");
    @(negedge clk);
    check(!busy, "idle after done");
  endtask

  initial begin
    max_iter = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(3);
    run(0);
    run(2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
