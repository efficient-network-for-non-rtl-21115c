// tb_nbqc_decoder: end-to-end test of the decoder at a reduced size:
// the 8-ary Class-II code with m = 3, t = 1 (n = 2, c = 4), rho = 8 block
// columns and gamma = 8 layers (56 symbols), six decodes of 1 to 3
// iterations, each compared symbol by symbol with the reference decoder of
// nbqc_tb_core.
module tb_nbqc_decoder;
  localparam int unsigned M = 3, T = 1, RHO = 8, GAMMA = 8, BQ = 6, ITW = 8;

  logic clk = 0;
  logic rst_n, start, busy, done, finished;
  logic [ITW-1:0] max_iter, iter;
  logic [(1<<M)-1:0][BQ:0]   chan_llr [RHO*((1<<M)-1)];
  logic [M-1:0] dec_sym [RHO*((1<<M)-1)];
  int checks, failures;

  always #5 clk = ~clk;

  nbqc_decoder #(.M(M), .T(T), .RHO(RHO), .GAMMA(GAMMA), .BQ(BQ), .ITW(ITW)) dut (.*);
  nbqc_tb_core #(.M(M), .T(T), .RHO(RHO), .GAMMA(GAMMA), .BQ(BQ), .ITW(ITW),
                 .NRUNS(6), .NERR(4)) core (.*);

  initial begin
    repeat (200000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  always @(posedge finished) begin
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
