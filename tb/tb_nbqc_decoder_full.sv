// tb_nbqc_decoder_full: the decoder at its default size, the 32-ary
// (992, 496) rate-0.5 Class-II code (m = 5, t = 2, rho = 32, gamma = 16),
// one decode of one iteration (16 layers, 46,195 cycles) with 12 symbol
// errors, compared symbol by symbol with the reference decoder of
// nbqc_tb_core.
module tb_nbqc_decoder_full;
  localparam int unsigned M = 5, T = 2, RHO = 32, GAMMA = 16, BQ = 8, ITW = 8;

  logic clk = 0;
  logic rst_n, start, busy, done, finished;
  logic [ITW-1:0] max_iter, iter;
  logic [(1<<M)-1:0][BQ:0] chan_llr [RHO*((1<<M)-1)];
  logic [M-1:0] dec_sym [RHO*((1<<M)-1)];
  int checks, failures;

  always #5 clk = ~clk;

  nbqc_decoder dut (.*);
  nbqc_tb_core #(.M(M), .T(T), .RHO(RHO), .GAMMA(GAMMA), .BQ(BQ), .ITW(ITW),
                 .NRUNS(1), .NERR(12)) core (.*);

  initial begin
    repeat (100000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  always @(posedge finished) begin
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
