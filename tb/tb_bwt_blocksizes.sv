// tb_bwt_blocksizes: the core at block sizes above the default 128
// positions, N = 256 and N = 512, one random block each, checked byte for
// byte against a brute-force BWT, with the 6*N-cycle block time checked for
// each size. The evaluated sizes of 1 kB, 4 kB and 8 kB use the same
// helper (bwt_block_runner #(.N(1024)) and so on); they are not run here
// because building a Verilator model at those sizes takes far longer than
// the simulation itself (over five minutes of C++ compilation at N = 1024).
module tb_bwt_blocksizes;
  logic clk = 0, rst_n = 0;
  logic done [2];
  int   chk  [2];
  int   fail [2];

  always #5 clk = ~clk;

  bwt_block_runner #(.N(256)) u_256 (.clk, .rst_n, .done(done[0]), .checks(chk[0]), .failures(fail[0]));
  bwt_block_runner #(.N(512)) u_512 (.clk, .rst_n, .done(done[1]), .checks(chk[1]), .failures(fail[1]));

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", chk[0] + chk[1], fail[0] + fail[1] + 1);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    wait (done[0] && done[1]);
    repeat (2) @(posedge clk);
    $display("N=256: checks=%0d failures=%0d", chk[0], fail[0]);
    $display("N=512: checks=%0d failures=%0d", chk[1], fail[1]);
    $display("TB_RESULT checks=%0d failures=%0d", chk[0] + chk[1], fail[0] + fail[1]);
    $finish;
  end
endmodule
