// tb_bwt_table1: the textbook example: the transform of "banana" followed by
// the end marker is "annb$aa". A core with N = 7 is fed "banana" last
// character first (a, n, a, n, a, b); the following block pushes the result
// out, position 6 first. The test checks the seven output characters, with
// 8'hFF standing for "$", and the block period of 6*7 = 42 cycles.
module tb_bwt_table1;
  import bwt_pkg::*;
  localparam int N = 7;

  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready, out_first, block_done;
  char_t in_char, out_char;
  int checks = 0, failures = 0;

  bwt_inplace #(.N(N)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  string text = "banana";
  string expected = "annb$aa";
  int n_in = 0, n_out = 0;
  longint cyc = 0, last_done = -1;

  assign in_valid  = 1'b1;
  assign out_ready = 1'b1;
  assign in_char   = char_t'(text[(N - 2) - (n_in % (N - 1))]);

  always_ff @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && in_valid && in_ready) n_in <= n_in + 1;
    if (rst_n && block_done) begin
      if (last_done >= 0) begin
        checks++;
        if (cyc - last_done != 6 * N) failures++;
      end
      last_done <= cyc;
    end
    if (rst_n && out_valid && out_ready && n_out < N) begin
      automatic byte e = expected[N - 1 - n_out];
      automatic char_t ec = (e == "$") ? END_MARKER : char_t'(e);
      checks++;
      if (out_char != ec) begin
        failures++;
        $display("output %0d: got %02h expected %02h", n_out, out_char, ec);
      end
      n_out <= n_out + 1;
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    wait (n_out == N && last_done >= 0);
    repeat (6 * N + 2) @(posedge clk);
    checks++;
    if (last_done < 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
