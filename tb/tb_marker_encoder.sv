// tb_marker_encoder: one marker at a random position 0..k plus random
// markers beyond k (the previous block's); checks p and found. Also checks
// that found is low when no marker lies within 0..k.
module tb_marker_encoder;
  localparam int N = 16;
  localparam int IW = $clog2(N);

  logic clk = 0;
  logic [N-1:0] eq;
  logic [IW-1:0] k, p;
  logic found;
  int checks = 0, failures = 0;

  marker_encoder #(.N(N)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 2000; t++) begin
      automatic int kk = $urandom_range(0, N - 1);
      automatic int pp = $urandom_range(0, kk);
      @(negedge clk);
      k = IW'(kk);
      eq = '0;
      for (int i = kk + 1; i < N; i++) eq[i] = ($urandom_range(0, 2) == 0);
      if (t % 10 != 9) eq[pp] = 1'b1;
      #1;
      checks++;
      if (found !== (t % 10 != 9)) failures++;
      if (t % 10 != 9) begin
        checks++;
        if (int'(p) != pp) begin
          failures++;
          if (failures < 10) $display("k=%0d marker %0d got p=%0d", kk, pp, p);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
