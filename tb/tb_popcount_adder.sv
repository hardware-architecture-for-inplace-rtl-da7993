// tb_popcount_adder: runs the three-cycle pattern of the core (cycle 3 load
// partials of vector A; cycle 4 restart accumulator and load partials of
// vector B; cycle 5 add) with random vectors, including all-zero and
// all-one ones (A and B never overlap, as the two count ranges of the
// core never do), and checks that the sum two cycles after the last load is
// popcount(A) + popcount(B). Also checks that the partial sums are held when
// no load is requested and that the sum holds when acc_en is low.
module tb_popcount_adder;
  localparam int N = 16;
  localparam int IW = $clog2(N);

  logic clk = 0, rst_n = 0;
  logic [N-1:0] bits;
  logic load_partial, acc_en, acc_clr;
  logic [IW:0] sum;
  int checks = 0, failures = 0;

  popcount_adder #(.N(N)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int pc(logic [N-1:0] v);
    int n = 0;
    for (int i = 0; i < N; i++) n += int'(v[i]);
    return n;
  endfunction

  initial begin
    logic [N-1:0] a, b;
    bits = '0; load_partial = 0; acc_en = 0; acc_clr = 0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int t = 0; t < 1000; t++) begin
      a = (t == 0) ? '1 : (t == 1) ? '0 : N'($urandom);
      b = (t == 2) ? ~a : (t == 0) ? '0 : N'($urandom) & ~a;   // the two ranges never overlap
      // cycle 3
      @(negedge clk); bits = a; load_partial = 1; acc_en = 0; acc_clr = 0;
      // cycle 4
      @(negedge clk); bits = b; load_partial = 1; acc_en = 1; acc_clr = 1;
      // cycle 5: bits change but are not loaded
      @(negedge clk); bits = N'($urandom); load_partial = 0; acc_en = 1; acc_clr = 0;
      // cycle 6: hold
      @(negedge clk); load_partial = 0; acc_en = 0;
      checks++;
      if (int'(sum) != pc(a) + pc(b)) begin
        failures++;
        if (failures < 10) $display("sum %0d expected %0d", sum, pc(a) + pc(b));
      end
      @(negedge clk);
      checks++;
      if (int'(sum) != pc(a) + pc(b)) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
