// tb_comparator_array: random buffers (with marker codes and values equal to
// c mixed in) against random c; each eq/lt/le flag is compared with an
// integer comparison done in the testbench.
module tb_comparator_array;
  import bwt_pkg::*;
  localparam int N = 16;

  logic clk = 0;
  char_t chars [N];
  char_t c;
  logic [N-1:0] eq, lt, le;
  int checks = 0, failures = 0;

  comparator_array #(.N(N)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      c = char_t'((t % 7 == 0) ? 8'h00 : (t % 7 == 1) ? 8'hfe : $urandom_range(0, 254));
      for (int i = 0; i < N; i++) begin
        case ($urandom_range(0, 3))
          0: chars[i] = END_MARKER;
          1: chars[i] = c;
          default: chars[i] = char_t'($urandom);
        endcase
      end
      #1;
      for (int i = 0; i < N; i++) begin
        automatic int a = int'(chars[i]);
        automatic int b = int'(c);
        checks += 3;
        if (eq[i] !== (a == 255)) failures++;
        if (lt[i] !== (a <  b))   failures++;
        if (le[i] !== (a <= b))   failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
