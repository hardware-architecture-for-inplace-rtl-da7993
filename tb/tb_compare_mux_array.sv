// tb_compare_mux_array: random comparator flags and select lines; each
// output bit is compared with the flag its select picks (zero if none).
module tb_compare_mux_array;
  localparam int N = 16;

  logic clk = 0;
  logic [N-1:0] le, lt, pick_le, pick_lt, bits;
  int checks = 0, failures = 0;

  compare_mux_array #(.N(N)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 1000; t++) begin
      @(negedge clk);
      le = N'($urandom); lt = N'($urandom);
      pick_le = N'($urandom);
      pick_lt = N'($urandom) & ~pick_le;   // the decoder never picks both
      #1;
      for (int i = 0; i < N; i++) begin
        automatic bit exp = pick_le[i] ? le[i] : pick_lt[i] ? lt[i] : 1'b0;
        checks++;
        if (bits[i] !== exp) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
