// tb_range_decoder: every begin/end pair (including empty ranges and the
// full range 0..N) with both selections and with the enable low; each
// position's select lines are compared with begin <= i < end.
module tb_range_decoder;
  localparam int N = 16;
  localparam int IW = $clog2(N);

  logic clk = 0;
  logic en, use_lt;
  logic [IW:0] begin_idx, end_idx;
  logic [N-1:0] pick_le, pick_lt;
  int checks = 0, failures = 0;

  range_decoder #(.N(N)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int b = 0; b <= N; b++)
      for (int e = 0; e <= N; e++)
        for (int m = 0; m < 3; m++) begin
          @(negedge clk);
          en = (m != 2); use_lt = (m == 1);
          begin_idx = (IW+1)'(b); end_idx = (IW+1)'(e);
          #1;
          for (int i = 0; i < N; i++) begin
            automatic bit sel = en && (b <= i) && (i < e);
            checks += 2;
            if (pick_lt[i] !== (sel && use_lt))  failures++;
            if (pick_le[i] !== (sel && !use_lt)) failures++;
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
