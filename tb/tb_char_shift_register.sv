// tb_char_shift_register: random sequence of LOAD, STORE, SHIFT and HOLD
// operations on a 16-position buffer, compared every cycle with a model
// array kept in the testbench (including out_char = last position and the
// marker written by SHIFT, r = 0 and r = N-1 included).
module tb_char_shift_register;
  import bwt_pkg::*;
  localparam int N = 16;
  localparam int IW = $clog2(N);

  logic clk = 0, rst_n = 0;
  buf_op_e op;
  char_t din, out_char;
  logic [IW-1:0] p, r;
  char_t chars [N];
  char_t model [N];
  int checks = 0, failures = 0;

  char_shift_register #(.N(N)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare();
    for (int i = 0; i < N; i++) begin
      checks++;
      if (chars[i] !== model[i]) begin
        failures++;
        if (failures < 10) $display("pos %0d got %02h exp %02h", i, chars[i], model[i]);
      end
    end
    checks++;
    if (out_char !== model[N-1]) failures++;
  endtask

  initial begin
    op = BUF_HOLD; din = '0; p = '0; r = '0;
    for (int i = 0; i < N; i++) model[i] = '0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    @(negedge clk);
    compare();
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      op  = buf_op_e'($urandom_range(0, 3));
      din = char_t'($urandom);
      p   = IW'($urandom);
      r   = (t % 50 == 0) ? IW'(N - 1) : (t % 50 == 1) ? '0 : IW'($urandom);
      @(posedge clk);
      case (op)
        BUF_LOAD: begin
          for (int i = N - 1; i > 0; i--) model[i] = model[i-1];
          model[0] = din;
        end
        BUF_STORE: model[p] = model[0];
        BUF_SHIFT: begin
          for (int i = 0; i < r; i++) model[i] = model[i+1];
          model[r] = END_MARKER;
        end
        default: ;
      endcase
      #1 compare();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
