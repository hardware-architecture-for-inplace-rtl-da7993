// tb_bwt_control: drives the controller (N = 8) with random stream
// handshakes, random encoder indices and random adder sums, and compares
// every output in every cycle with a cycle model of the six-step sequence
// kept in the testbench: step order, slot counter, marker slot, buffer
// operation, decoder range per step, adder controls, p capture in cycle 2,
// handshakes, out_first and block_done. With both sides always ready it
// also checks the rate: a block every 6*N cycles.
module tb_bwt_control;
  import bwt_pkg::*;
  localparam int N = 8;
  localparam int IW = $clog2(N);

  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready, out_first, block_done;
  step_e step;
  logic [IW-1:0] k, p, r, p_enc;
  buf_op_e buf_op;
  logic load_marker, dec_en, dec_use_lt, add_load, add_acc_en, add_acc_clr;
  logic [IW:0] dec_begin, dec_end, sum;
  int checks = 0, failures = 0;

  bwt_control #(.N(N)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // model state
  int m_step = 0, m_k = 0, m_p = 0;
  bit m_prev = 0, m_done = 0;
  bit random_hs = 0;
  int n_blocks = 0;
  longint cyc = 0, last_done = -1;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("cycle %0d step %0d k %0d: %s", cyc, m_step, m_k, what);
    end
  endtask

  initial begin
    in_valid = 0; out_ready = 0; p_enc = '0; sum = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int t = 0; t < 8000; t++) begin
      bit in_ok, out_ok, fire;
      random_hs = (t >= 1500);
      @(negedge clk);
      in_valid  = random_hs ? ($urandom_range(0, 2) != 0) : 1'b1;
      out_ready = random_hs ? ($urandom_range(0, 2) != 0) : 1'b1;
      p_enc     = IW'($urandom);
      sum       = (IW+1)'($urandom_range(0, N - 1));
      #1;
      in_ok  = (m_k == 0) || in_valid;
      out_ok = !m_prev || out_ready;
      fire   = (m_step == 0) && in_ok && out_ok;
      chk(int'(step) == m_step, "step");
      chk(int'(k) == m_k, "k");
      chk(int'(p) == m_p, "p");
      chk(r == sum[IW-1:0], "r");
      chk(block_done == m_done, "block_done");
      chk(in_ready  == ((m_step == 0) && (m_k != 0) && out_ok), "in_ready");
      chk(out_valid == ((m_step == 0) && m_prev && in_ok), "out_valid");
      chk(out_first == (m_k == 0), "out_first");
      chk(load_marker == (m_k == 0), "load_marker");
      case (m_step)
        0: chk(buf_op == (fire ? BUF_LOAD : BUF_HOLD), "buf_op load");
        4: chk(buf_op == BUF_STORE, "buf_op store");
        5: chk(buf_op == BUF_SHIFT, "buf_op shift");
        default: chk(buf_op == BUF_HOLD, "buf_op hold");
      endcase
      chk(dec_en == (m_step == 2 || m_step == 3), "dec_en");
      if (m_step == 2) chk(dec_begin == 0 && int'(dec_end) == m_p && !dec_use_lt, "range 0..p-1");
      if (m_step == 3) chk(int'(dec_begin) == m_p && int'(dec_end) == m_k + 1 && dec_use_lt, "range p..k");
      chk(add_load == (m_step == 2 || m_step == 3), "add_load");
      chk(add_acc_en == (m_step == 3 || m_step == 4), "add_acc_en");
      chk(add_acc_clr == (m_step == 3), "add_acc_clr");
      if (block_done) begin
        if (!random_hs && last_done >= 0) chk(cyc - last_done == 6 * N, "block period");
        last_done = cyc;
      end
      // advance the model to the next cycle
      @(posedge clk);
      cyc++;
      m_done = 0;
      case (m_step)
        0: if (fire) m_step = 1;
        1: begin m_p = int'(p_enc); m_step = 2; end
        5: begin
          m_step = 0;
          if (m_k == N - 1) begin m_k = 0; m_prev = 1; m_done = 1; n_blocks++; end
          else m_k++;
        end
        default: m_step++;
      endcase
    end
    chk(n_blocks > 20, "blocks completed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
