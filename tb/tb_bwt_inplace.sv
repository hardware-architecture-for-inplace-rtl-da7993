// tb_bwt_inplace: end-to-end test of the in-place BWT core at its default
// size (N = 128), blocks of 127 text bytes.
//
// Several blocks of different character statistics (a single repeated byte,
// two symbols, four symbols, periodic text, full byte range, the extreme
// codes 8'h00 and 8'hFE) are fed last character first; every output
// character is compared with a brute-force BWT worked out here by sorting all
// rotations of text + sentinel. Phases with random input gaps and random
// output back-pressure make the core wait in cycle 1; one phase runs with
// both sides always ready and checks the rate: exactly 6*N cycles between
// block completions and 6 cycles between characters. The test counts how
// often each mechanism happened (marker insertion, input stall, output
// stall, non-trivial marker move, store at p > 0, block completion, (<=)
// and (<) counts both non-zero) and fails if one never did.
module tb_bwt_inplace;
  import bwt_pkg::*;

  localparam int N       = 128;
  localparam int NBLK    = 9;      // blocks checked; one more drains the last
  localparam int WATCHDOG = 200000;

  logic  clk = 0, rst_n = 0;
  logic  in_valid, in_ready, out_valid, out_ready, out_first, block_done;
  char_t in_char, out_char;

  bwt_inplace dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  // text[b][j], j = 0 .. N-2 in natural order
  int text [NBLK+1][N-1];
  int expct[NBLK][N];          // BWT, position order 0 .. N-1, sentinel = 255

  function automatic int sym(int b, int j);
    return (j == N - 1) ? -1 : text[b][j];
  endfunction

  // lexicographic compare of rotations a and b of block blk (sentinel smallest)
  function automatic bit rot_less(int blk, int a, int b);
    for (int t = 0; t < N; t++) begin
      int x = sym(blk, (a + t) % N);
      int y = sym(blk, (b + t) % N);
      if (x != y) return x < y;
    end
    return 0;
  endfunction

  task automatic make_expected(int blk);
    int idx[N];
    for (int i = 0; i < N; i++) idx[i] = i;
    for (int i = 1; i < N; i++) begin
      int v = idx[i], j = i - 1;
      while (j >= 0 && rot_less(blk, v, idx[j])) begin
        idx[j+1] = idx[j];
        j--;
      end
      idx[j+1] = v;
    end
    for (int i = 0; i < N; i++) begin
      int s = sym(blk, (idx[i] + N - 1) % N);
      expct[blk][i] = (s < 0) ? 255 : s;
    end
  endtask

  // phase per block: 0 = always ready (rate check), 1 = input gaps,
  // 2 = output back-pressure, 3 = both
  function automatic int phase_of(int b);
    return b % 4;
  endfunction

  int in_blk = 0, in_pos = 0;       // next input: block, count within block
  int out_blk = 0, out_pos = 0;     // next output: block, count within block
  bit gap_en = 0, bp_en = 0;

  // counters of mechanisms
  int n_marker = 0, n_in_stall = 0, n_out_stall = 0, n_shift = 0, n_store = 0;
  int n_done = 0, n_le = 0, n_lt = 0;

  // drive input
  always_ff @(posedge clk) begin
    if (rst_n) begin
      if (in_valid && in_ready) begin
        in_pos <= in_pos + 1;
        if (in_pos == N - 2) begin
          in_pos <= 0;
          in_blk <= in_blk + 1;
        end
      end
    end
  end

  always_comb begin
    in_char = char_t'(text[(in_blk <= NBLK) ? in_blk : NBLK][N - 2 - in_pos]);
  end

  always @(negedge clk) begin
    in_valid  <= (in_blk <= NBLK) && !(gap_en && ($urandom_range(0, 2) == 0));
    out_ready <= !(bp_en && ($urandom_range(0, 2) == 0));
  end

  // phases follow the block being loaded
  always_comb begin
    gap_en = (phase_of(in_blk) == 1) || (phase_of(in_blk) == 3);
    bp_en  = (phase_of(in_blk) == 2) || (phase_of(in_blk) == 3);
  end

  // check output
  always_ff @(posedge clk) begin
    if (rst_n && out_valid && out_ready && out_blk < NBLK) begin
      checks++;
      if (out_char !== char_t'(expct[out_blk][N - 1 - out_pos])) begin
        failures++;
        if (failures < 10)
          $display("block %0d out %0d: got %02h expected %02h", out_blk, out_pos,
                   out_char, expct[out_blk][N - 1 - out_pos]);
      end
      checks++;
      if (out_first !== (out_pos == 0)) failures++;
      if (out_pos == N - 1) begin
        out_pos <= 0;
        out_blk <= out_blk + 1;
      end else begin
        out_pos <= out_pos + 1;
      end
    end
  end

  // mechanism counters
  always_ff @(posedge clk) begin
    if (rst_n) begin
      if (dut.u_control.step == STEP_LOAD && dut.buf_op == BUF_LOAD && dut.k == '0) n_marker++;
      if (dut.u_control.step == STEP_LOAD && dut.k != '0 && !in_valid) n_in_stall++;
      if (out_valid && !out_ready) n_out_stall++;
      if (dut.u_control.step == STEP_SHIFT && dut.r != '0) n_shift++;
      if (dut.u_control.step == STEP_STORE && dut.p != '0) n_store++;
      if (dut.u_control.step == STEP_SUM_LE && dut.bits != '0) n_le++;
      if (dut.u_control.step == STEP_SUM_LT && dut.bits != '0) n_lt++;
      if (block_done) n_done++;
    end
  end

  // rate check on block 0 (phase 0, nothing waits): six cycles per character
  longint cyc = 0, last_done = -1, last_load = -1;
  int n_rate = 0, done_seen = 0;
  always_ff @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && block_done) begin
      if (last_done >= 0 && phase_of(done_seen) == 0) begin
        n_rate++;
        checks++;
        if (cyc - last_done != 6 * N) begin
          failures++;
          $display("block period %0d, expected %0d", cyc - last_done, 6 * N);
        end
      end
      last_done <= cyc;
      done_seen <= done_seen + 1;
    end
    if (rst_n && dut.buf_op == BUF_LOAD && done_seen == 0 && dut.k > 1) begin
      checks++;
      if (cyc - last_load != 6) begin
        failures++;
        $display("character period %0d, expected 6", cyc - last_load);
      end
    end
    if (rst_n && dut.buf_op == BUF_LOAD) last_load <= cyc;
  end

  initial begin : watchdog
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired: %0d blocks out", out_blk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  string banana = "banana";

  initial begin
    for (int b = 0; b <= NBLK; b++) begin
      for (int j = 0; j < N - 1; j++) begin
        case (b % 8)
          0: text[b][j] = 8'h61;                                   // one symbol
          1: text[b][j] = 8'h61 + $urandom_range(0, 1);             // two symbols
          2: text[b][j] = 8'h61 + $urandom_range(0, 3);             // four symbols
          3: text[b][j] = (j % 3 == 0) ? 8'h62 : ((j % 2) ? 8'h61 : 8'h6e); // periodic
          4: text[b][j] = $urandom_range(0, 254);                   // full range
          5: text[b][j] = (j % 2) ? 8'h00 : 8'hfe;                  // extreme codes
          6: text[b][j] = (j < 6) ? int'(banana[j]) : 8'h61 + $urandom_range(0, 2);
          default: text[b][j] = $urandom_range(0, 7) == 0 ? 8'h20 : 8'h61 + $urandom_range(0, 25);
        endcase
      end
    end
    for (int b = 0; b < NBLK; b++) make_expected(b);
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    wait (out_blk == NBLK);
    repeat (2) @(posedge clk);
    checks++; if (n_marker  < NBLK) begin failures++; $display("marker insertion count %0d", n_marker); end
    checks++; if (n_in_stall  == 0) begin failures++; $display("no input stall"); end
    checks++; if (n_out_stall == 0) begin failures++; $display("no output stall"); end
    checks++; if (n_shift     == 0) begin failures++; $display("no marker move"); end
    checks++; if (n_store     == 0) begin failures++; $display("no store at p > 0"); end
    checks++; if (n_le        == 0) begin failures++; $display("no non-zero (<=) count"); end
    checks++; if (n_lt        == 0) begin failures++; $display("no non-zero (<) count"); end
    checks++; if (n_done      < NBLK) begin failures++; $display("block completions %0d", n_done); end
    checks++; if (n_rate      < 2) begin failures++; $display("block period checked %0d times", n_rate); end
    $display("mechanisms: marker=%0d in_stall=%0d out_stall=%0d shift=%0d store=%0d le=%0d lt=%0d blocks=%0d rate_checks=%0d",
             n_marker, n_in_stall, n_out_stall, n_shift, n_store, n_le, n_lt, n_done, n_rate);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
