// bwt_block_runner: test helper that owns one bwt_inplace core of size N,
// feeds it one block of N-1 random characters over a four-letter alphabet
// (last character first, both streams always ready), then a second block to
// push the result out, and compares the N output characters with a
// brute-force BWT (all rotations of text + sentinel sorted here). It also
// checks the data-independent timing: block_done exactly 6*N cycles after
// the first character slot starts. Results are reported on its ports when
// done goes high.
module bwt_block_runner
  import bwt_pkg::*;
#(
  parameter int N = 1024
) (
  input  logic clk,
  input  logic rst_n,
  output logic done,
  output int   checks,
  output int   failures
);

  logic  in_valid, in_ready, out_valid, out_ready, out_first, block_done;
  char_t in_char, out_char;

  bwt_inplace #(.N(N)) dut (.*);

  int text [N-1];
  int expct[N];

  function automatic int sym(int j);
    return (j == N - 1) ? -1 : text[j];
  endfunction

  function automatic bit rot_less(int a, int b);
    for (int t = 0; t < N; t++) begin
      int x = sym((a + t) % N);
      int y = sym((b + t) % N);
      if (x != y) return x < y;
    end
    return 0;
  endfunction

  // merge sort of the rotation start indices
  int idx[N], tmp[N];
  task automatic sort_rotations();
    for (int i = 0; i < N; i++) idx[i] = i;
    for (int w = 1; w < N; w = w * 2) begin
      for (int lo = 0; lo < N; lo += 2 * w) begin
        int mid = (lo + w < N) ? lo + w : N;
        int hi  = (lo + 2 * w < N) ? lo + 2 * w : N;
        int a = lo, b = mid, o = lo;
        while (a < mid || b < hi) begin
          if (b >= hi || (a < mid && !rot_less(idx[b], idx[a]))) begin
            tmp[o] = idx[a]; a++;
          end else begin
            tmp[o] = idx[b]; b++;
          end
          o++;
        end
      end
      for (int i = 0; i < N; i++) idx[i] = tmp[i];
    end
  endtask

  int n_in = 0, n_out = 0;
  longint cyc = 0, t_first = -1;
  bit ready_to_go = 0;

  assign in_valid  = ready_to_go;
  assign out_ready = 1'b1;
  assign in_char   = char_t'((n_in < N - 1) ? text[N - 2 - n_in] : 8'h41);

  always_ff @(posedge clk) begin
    automatic int dc = 0, df = 0;
    cyc <= cyc + 1;
    if (rst_n) begin
      if (dut.buf_op == BUF_LOAD && t_first < 0) t_first <= cyc;
      if (in_valid && in_ready) n_in <= n_in + 1;
      if (block_done && t_first >= 0 && n_in < 2 * (N - 1)) begin
        if (n_in == N - 1) begin
          dc++;
          if (cyc - t_first != 6 * N) begin
            df++;
            $display("N=%0d: block took %0d cycles, expected %0d", N, cyc - t_first, 6 * N);
          end
        end
      end
      if (out_valid && out_ready && n_out < N) begin
        dc++;
        if (int'(out_char) != expct[N - 1 - n_out]) begin
          df++;
          if (failures < 5) $display("N=%0d out %0d: got %02h expected %02h", N, n_out, out_char, expct[N - 1 - n_out]);
        end
        n_out <= n_out + 1;
      end
      checks   <= checks + dc;
      failures <= failures + df;
    end
  end

  assign done = (n_out == N);

  initial begin
    checks = 0;
    failures = 0;
    for (int j = 0; j < N - 1; j++) text[j] = 8'h61 + $urandom_range(0, 3);
    sort_rotations();
    for (int i = 0; i < N; i++) begin
      automatic int s = sym((idx[i] + N - 1) % N);
      expct[i] = (s < 0) ? 255 : s;
    end
    ready_to_go = 1;
  end

endmodule
