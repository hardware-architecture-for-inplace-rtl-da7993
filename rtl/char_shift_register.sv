// char_shift_register: the register-based character buffer of the BWT core,
// one byte register per position i = 0 .. N-1, wired as a scan chain.
//
// It holds one complete text block and is the only storage of the design:
// the transform is computed in place, and the finished block of the previous
// transform leaves through position N-1 while the next block enters at
// position 0. Four operations, one per clock, chosen by op:
//   BUF_LOAD  : shift the whole chain right; din enters at 0, the character
//               that was at N-1 is lost (it was presented on out_char before
//               the edge).
//   BUF_STORE : copy the character at position 0 (the character being
//               inserted, c) to position p.            (algorithm step 3)
//   BUF_SHIFT : positions 0 .. r-1 take the value of their right neighbour
//               and position r takes END_MARKER.         (algorithm step 4)
//   BUF_HOLD  : keep everything.
// All positions are visible on chars so the comparators can work on them in
// parallel. out_char is buf[N-1], combinationally. Reset clears the chain to
// zero (the paper does not discuss reset; the first block's output is flagged
// invalid by the controller anyway).
module char_shift_register
  import bwt_pkg::*;
#(
  parameter int unsigned N = 128
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  buf_op_e              op,
  input  char_t                din,
  input  logic [$clog2(N)-1:0] p,
  input  logic [$clog2(N)-1:0] r,
  output char_t                chars [N],
  output char_t                out_char
);

  char_t buf_q [N];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N; i++) buf_q[i] <= '0;
    end else begin
      unique case (op)
        BUF_LOAD: begin
          buf_q[0] <= din;
          for (int i = 1; i < N; i++) buf_q[i] <= buf_q[i-1];
        end
        BUF_STORE: buf_q[p] <= buf_q[0];
        BUF_SHIFT: begin
          for (int i = 0; i < N - 1; i++) begin
            if (i < int'(r))       buf_q[i] <= buf_q[i+1];
            else if (i == int'(r)) buf_q[i] <= END_MARKER;
          end
          if (int'(r) == N - 1) buf_q[N-1] <= END_MARKER;
        end
        default: ;
      endcase
    end
  end

  assign chars    = buf_q;
  assign out_char = buf_q[N-1];

endmodule
