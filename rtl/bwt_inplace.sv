// bwt_inplace: top level of the in-place Burrows-Wheeler transform core.
//
// The core transforms blocks of N positions (N-1 text bytes plus the
// end-of-text marker) without any suffix-array or output storage: the only
// storage is the character shift register, in which the transform of a
// growing suffix of the block is kept and extended by one character every
// six clock cycles. Each extension inserts the new character c into the
// transform of the suffix after it:
//   p = position of the marker in positions 0 .. k        (encoder)
//   r = #{i in [0, p) : buf[i] <= c} + #{i in [p, k] : buf[i] < c}
//                                      (comparators, muxes, decoder, adder)
//   buf[p] = c; buf[0 .. r-1] = buf[1 .. r]; buf[r] = marker   (shift register)
// After the last character of a block the buffer holds that block's BWT,
// with the marker at the position of the primary index; it leaves through
// position N-1, one character per loaded character of the next block.
//
// Streams: in_char is the text, last character first, N-1 characters per
// block; the core inserts the marker itself at the start of every block.
// out_char is the transform of the previous block, last character first,
// N characters per block, out_first marking the first of them. To drain the
// final block, feed one more block (any N-1 characters). in_char must never
// be END_MARKER (8'hFF). block_done pulses for one cycle when a block's
// transform is complete in the buffer. Rate: one character in and one out
// per six cycles, 6*N cycles per block, independent of the data.
//
// The block structure follows the paper's architecture figure: character
// shift register, per-position comparator groups (=, <, <=), muxes steered by
// a decoder, a two-stage adder, a one-hot encoder and the control logic. The
// handshakes, block framing and marker code are this design's choices.
module bwt_inplace
  import bwt_pkg::*;
#(
  parameter int unsigned N = 128
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  output logic  in_ready,
  input  char_t in_char,
  output logic  out_valid,
  input  logic  out_ready,
  output char_t out_char,
  output logic  out_first,
  output logic  block_done
);

  localparam int unsigned IW = $clog2(N);

  step_e           step;
  logic [IW-1:0]   k, p, r, p_enc;
  buf_op_e         buf_op;
  logic            load_marker;
  char_t           chars [N];
  char_t           din;
  logic [N-1:0]    eq, lt, le, pick_le, pick_lt, bits;
  logic            dec_en, dec_use_lt, found;
  logic [IW:0]     dec_begin, dec_end, sum;
  logic            add_load, add_acc_en, add_acc_clr;

  assign din = load_marker ? END_MARKER : in_char;

  bwt_control #(.N(N)) u_control (
    .clk, .rst_n,
    .in_valid, .in_ready, .out_valid, .out_ready, .out_first, .block_done,
    .step, .k,
    .buf_op, .load_marker, .p, .r,
    .p_enc,
    .dec_en, .dec_use_lt, .dec_begin, .dec_end,
    .add_load, .add_acc_en, .add_acc_clr, .sum
  );

  char_shift_register #(.N(N)) u_buffer (
    .clk, .rst_n, .op(buf_op), .din, .p, .r, .chars, .out_char
  );

  comparator_array #(.N(N)) u_cmp (
    .chars, .c(chars[0]), .eq, .lt, .le
  );

  marker_encoder #(.N(N)) u_encoder (
    .eq, .k, .p(p_enc), .found
  );

  range_decoder #(.N(N)) u_decoder (
    .en(dec_en), .use_lt(dec_use_lt), .begin_idx(dec_begin), .end_idx(dec_end),
    .pick_le, .pick_lt
  );

  compare_mux_array #(.N(N)) u_mux (
    .le, .lt, .pick_le, .pick_lt, .bits
  );

  popcount_adder #(.N(N)) u_adder (
    .clk, .rst_n, .bits,
    .load_partial(add_load), .acc_en(add_acc_en), .acc_clr(add_acc_clr), .sum
  );

  // Rules of the design, checked in simulation.
  a_no_marker_in: assert property (@(posedge clk) disable iff (!rst_n)
    (in_valid && in_ready) |-> (in_char != END_MARKER))
    else $error("bwt_inplace: input character equals the end marker code");
  a_marker_found: assert property (@(posedge clk) disable iff (!rst_n)
    (step == STEP_FIND_P) |-> found)
    else $error("bwt_inplace: no marker in the current block");
  a_rank_in_block: assert property (@(posedge clk) disable iff (!rst_n)
    (step == STEP_SHIFT) |-> (sum <= {1'b0, k}))
    else $error("bwt_inplace: rank r beyond the current block");
  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
    (out_valid && !out_ready) |=> $stable(out_char))
    else $error("bwt_inplace: output changed while stalled");

endmodule
