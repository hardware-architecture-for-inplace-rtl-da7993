// bwt_control: control logic of the in-place BWT core.
//
// It runs the inner steps of one outer-loop iteration of the in-place
// algorithm in six clock cycles, for every character of the block:
//   cycle 1  STEP_LOAD   : shift the new character in at position 0 and the
//                          previous block's next output character out of
//                          position N-1. This is the only cycle that waits:
//                          it stays here until input and output can move.
//   cycle 2  STEP_FIND_P : register the encoder's marker index into p.
//   cycle 3  STEP_SUM_LE : decoder range [0, p) on the (<=) flags; adder
//                          forms the two partial sums.
//   cycle 4  STEP_SUM_LT : adder adds the (<=) partials (accumulator
//                          restarts); decoder range [p, k] on the (<) flags,
//                          adder forms their partial sums.
//   cycle 5  STEP_STORE  : adder adds the (<) partials, giving r; buffer
//                          writes the new character at p.
//   cycle 6  STEP_SHIFT  : buffer shifts positions 0 .. r-1 left by one and
//                          writes the marker at r.
// k counts the characters of the current block (0 .. N-1); the block being
// transformed occupies positions 0 .. k. The cycle split is the paper's
// (Fig. 2 of the paper). With the marker coded as 8'hFF, the (<) range "p
// onwards" does not count the marker, and the (<=) range "0 to p-1" counts
// the new character against itself once; the total is exactly the rank r of
// the listing's steps 1 and 2 (which starts from r = s and counts the
// smallest-sorting marker).
//
// Block framing (this design's choice; the paper does not say how a block
// starts): slot k = 0 of every block loads END_MARKER instead of an input
// character, so a block carries N-1 text characters and produces N output
// characters, one of them the marker that shows the primary index. Slot 0
// runs the same six cycles; with c = marker every step leaves the buffer
// unchanged. Text is presented last character first, and the transform
// leaves last character first (position N-1 first).
//
// Handshakes (this design's choice): in_valid/in_ready and
// out_valid/out_ready, a transfer on a clock edge where both are high. In
// STEP_LOAD the core takes an input character when k != 0 and presents an
// output character once a previous block exists; both move on the same edge,
// so in_ready depends on out_ready and out_valid on in_valid (no register
// between them). With both sides always ready one character moves every six
// cycles, N*6 cycles per block.
module bwt_control
  import bwt_pkg::*;
#(
  parameter int unsigned N = 128
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // stream handshakes
  input  logic                   in_valid,
  output logic                   in_ready,
  output logic                   out_valid,
  input  logic                   out_ready,
  output logic                   out_first,
  output logic                   block_done,
  // state
  output step_e                  step,
  output logic [$clog2(N)-1:0]   k,
  // character shift register
  output buf_op_e                buf_op,
  output logic                   load_marker,
  output logic [$clog2(N)-1:0]   p,
  output logic [$clog2(N)-1:0]   r,
  // encoder
  input  logic [$clog2(N)-1:0]   p_enc,
  // decoder
  output logic                   dec_en,
  output logic                   dec_use_lt,
  output logic [$clog2(N):0]     dec_begin,
  output logic [$clog2(N):0]     dec_end,
  // adder
  output logic                   add_load,
  output logic                   add_acc_en,
  output logic                   add_acc_clr,
  input  logic [$clog2(N):0]     sum
);

  localparam int unsigned IW = $clog2(N);
  localparam logic [IW-1:0] K_LAST = IW'(N - 1);

  step_e          step_q;
  logic [IW-1:0]  k_q;
  logic [IW-1:0]  p_q;
  logic           have_prev_q;
  logic           in_ok, out_ok, fire;

  assign in_ok  = (k_q == '0) || in_valid;
  assign out_ok = !have_prev_q || out_ready;
  assign fire   = (step_q == STEP_LOAD) && in_ok && out_ok;

  assign in_ready  = (step_q == STEP_LOAD) && (k_q != '0) && out_ok;
  assign out_valid = (step_q == STEP_LOAD) && have_prev_q && in_ok;
  assign out_first = (k_q == '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      step_q      <= STEP_LOAD;
      k_q         <= '0;
      p_q         <= '0;
      have_prev_q <= 1'b0;
      block_done  <= 1'b0;
    end else begin
      block_done <= 1'b0;
      unique case (step_q)
        STEP_LOAD:   if (fire) step_q <= STEP_FIND_P;
        STEP_FIND_P: begin
          p_q    <= p_enc;
          step_q <= STEP_SUM_LE;
        end
        STEP_SUM_LE: step_q <= STEP_SUM_LT;
        STEP_SUM_LT: step_q <= STEP_STORE;
        STEP_STORE:  step_q <= STEP_SHIFT;
        STEP_SHIFT: begin
          step_q <= STEP_LOAD;
          if (k_q == K_LAST) begin
            k_q         <= '0;
            have_prev_q <= 1'b1;
            block_done  <= 1'b1;
          end else begin
            k_q <= k_q + 1'b1;
          end
        end
        default: step_q <= STEP_LOAD;
      endcase
    end
  end

  always_comb begin
    unique case (step_q)
      STEP_LOAD:  buf_op = fire ? BUF_LOAD : BUF_HOLD;
      STEP_STORE: buf_op = BUF_STORE;
      STEP_SHIFT: buf_op = BUF_SHIFT;
      default:    buf_op = BUF_HOLD;
    endcase
  end

  assign load_marker = (k_q == '0);

  assign dec_en      = (step_q == STEP_SUM_LE) || (step_q == STEP_SUM_LT);
  assign dec_use_lt  = (step_q == STEP_SUM_LT);
  assign dec_begin   = (step_q == STEP_SUM_LT) ? {1'b0, p_q} : '0;
  assign dec_end     = (step_q == STEP_SUM_LT) ? ({1'b0, k_q} + 1'b1) : {1'b0, p_q};

  assign add_load    = dec_en;
  assign add_acc_en  = (step_q == STEP_SUM_LT) || (step_q == STEP_STORE);
  assign add_acc_clr = (step_q == STEP_SUM_LT);

  assign step = step_q;
  assign k    = k_q;
  assign p    = p_q;
  assign r    = sum[IW-1:0];

endmodule
