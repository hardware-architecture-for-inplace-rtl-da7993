// bwt_pkg: types and constants shared by the in-place Burrows-Wheeler
// transform (BWT) core.
//
// Characters are bytes. One byte code, END_MARKER, is reserved for the
// end-of-text marker ("$") that the in-place algorithm keeps inside the
// character buffer; text characters may take every other value. The marker
// code is 8'hFF, the largest byte, on purpose: in the (<) population count
// the marker itself then never counts, which lets the count ranges be exactly
// "0 to p-1" for (<=) and "p onwards" for (<) while the marker still sorts as
// the smallest symbol of the transform (see bwt_control). The marker code is
// this design's choice; the paper does not give its encoding.
//
// step_e names the six cycles of one outer-loop iteration (one character).
package bwt_pkg;

  localparam int unsigned CHAR_W = 8;
  typedef logic [CHAR_W-1:0] char_t;

  localparam char_t END_MARKER = 8'hFF;

  // The six cycles of one iteration, in order.
  typedef enum logic [2:0] {
    STEP_LOAD   = 3'd0,  // cycle 1: shift new character in, previous block out
    STEP_FIND_P = 3'd1,  // cycle 2: encode marker position into p
    STEP_SUM_LE = 3'd2,  // cycle 3: partial sums of (<=) over 0 .. p-1
    STEP_SUM_LT = 3'd3,  // cycle 4: add (<=) partials; partial sums of (<) over p .. k
    STEP_STORE  = 3'd4,  // cycle 5: add (<) partials into r; write new character at p
    STEP_SHIFT  = 3'd5   // cycle 6: shift positions 0 .. r-1 left; marker at r
  } step_e;

  // Operations of the character shift register.
  typedef enum logic [1:0] {
    BUF_HOLD  = 2'd0,
    BUF_LOAD  = 2'd1,  // buf[0] <= din, buf[i] <= buf[i-1]
    BUF_STORE = 2'd2,  // buf[p] <= buf[0]
    BUF_SHIFT = 2'd3   // buf[i] <= buf[i+1] for i < r, buf[r] <= END_MARKER
  } buf_op_e;

endpackage
