// compare_mux_array: the row of per-position multiplexers between the
// comparator groups and the adder.
//
// Each mux passes the (<=) result, the (<) result or zero of its position,
// as the decoder's select lines say, giving one bit per position for the
// population count: bits[i] = pick_le[i] & le[i] | pick_lt[i] & lt[i].
// The paper draws one mux per position fed by the (<) and (<=) comparators
// and steered by the decoder; building it as AND-OR with a zero default is
// this design's choice. Purely combinational.
module compare_mux_array #(
  parameter int unsigned N = 128
) (
  input  logic [N-1:0] le,
  input  logic [N-1:0] lt,
  input  logic [N-1:0] pick_le,
  input  logic [N-1:0] pick_lt,
  output logic [N-1:0] bits
);

  assign bits = (pick_le & le) | (pick_lt & lt);

endmodule
