// range_decoder: turns the begin/end of a count range, supplied by the
// control logic, into per-position select lines for the comparator muxes.
//
// Position i is selected when en is high and begin_idx <= i < end_idx (end
// exclusive, so an empty range is begin_idx == end_idx and "0 to p-1" with
// p = 0 needs no special case). use_lt chooses which comparator output the
// selected positions pass on: pick_lt[i] for (<), pick_le[i] for (<=).
// Unselected positions pick neither and contribute a zero to the adder.
// The paper names the decoder and its input ("begin/end ranges to be
// added"); the end-exclusive encoding and the two select lines per position
// are this design's choice. Purely combinational.
module range_decoder #(
  parameter int unsigned N = 128
) (
  input  logic                 en,
  input  logic                 use_lt,
  input  logic [$clog2(N):0]   begin_idx,
  input  logic [$clog2(N):0]   end_idx,
  output logic [N-1:0]         pick_le,
  output logic [N-1:0]         pick_lt
);

  logic [N-1:0] in_range;

  for (genvar i = 0; i < N; i++) begin : g_pos
    assign in_range[i] = en && (begin_idx <= ($clog2(N)+1)'(i)) && (($clog2(N)+1)'(i) < end_idx);
    assign pick_lt[i]  = in_range[i] &&  use_lt;
    assign pick_le[i]  = in_range[i] && !use_lt;
  end

endmodule
