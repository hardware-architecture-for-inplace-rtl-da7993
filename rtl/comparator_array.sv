// comparator_array: the per-position comparator groups of the BWT core.
//
// For every buffer position i it produces three flags in parallel, as the
// yellow groups of the architecture figure show:
//   eq[i] : chars[i] is the end marker         (used to locate p)
//   lt[i] : chars[i] <  c                       (used from p onwards)
//   le[i] : chars[i] <= c                       (used from 0 to p-1)
// where c is the character at position 0, the one being inserted. That the
// "=" comparator compares against the marker code and the other two against
// c follows the text ("equality comparators to find the end marker
// position"); the figure does not print the second operand. Purely
// combinational, unsigned byte comparison.
module comparator_array
  import bwt_pkg::*;
#(
  parameter int unsigned N = 128
) (
  input  char_t        chars [N],
  input  char_t        c,
  output logic [N-1:0] eq,
  output logic [N-1:0] lt,
  output logic [N-1:0] le
);

  for (genvar i = 0; i < N; i++) begin : g_pos
    assign eq[i] = (chars[i] == END_MARKER);
    assign lt[i] = (chars[i] <  c);
    assign le[i] = (chars[i] <= c);
  end

endmodule
