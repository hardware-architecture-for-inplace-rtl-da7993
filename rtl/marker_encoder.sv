// marker_encoder: one-hot to binary encoder that turns the equality
// comparator outputs into the marker position index p.
//
// Only positions 0 .. k, the part of the buffer that holds the block being
// transformed, are looked at: the positions beyond k still hold the previous
// block's finished transform, which carries a marker of its own. With that
// mask the input has exactly one set bit, and the encoder is an OR over the
// indices of the set bits (a plain one-hot to binary encoder, no priority
// logic). The paper shows the equality outputs feeding the encoder directly
// and does not mention the previous block's marker; the mask is this
// design's addition. found tells whether a marker was seen at all (the top
// asserts it in the cycle that captures p). Purely combinational.
module marker_encoder #(
  parameter int unsigned N = 128
) (
  input  logic [N-1:0]         eq,
  input  logic [$clog2(N)-1:0] k,
  output logic [$clog2(N)-1:0] p,
  output logic                 found
);

  logic [N-1:0] hot;

  // position 0 always lies in the current block
  assign hot[0] = eq[0];
  for (genvar i = 1; i < N; i++) begin : g_mask
    assign hot[i] = eq[i] && ($clog2(N)'(i) <= k);
  end

  always_comb begin
    p = '0;
    for (int i = 0; i < N; i++) begin
      if (hot[i]) p = p | $clog2(N)'(i);
    end
  end

  assign found = |hot;

endmodule
