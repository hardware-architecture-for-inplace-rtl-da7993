// popcount_adder: the two-stage adder that produces the insertion rank r.
//
// Stage 1 (load_partial): the N selected comparator bits are counted as two
// partial sums, one over positions 0 .. N/2-1 and one over N/2 .. N-1, and
// the two are registered. Stage 2 (acc_en): the registered partial sums are
// added into the accumulator, which either restarts from zero (acc_clr) or
// keeps its value and adds to it. The paper splits the population count over
// two cycles "by computing the result in two partial sums that are added
// together in the coming cycle"; the split in two equal halves and the
// accumulator are this design's reading of that. Both stages may be active
// in the same cycle, which is how the (<=) and (<) counts overlap:
//   cycle 3: load_partial (<= bits)
//   cycle 4: acc_en + acc_clr, load_partial (< bits)
//   cycle 5: acc_en            -> sum = r from cycle 6 on.
// sum is registered.
module popcount_adder #(
  parameter int unsigned N = 128
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [N-1:0]         bits,
  input  logic                 load_partial,
  input  logic                 acc_en,
  input  logic                 acc_clr,
  output logic [$clog2(N):0]   sum
);

  localparam int unsigned H  = N / 2;
  localparam int unsigned SW = $clog2(N) + 1;

  logic [SW-1:0] part_lo, part_hi;
  logic [SW-1:0] part_lo_q, part_hi_q;

  always_comb begin
    part_lo = '0;
    part_hi = '0;
    for (int i = 0; i < H; i++)     part_lo = part_lo + SW'(bits[i]);
    for (int i = H; i < N; i++)     part_hi = part_hi + SW'(bits[i]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      part_lo_q <= '0;
      part_hi_q <= '0;
      sum       <= '0;
    end else begin
      if (load_partial) begin
        part_lo_q <= part_lo;
        part_hi_q <= part_hi;
      end
      if (acc_en) sum <= (acc_clr ? '0 : sum) + part_lo_q + part_hi_q;
    end
  end

endmodule
