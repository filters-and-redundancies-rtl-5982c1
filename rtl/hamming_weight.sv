// hamming_weight: population count ("1's counter") of an N-bit vector.
//
// In the combinatorial sum median finder every channel owns one of these. Its
// input holds the results of the 63 pairwise comparisons that involve the
// channel, a one for every other channel it is greater than (or equal to,
// under the index tie-break used by csmf_median), so the count is the
// channel's rank from the bottom. The paper names the block and its function
// only; here it is a plain combinational sum that synthesis turns into an
// adder tree.
//
// Interface: bits[N] in, count out, purely combinational, no clock.
module hamming_weight #(
  parameter int unsigned N = 63
) (
  input  logic [N-1:0]             bits,
  output logic [$clog2(N+1)-1:0]   count
);

  always_comb begin
    count = '0;
    for (int unsigned i = 0; i < N; i++) begin
      count = count + {{($clog2(N+1)-1){1'b0}}, bits[i]};
    end
  end

endmodule
