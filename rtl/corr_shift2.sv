// corr_shift2: divide a signed sum by four, rounding down (floor).
//
// This is the ">>2" plus "correction" pair of the update step. The sum is
// first shifted two places to the right with zeros entering at the top (a
// plain register shift); when the sum is negative the correction then sets
// the two vacated top bits to one, so the result is floor(sum / 4) as the
// update equation s[n] = even + floor((d[n] + d[n-1]) / 4) requires. The
// same function is used by the analysis and the reconstruction module, which
// keeps the pair exactly invertible.
//
// The paper states that a negative sum needs a correction around the shift
// but not what the correction is; realising it as sign fill (equivalent to
// an arithmetic shift) is this design's reading, chosen because it yields the
// floor of equation (7). Purely combinational.
module corr_shift2 #(
  parameter int unsigned W = 10  // width of the signed sum
) (
  input  logic signed [W-1:0] sum,
  output logic signed [W-1:0] quot   // floor(sum / 4)
);

  logic [W-1:0] shifted;
  logic         negative;

  always_comb begin
    shifted  = {2'b00, sum[W-1:2]};  // >>2, zeros enter at the top
    negative = sum[W-1];
    quot     = shifted;
    if (negative) quot[W-1 -: 2] = 2'b11;  // correction for a negative sum
  end

endmodule
