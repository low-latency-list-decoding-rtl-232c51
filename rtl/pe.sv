// pe: one successive-cancellation processing element in the LLR domain.
//
// is_g = 0 computes the min-sum f function  y = sign(a)sign(b)min(|a|,|b|);
// is_g = 1 computes the g function          y = b + (1 - 2*beta) * a.
// a is the LLR from the first half of the parent node, b the one from the
// second half, beta the partial sum of the left sibling. LLRs are LLR_W-bit
// two's complement and are kept in the symmetric range +-(2^(LLR_W-1)-1);
// g saturates to that range. Purely combinational. The min-sum rules are the
// usual LLR-based list decoding rules; the saturation is this design's choice.
module pe #(
  parameter int unsigned LLR_W = 6
) (
  input  logic signed [LLR_W-1:0] a,
  input  logic signed [LLR_W-1:0] b,
  input  logic                    beta,
  input  logic                    is_g,
  output logic signed [LLR_W-1:0] y
);
  localparam int LMAX = (1 <<< (LLR_W - 1)) - 1;

  logic [LLR_W:0]   mag_a, mag_b, mag_min;
  logic signed [LLR_W+1:0] gsum;

  always_comb begin
    mag_a = a[LLR_W-1] ? (LLR_W+1)'(-a) : (LLR_W+1)'(a);
    mag_b = b[LLR_W-1] ? (LLR_W+1)'(-b) : (LLR_W+1)'(b);
    if (mag_a > (LLR_W+1)'(LMAX)) mag_a = (LLR_W+1)'(LMAX);
    if (mag_b > (LLR_W+1)'(LMAX)) mag_b = (LLR_W+1)'(LMAX);
    mag_min = (mag_a < mag_b) ? mag_a : mag_b;

    gsum = beta ? ((LLR_W+2)'(b) - (LLR_W+2)'(a)) : ((LLR_W+2)'(b) + (LLR_W+2)'(a));

    if (!is_g) begin
      y = (a[LLR_W-1] ^ b[LLR_W-1]) ? -LLR_W'(mag_min[LLR_W-1:0]) : LLR_W'(mag_min[LLR_W-1:0]);
    end else if (gsum > (LLR_W+2)'(LMAX)) begin
      y = LLR_W'(LMAX);
    end else if (gsum < -(LLR_W+2)'(LMAX)) begin
      y = -LLR_W'(LMAX);
    end else begin
      y = LLR_W'(gsum);
    end
  end
endmodule
