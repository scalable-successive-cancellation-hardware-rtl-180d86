// decoding_pe -- one processing element of the SC decoder, evaluating either
// the min-sum f function or the g function on one pair of LLRs.
//
//   f(a,b)   = sign(a) * sign(b) * min(|a|, |b|)
//   g(s,a,b) = b + (-1)^s * a
//
// Both equations are the paper's (its eqs. (1) and (2)). LLRs are Q-bit two's
// complement fixed-point numbers. The saturation rule is this design's: results
// are clamped to the symmetric range [-(2^(Q-1)-1), 2^(Q-1)-1], so that the
// magnitude of any internal LLR is always representable. Purely combinational.
module decoding_pe #(
  parameter int unsigned Q = 8
) (
  input  logic signed [Q-1:0] a,
  input  logic signed [Q-1:0] b,
  input  logic                sel_g,  // 0: f, 1: g
  input  logic                s,      // partial sum used by g
  output logic signed [Q-1:0] y
);

  localparam int MAXV = (1 << (Q - 1)) - 1;

  logic signed [Q+1:0] ea, eb, mag_a, mag_b, mag, sum;

  always_comb begin
    ea    = (Q + 2)'(a);
    eb    = (Q + 2)'(b);
    mag_a = (ea < 0) ? -ea : ea;
    mag_b = (eb < 0) ? -eb : eb;
    mag   = (mag_a < mag_b) ? mag_a : mag_b;
    if (mag > MAXV) mag = (Q + 2)'(MAXV);
    sum   = s ? (eb - ea) : (eb + ea);
    if (sum > MAXV) sum = (Q + 2)'(MAXV);
    else if (sum < -MAXV) sum = -(Q + 2)'(MAXV);
    if (!sel_g) y = (a[Q-1] ^ b[Q-1]) ? -mag[Q-1:0] : mag[Q-1:0];
    else        y = sum[Q-1:0];
  end

endmodule
