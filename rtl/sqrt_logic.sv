// sqrt_logic -- the small logic the square-root unit adds to the divider.
//
// Square roots are taken with the Babylonian iteration x' = (x + S/x) / 2; the
// division S/x is done by the shared array divider, and this block supplies
// the other two pieces:
//
//   * x0, the starting estimate. From the position p of the leading '1' of S
//     (the number of bits to its right), S lies in [2^(p-FRAC), 2^(p-FRAC+1)).
//     With h = (p+FRAC)/2 rounded down, the estimate is 2^h codes when p+FRAC
//     is even and 1.5 * 2^h codes (about sqrt(2) * 2^h) when it is odd. It is
//     within a factor 1.5 of the true root, so two iterations are enough.
//     Estimating from the leading one follows the paper; the exact rule
//     (including the 1.5 step for odd exponents) is this design's choice.
//   * x_next, the average (x + q) / 2 of the current estimate and the quotient
//     q = S/x, formed with a W+1-bit adder and a one-bit shift.
//
// S = 0 gives x0 = 1 code and x_next = 0, so the root of zero is zero.
// Timing: purely combinational.
module sqrt_logic #(
  parameter int unsigned W    = 14,
  parameter int unsigned FRAC = 6
) (
  input  logic [W-1:0] s,       // radicand S (Q8.6)
  input  logic [W-1:0] x,       // current estimate x_n
  input  logic [W-1:0] q,       // S / x_n from the divider
  output logic [W-1:0] x0,      // starting estimate for S
  output logic [W-1:0] x_next   // x_{n+1}
);

  localparam int unsigned PW = $clog2(W + FRAC + 1);

  logic [PW-1:0] p;     // index of the leading one of s
  logic [PW-1:0] e;     // p + FRAC
  logic [PW-1:0] h;
  logic [W:0]    sum;

  always_comb begin
    p = '0;
    for (int unsigned i = 0; i < W; i++)
      if (s[i]) p = PW'(i);
  end

  assign e = p + PW'(FRAC);
  assign h = e >> 1;

  always_comb begin
    if (s == '0)
      x0 = W'(1);
    else if (e[0])
      x0 = W'(3) << (h - PW'(1));
    else
      x0 = W'(1) << h;
  end

  assign sum    = {1'b0, x} + {1'b0, q};
  assign x_next = (s == '0) ? '0 : sum[W:1];

endmodule
