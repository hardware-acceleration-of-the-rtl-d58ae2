// sqrt_unit -- the divider together with the square-root logic.
//
// The accelerator has a single divider. In divide mode (sqrt_mode = 0) it
// divides n by d. In square-root mode (sqrt_mode = 1) it performs one
// Babylonian step for the radicand s: the divisor is the current estimate
// (x, or the leading-one estimate of s when first = 1) and x_next is the
// averaged new estimate. Sharing the divider in this way, with the square-root
// logic as a small addition next to it, follows the paper (its Fig. 2 draws
// the square-root unit as the divider plus a strip of logic). The mode/first
// control pins are this design's choice.
//
// Timing: purely combinational; the caller registers x_next between steps,
// one step per clock cycle.
module sqrt_unit #(
  parameter int unsigned W    = 14,
  parameter int unsigned FRAC = 6
) (
  input  logic         sqrt_mode, // 0: q = n/d, 1: Babylonian step on s
  input  logic         first,     // sqrt mode: start from the estimate of s
  input  logic [W-1:0] n,         // divide mode dividend
  input  logic [W-1:0] d,         // divide mode divisor
  input  logic [W-1:0] s,         // sqrt mode radicand
  input  logic [W-1:0] x,         // sqrt mode current estimate
  output logic [W-1:0] q,         // divider quotient
  output logic         ovf,       // divider overflow / divide by zero
  output logic [W-1:0] x_next     // sqrt mode next estimate
);

  logic [W-1:0] x0, x_cur, div_n, div_d;

  assign x_cur = first ? x0 : x;
  assign div_n = sqrt_mode ? s     : n;
  assign div_d = sqrt_mode ? x_cur : d;

  array_divider #(.W(W), .FRAC(FRAC)) u_div (
    .n(div_n), .d(div_d), .q(q), .ovf(ovf)
  );

  sqrt_logic #(.W(W), .FRAC(FRAC)) u_logic (
    .s(s), .x(x_cur), .q(q), .x0(x0), .x_next(x_next)
  );

endmodule
