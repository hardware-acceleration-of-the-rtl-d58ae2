// array_multiplier -- combinational unsigned array multiplier for Q8.6 words.
//
// The full 2W-bit product is formed by W rows of W-bit ripple adders, one per
// bit of the multiplier b: row i adds the partial product a & {W{b[i]}} to the
// upper W bits of the running sum of row i-1 and retires one product bit. With
// W = 14 this is the "14 14-bit adders" of the paper's multiplier (row 0 adds
// to zero, so a synthesis tool removes it).
//
// Fixed point: a Q8.6 x Q8.6 product is Q16.12; the Q8.6 result is bits
// [FRAC +: W], the low FRAC bits are truncated. If any bit above the result
// is set the output saturates to all ones and ovf is raised. Truncation and
// saturation are this design's choices; the paper does not say how results
// are rounded.
//
// Timing: purely combinational, no clock. The paper builds it this way for
// speed and closes timing at 250 MHz with one multiply per cycle.
module array_multiplier #(
  parameter int unsigned W    = 14,
  parameter int unsigned FRAC = 6
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  output logic [W-1:0] p,
  output logic         ovf
);

  // hi[i] : upper W bits of the partial sum after row i
  logic [W-1:0]   hi   [W+1];
  logic [2*W-1:0] prod;

  assign hi[0] = '0;

  for (genvar i = 0; i < W; i++) begin : g_row
    logic [W-1:0] pp;
    logic [W:0]   sum;
    assign pp        = a & {W{b[i]}};
    assign sum       = {1'b0, hi[i]} + {1'b0, pp};
    assign prod[i]   = sum[0];
    assign hi[i+1]   = sum[W:1];
  end

  assign prod[2*W-1:W] = hi[W];

  assign ovf = |prod[2*W-1:W+FRAC];
  assign p   = ovf ? '1 : prod[FRAC +: W];

endmodule
