// array_divider -- combinational restoring array divider for Q8.6 words.
//
// Computes q = floor((n << FRAC) / d), the Q8.6 quotient of two Q8.6 words,
// with W rows of (W+1)-bit subtracters (the paper's "14 14-bit subtracters";
// the extra bit is the borrow). The quotient has 2W-FRAC bits in general, but
// its top FRAC bits are zero exactly when n[W-1:W-FRAC] < d. That comparison
// is the overflow test; when it passes, the first FRAC steps of long division
// would only shift in those top bits of n, so the array starts from them as the
// initial partial remainder. Each row then shifts in the next dividend bit,
// subtracts d, keeps the difference if it did not borrow and emits one
// quotient bit, most significant first.
//
// On overflow, including d = 0, q saturates to all ones and ovf is raised.
// Saturation and truncation are this design's choices.
//
// Timing: purely combinational, as in the paper.
module array_divider #(
  parameter int unsigned W    = 14,
  parameter int unsigned FRAC = 6
) (
  input  logic [W-1:0] n,
  input  logic [W-1:0] d,
  output logic [W-1:0] q,
  output logic         ovf
);

  // Low W bits of the shifted dividend n << FRAC, fed in one per row.
  logic [W-1:0] dlow;
  // rem[k] : partial remainder entering row k (k = 0 is the top row)
  logic [W-1:0] rem [W+1];
  logic [W-1:0] qraw;

  assign dlow   = {n[W-FRAC-1:0], {FRAC{1'b0}}};
  assign rem[0] = W'(n[W-1:W-FRAC]);
  assign ovf    = (W'(n[W-1:W-FRAC]) >= d);

  for (genvar k = 0; k < W; k++) begin : g_row
    localparam int unsigned BIT = W - 1 - k;
    logic [W:0] t;
    logic [W:0] diff;
    assign t          = {rem[k], dlow[BIT]};
    assign diff       = t - {1'b0, d};
    assign qraw[BIT]  = ~diff[W];          // no borrow: t >= d
    assign rem[k+1]   = qraw[BIT] ? diff[W-1:0] : t[W-1:0];
  end

  assign q = ovf ? '1 : qraw;

endmodule
