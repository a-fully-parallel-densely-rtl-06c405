// tanh_lut: L-level piecewise-constant approximation of tanh on [-1, 1].
//
// The interval [-1, 1] is cut into L equal bins (breakpoints b_k = -1 + 2k/L)
// and bin k returns the k-th of L evenly spaced output levels
// level_k = -1 + 2k/(L-1). Inputs below -1 give -1, inputs at or above +1
// give +1. This is the published look-up-table scheme; with the default
// L = 4 the levels are -1, -1/3, +1/3, +1 and the breakpoints -1, -1/2, 0,
// +1/2, +1. Levels are rounded toward zero to the fixed-point grid, matching
// the datapath's truncate-toward-zero rule.
//
// Interface: x and y are signed fixed-point words of W bits with F fractional
// bits (W - F >= 2 so that +1 is representable). Purely combinational.
//
// Lint note: only the low log2(L) bits of the intermediate bin index are
// used; inside [-1, 1) the upper bits are always zero, so an unused-bits
// warning on `bin` is expected and harmless.
module tanh_lut #(
  parameter int unsigned W = 16,
  parameter int unsigned F = 12,
  parameter int unsigned L = 4
) (
  input  logic signed [W-1:0] x,
  output logic signed [W-1:0] y
);
  localparam int ONE = 1 << F;
  localparam int KI  = (L > 1) ? $clog2(L) : 1;
  localparam int KW  = KI + 1;

  logic signed [W-1:0] level [L];
  for (genvar k = 0; k < L; k++) begin : g_level
    localparam int LV = ((2 * k - (int'(L) - 1)) * ONE) / (int'(L) - 1);
    assign level[k] = W'(LV);
  end

  // (x + 1) * L / 2, in units of 2^-F, gives the bin index for x in [-1, 1).
  localparam int XW = W + KW + 2;
  logic signed [XW-1:0] xe;
  logic signed [XW-1:0] shifted;
  logic signed [XW-1:0] bin;
  always_comb begin
    xe      = XW'(x);
    shifted = (xe + XW'(ONE)) * XW'(L);
    bin     = shifted >>> (F + 1);
    if (xe < -XW'(ONE))       y = -W'(ONE);
    else if (xe >= XW'(ONE))  y = W'(ONE);
    else                      y = level[bin[KI-1:0]];
  end
endmodule
