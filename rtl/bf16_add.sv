// bf16_add: combinational bfloat16 adder used by the PE register files and
// by the PE output accumulator.
//
// The paper states only that the feature extractor computes in BF16. The
// arithmetic details here are this design's own: subnormal inputs are
// flushed to zero, the exact sum is truncated toward zero (kept with 16
// guard bits plus a sticky bit), results below the normal range become
// zero and results above it become infinity. NaN inputs are not treated
// specially. Timing: purely combinational, y follows a and b.
//
// Lint note: the low bits of the normalised sum (guard bits and sticky)
// and its two top bits are deliberately left unused: the result is
// truncated to 7 fraction bits and the exponent is handled separately.
module bf16_add
  import fsl_pkg::*;
(
  input  bf16_t a,
  input  bf16_t b,
  output bf16_t y
);
  logic        sa, sb, sl, ss;
  logic [7:0]  ea, eb, el, es;
  logic [7:0]  ma, mb, ml, msm;
  logic [8:0]  dexp;
  logic [25:0] xl, xs, sum;   // {carry, hidden, 7 frac, 16 guard, sticky}
  logic [25:0] norm;
  logic signed [10:0] e_res;
  int          lz;

  always_comb begin
    sa = a[15]; ea = a[14:7]; ma = (ea == 8'd0) ? 8'd0 : {1'b1, a[6:0]};
    sb = b[15]; eb = b[14:7]; mb = (eb == 8'd0) ? 8'd0 : {1'b1, b[6:0]};
    // order by magnitude
    if ({ea, ma} >= {eb, mb}) begin
      sl = sa; el = ea; ml = ma; ss = sb; es = eb; msm = mb;
    end else begin
      sl = sb; el = eb; ml = mb; ss = sa; es = ea; msm = ma;
    end
    dexp = {1'b0, el} - {1'b0, es};
    xl   = {1'b0, ml, 17'd0};
    xs   = {1'b0, msm, 17'd0};
    if (dexp > 9'd24) xs = (msm != 8'd0) ? 26'd1 : 26'd0;
    else              xs = (xs >> dexp) | 26'((((xs >> dexp) << dexp) != xs) ? 1 : 0);
    if (sl == ss) sum = xl + xs;
    else          sum = xl - xs;
    // normalise so that the hidden bit sits at position 24
    lz = 0;
    for (int i = 25; i >= 0; i--) begin
      if (sum[i]) begin
        lz = 24 - i;
        break;
      end
    end
    e_res = 11'(el) - 11'(lz);
    if (lz < 0) norm = sum >> 1;
    else        norm = sum << lz;
    if (ml == 8'd0 || sum == 26'd0 || e_res <= 0) y = 16'h0000;
    else if (e_res >= 255)                         y = {sl, 8'hFF, 7'd0};
    else                                           y = {sl, e_res[7:0], norm[23:17]};
    if (ml == 8'd0 && msm == 8'd0) y = 16'h0000;
  end
endmodule
