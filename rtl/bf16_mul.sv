// bf16_mul: combinational bfloat16 multiplier, the "x" of the PE (weight
// times accumulated pixels).
//
// The paper states only that the feature extractor uses BF16. Own choices:
// subnormals flush to zero, the 16-bit mantissa product is truncated toward
// zero, underflow gives zero and overflow gives infinity. Combinational.
//
// Lint note: the low 7 bits of the 16-bit mantissa product are unused on
// purpose; truncation drops them.
module bf16_mul
  import fsl_pkg::*;
(
  input  bf16_t a,
  input  bf16_t b,
  output bf16_t y
);
  logic [7:0]  ma, mb;
  logic [15:0] prod;
  logic signed [10:0] e_res;
  logic [6:0]  frac;
  logic        s;

  always_comb begin
    s     = a[15] ^ b[15];
    ma    = {1'b1, a[6:0]};
    mb    = {1'b1, b[6:0]};
    prod  = ma * mb;
    e_res = 11'(a[14:7]) + 11'(b[14:7]) - 11'sd127;
    if (prod[15]) begin
      frac  = prod[14:8];
      e_res = e_res + 11'sd1;
    end else begin
      frac  = prod[13:7];
    end
    if (a[14:7] == 8'd0 || b[14:7] == 8'd0 || e_res <= 0) y = 16'h0000;
    else if (e_res >= 255)                                 y = {s, 8'hFF, 7'd0};
    else                                                   y = {s, e_res[7:0], frac};
  end
endmodule
