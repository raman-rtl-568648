// approx_mult: approximate mantissa multiplier of the REAP MAC.
//
// Multiplies two normalised posit mantissas 1.fa and 1.fb with a logarithmic
// (Mitchell-type) scheme: log2(1+x) is taken as x, so the product's logarithm is
// fa+fb. If the fraction sum stays below 1 the product is 1+(fa+fb); if it carries,
// the product is 2*(1+(fa+fb-1)). No partial-product array is needed, only one
// FB-bit adder. When TRUNC < FB the operands are first cut to TRUNC fraction bits
// and a '1' is appended below them, the unbiased truncation of the DR-ALM family.
// The default keeps all three fraction bits of a posit(8,2) word.
// Output mr is unnormalised, value in [1,4): 2 integer bits, FB fraction bits,
// so the maximum exponent found beside it in the multiply stage stays valid.
// Combinational. That the multiplier is a DR-ALM-style logarithmic one follows the
// design's evaluation; the exact bit-level form here is this design's own choice.
module approx_mult #(
  parameter int unsigned FB    = 3,
  parameter int unsigned TRUNC = 3
) (
  input  logic [FB-1:0] fa,
  input  logic [FB-1:0] fb,
  output logic [FB+1:0] mr
);
  logic [FB-1:0] ta, tb;
  logic [FB:0]   s;

  always_comb begin
    ta = fa;
    tb = fb;
    if (TRUNC < FB) begin
      for (int i = 0; i < int'(FB); i++) begin
        if (i < int'(FB - TRUNC) - 1) begin
          ta[i] = 1'b0;
          tb[i] = 1'b0;
        end else if (i == int'(FB - TRUNC) - 1) begin
          ta[i] = 1'b1;
          tb[i] = 1'b1;
        end
      end
    end
    s = {1'b0, ta} + {1'b0, tb};
    if (s[FB]) mr = {1'b1, s[FB-1:0], 1'b0};   // 2 * (1.frac)
    else       mr = {2'b01, s[FB-1:0]};        // 1.frac
  end
endmodule
