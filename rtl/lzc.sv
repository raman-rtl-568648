// lzc: leading-zero counter of a W-bit word.
//
// count is the number of zero bits above the most significant one; for an all-zero
// word count is W and all_zero is set. Combinational priority encoder. Used in the
// normalize stage of the REAP MAC to re-adjust the exponent and to shift the
// mantissa; the priority-encoder form is this design's choice.
module lzc #(
  parameter int unsigned W  = 32,
  parameter int unsigned CW = $clog2(W + 1)
) (
  input  logic [W-1:0]  in,
  output logic [CW-1:0] count,
  output logic          all_zero
);
  always_comb begin
    count    = CW'(W);
    all_zero = (in == '0);
    for (int i = 0; i < int'(W); i++) begin
      if (in[i]) count = CW'(W - 1 - i);
    end
  end
endmodule
