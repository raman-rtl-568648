// posit_decoder: splits a posit(NB,ES) word into its fields.
//
// Negative words are first two's-complemented. The regime is the run of equal bits
// after the sign; a run of r ones gives k = r-1, a run of r zeros gives k = -r. The
// ES bits after the regime terminator are the exponent (missing bits read as 0) and
// the rest is the fraction below the hidden 1. scale = k*2^ES + exponent.
// Purely combinational. The REAP MAC uses one decoder per operand and one for the
// accumulator input, as drawn in the MAC's decode stage; the decoding method itself
// is the standard posit one and not specific to this design.
module posit_decoder #(
  parameter int unsigned NB = 8,
  parameter int unsigned ES = 2,
  parameter int unsigned SW = 10                 // signed width of scale
) (
  input  logic [NB-1:0]          p,
  output logic                   sign,
  output logic                   zero,
  output logic                   nar,
  output logic signed [SW-1:0]   scale,
  output logic [NB-4-ES:0]       frac            // NB-3-ES fraction bits
);
  localparam int unsigned FB = NB - 3 - ES;

  logic [NB-1:0] mag;
  logic [NB-2:0] body, rest;
  logic          r0;
  int            run;
  logic [ES-1:0] expo;

  always_comb begin
    sign = p[NB-1];
    zero = (p == '0);
    nar  = (p == {1'b1, {(NB-1){1'b0}}});
    mag  = sign ? (~p + 1'b1) : p;
    body = mag[NB-2:0];
    r0   = body[NB-2];
    run  = NB - 1;
    for (int i = NB - 2; i >= 0; i--) begin
      if (body[i] != r0) begin
        run = NB - 2 - i;
        break;
      end
    end
    // drop regime and its terminator
    rest = (run + 1 >= NB - 1) ? '0 : (body << (run + 1));
    expo = rest[NB-2 -: ES];
    frac = rest[NB-2-ES -: FB];
    if (r0) scale = SW'(signed'((run - 1) * (1 << ES) + int'(expo)));
    else    scale = SW'(signed'(-run * (1 << ES) + int'(expo)));
    if (zero || nar) begin
      scale = '0;
      frac  = '0;
    end
  end
endmodule
