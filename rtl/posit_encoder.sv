// posit_encoder: packs sign, scale and fraction into a posit(NB,ES) word.
//
// The scale is clamped to the range of the format (maxpos/minpos), split into the
// regime value k = scale >>> ES and the exponent e = scale mod 2^ES. A bit string
// regime | e | frac is built left-aligned, the top NB-1 bits become the unsigned
// body and the next bit is the guard; the remaining bits and sticky_in form the
// sticky bit. Rounding is round-to-nearest-even and never leaves the finite range:
// maxpos does not round up into NaR. A negative result is the two's complement.
// zero and nar inputs override everything. Combinational.
// That the encode stage rounds and packs follows the REAP MAC description; the
// rounding mode and saturation are this design's choice.
module posit_encoder #(
  parameter int unsigned NB   = 16,
  parameter int unsigned ES   = 2,
  parameter int unsigned FWIN = 31,
  parameter int unsigned SW   = 10
) (
  input  logic                 sign,
  input  logic                 zero,
  input  logic                 nar,
  input  logic signed [SW-1:0] scale,
  input  logic [FWIN-1:0]      frac,
  input  logic                 sticky_in,
  output logic [NB-1:0]        p
);
  localparam int MAXS = (NB - 2) * (1 << ES);
  localparam int VW   = NB + ES + FWIN + 1;

  int            sc, k;
  logic [ES-1:0] e;
  logic [VW-1:0] tail, v;
  logic [NB-2:0] body;
  logic          guard, sticky, rup;

  always_comb begin
    sc = int'(scale);
    if (sc > MAXS)  sc = MAXS;
    if (sc < -MAXS) sc = -MAXS;
    k = sc >>> ES;
    e = ES'(sc);
    tail = {1'b0, e, frac, {(NB){1'b0}}};
    if (k >= 0) begin
      v = ~({VW{1'b1}} >> (k + 1)) | (tail >> (k + 1));
    end else begin
      tail[VW-1] = 1'b1;
      v = tail >> (-k);
    end
    body   = v[VW-1 -: NB-1];
    guard  = v[VW-NB];
    sticky = sticky_in | (|v[VW-NB-1:0]);
    rup    = guard & (body[0] | sticky) & ~(&body);
    body   = body + (NB-1)'(rup);
    if (nar)       p = {1'b1, {(NB-1){1'b0}}};
    else if (zero) p = '0;
    else if (sign) p = ~{1'b0, body} + 1'b1;
    else           p = {1'b0, body};
  end
endmodule
