// csa_tree: carry-save reduction of M W-bit terms to a sum and a carry vector.
//
// Each level groups the terms in threes and replaces every group by a 3:2 compressor
// (full adders bit by bit), so M terms become 2*floor(M/3) + M mod 3; levels are
// generated until two vectors remain (ceil(log1.5(M/2)) levels). sum + carry
// (modulo 2^W) equals the sum of all terms, so two's-complement terms add correctly.
// Combinational. The recursive CSA tree with N+1 inputs is the accumulation stage of
// the REAP MAC; the publication describes the tree recursively, this design unrolls
// the recursion into a generate loop over levels, and the grouping order is its choice.
module csa_tree #(
  parameter int unsigned M = 5,
  parameter int unsigned W = 32
) (
  input  logic [W-1:0] terms [M],
  output logic [W-1:0] sum,
  output logic [W-1:0] carry
);
  // number of terms left after lvl reduction levels
  function automatic int unsigned count_at(int unsigned m, int unsigned lvl);
    int unsigned c = m;
    for (int unsigned k = 0; k < lvl; k++) c = (c <= 2) ? c : 2 * (c / 3) + c % 3;
    return c;
  endfunction

  function automatic int unsigned levels(int unsigned m);
    int unsigned n = 0;
    while (count_at(m, n) > 2) n++;
    return n;
  endfunction

  localparam int unsigned NLV = levels(M);

  if (M == 1) begin : g_one
    assign sum   = terms[0];
    assign carry = '0;
  end else if (NLV == 0) begin : g_two
    assign sum   = terms[0];
    assign carry = terms[1];
  end else begin : g_tree
    for (genvar i = 0; i < int'(NLV); i++) begin : g_lvl
      localparam int unsigned MI = count_at(M, i);
      localparam int unsigned G  = MI / 3;
      localparam int unsigned R  = MI % 3;
      localparam int unsigned MO = 2 * G + R;
      logic [W-1:0] vin  [MI];
      logic [W-1:0] vout [MO];
      if (i == 0) begin : g_src
        assign vin = terms;
      end else begin : g_src
        assign vin = g_lvl[i-1].vout;
      end
      for (genvar g = 0; g < int'(G); g++) begin : g_fa
        assign vout[2*g]   = vin[3*g] ^ vin[3*g+1] ^ vin[3*g+2];
        assign vout[2*g+1] = ((vin[3*g] & vin[3*g+1]) | (vin[3*g] & vin[3*g+2]) |
                              (vin[3*g+1] & vin[3*g+2])) << 1;
      end
      for (genvar r = 0; r < int'(R); r++) begin : g_pass
        assign vout[2*G+r] = vin[3*G+r];
      end
    end
    assign sum   = g_lvl[NLV-1].vout[0];
    assign carry = g_lvl[NLV-1].vout[1];
  end
endmodule
