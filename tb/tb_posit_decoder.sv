// tb_posit_decoder: exhaustive check of the posit(8,2) decoder and a random check of
// a posit(16,2) instance. Each decoded (sign, scale, fraction) is rebuilt into a
// real number and compared with an independent real-number decoding.
module tb_posit_decoder;
  import posit_ref_pkg::*;
  logic [7:0]  p8;
  logic [15:0] p16;
  logic s8, z8, n8, s16, z16, n16;
  logic signed [9:0] sc8, sc16;
  logic [2:0]  f8;
  logic [10:0] f16;
  int checks = 0, failures = 0;

  posit_decoder #(.NB(8),  .ES(2), .SW(10)) u8  (.p(p8),  .sign(s8),  .zero(z8),  .nar(n8),  .scale(sc8),  .frac(f8));
  posit_decoder #(.NB(16), .ES(2), .SW(10)) u16 (.p(p16), .sign(s16), .zero(z16), .nar(n16), .scale(sc16), .frac(f16));

  function automatic real rebuild(input logic s, input int sc, input real f);
    real v = (1.0 + f) * (2.0 ** sc);
    return s ? -v : v;
  endfunction

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 256; i++) begin
      p8 = 8'(i); #1;
      checks++;
      if (i == 0) begin
        if (!z8 || n8) failures++;
      end else if (i == 128) begin
        if (!n8 || z8) failures++;
      end else if (z8 || n8 || rebuild(s8, int'(sc8), real'(f8) / 8.0) != p2r(16'(p8), 8)) begin
        failures++;
        $display("p8 %h: s=%b sc=%0d f=%0d ref=%f", p8, s8, sc8, f8, p2r(16'(p8), 8));
      end
    end
    // extreme scales: maxpos 2^24, minpos 2^-24
    p8 = 8'h7F; #1; checks++; if (sc8 != 24) failures++;
    p8 = 8'h01; #1; checks++; if (sc8 != -24) failures++;
    for (int n = 0; n < 3000; n++) begin
      p16 = 16'($urandom);
      if (p16 == 16'h8000 || p16 == 0) continue;
      #1; checks++;
      if (rebuild(s16, int'(sc16), real'(f16) / 2048.0) != p2r(p16, 16)) begin
        failures++;
        $display("p16 %h: s=%b sc=%0d f=%0d ref=%f", p16, s16, sc16, f16, p2r(p16, 16));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
