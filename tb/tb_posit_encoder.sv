// tb_posit_encoder: packs random (sign, scale, fraction) triples into posit(16,2)
// and compares with the nearest posit found by search over real values; also
// checks saturation to maxpos/minpos, zero and NaR.
module tb_posit_encoder;
  import posit_ref_pkg::*;
  localparam int FWIN = 31;
  logic sign, zero, nar, sticky_in;
  logic signed [9:0] scale;
  logic [FWIN-1:0] frac;
  logic [15:0] p;
  int checks = 0, failures = 0;

  posit_encoder #(.NB(16), .ES(2), .FWIN(FWIN), .SW(10)) dut (.*);

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real v;
    int  sc_i;
    logic [15:0] e;
    zero = 0; nar = 0; sticky_in = 0;
    for (int n = 0; n < 3000; n++) begin
      sign  = 1'($urandom);
      sc_i  = int'($urandom_range(0, 72)) - 36;
      scale = 10'(sc_i);
      frac  = FWIN'($urandom);
      if (n % 7 == 0) frac[FWIN-20:0] = '0;           // exercise exact ties
      #1;
      v = (1.0 + real'(frac) / 2147483648.0) * (2.0 ** sc_i);
      if (sign) v = -v;
      e = r2p16(v);
      checks++;
      if (p != e) begin
        failures++; $display("s=%b sc=%0d frac=%h got %h want %h", sign, scale, frac, p, e);
      end
    end
    sign = 0; frac = '1; scale = 10'sd100; #1; checks++; if (p != 16'h7FFF) failures++;
    scale = 10'sd56; #1; checks++; if (p != 16'h7FFF) failures++;
    frac = '0; scale = -10'sd100; #1; checks++; if (p != 16'h0001) failures++;
    sign = 1; #1; checks++; if (p != 16'hFFFF) failures++;
    zero = 1; #1; checks++; if (p != 16'h0000) failures++;
    nar = 1; #1; checks++; if (p != 16'h8000) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
