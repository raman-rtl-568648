// tb_csa_tree: random check that sum + carry equals the sum of all terms (modulo
// 2^W) for trees of 5 and 9 terms, including negative two's-complement terms.
module tb_csa_tree;
  localparam int W = 32;
  logic [W-1:0] t5 [5];
  logic [W-1:0] t9 [9];
  logic [W-1:0] s5, c5, s9, c9;
  int checks = 0, failures = 0;

  csa_tree #(.M(5), .W(W)) u5 (.terms(t5), .sum(s5), .carry(c5));
  csa_tree #(.M(9), .W(W)) u9 (.terms(t9), .sum(s9), .carry(c9));

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [W-1:0] r5, r9;
    for (int n = 0; n < 2000; n++) begin
      r5 = '0; r9 = '0;
      for (int i = 0; i < 5; i++) begin t5[i] = $urandom; r5 += t5[i]; end
      for (int i = 0; i < 9; i++) begin t9[i] = $urandom; r9 += t9[i]; end
      #1;
      checks += 2;
      if (s5 + c5 != r5) begin failures++; $display("M=5 %h+%h != %h", s5, c5, r5); end
      if (s9 + c9 != r9) begin failures++; $display("M=9 %h+%h != %h", s9, c9, r9); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
