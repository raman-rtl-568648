// tb_lzc: leading-zero count of every one-hot word, of random words (the count is
// checked by scanning the word bit by bit) and of zero.
module tb_lzc;
  localparam int W = 32;
  logic [W-1:0] in;
  logic [5:0]   count;
  logic         all_zero;
  int checks = 0, failures = 0;

  lzc #(.W(W)) dut (.in(in), .count(count), .all_zero(all_zero));

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ref_c;
    in = '0; #1;
    checks++; if (count != W || !all_zero) failures++;
    for (int i = 0; i < W; i++) begin
      in = W'(1) << i; #1;
      checks++; if (count != 6'(W - 1 - i) || all_zero) begin failures++; $display("onehot %0d -> %0d", i, count); end
    end
    for (int n = 0; n < 1000; n++) begin
      in = $urandom >> $urandom_range(0, 31); #1;
      ref_c = 0;
      while (ref_c < W && !in[W-1-ref_c]) ref_c++;
      checks++; if (int'(count) != ref_c) begin failures++; $display("%h -> %0d want %0d", in, count, ref_c); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
