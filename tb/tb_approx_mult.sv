// tb_approx_mult: exhaustive check of the logarithmic mantissa multiplier for all
// 64 pairs of 3-bit fractions against (1+x)(1+y) ~ 1+x+y (x+y<1) or 2(x+y),
// plus a check that the error stays within Mitchell's bound (at most 11.2 % low,
// never high). A TRUNC=2 instance is checked against its truncated operands.
module tb_approx_mult;
  logic [2:0] fa, fb;
  logic [4:0] mr, mr_t;
  int checks = 0, failures = 0;

  approx_mult #(.FB(3), .TRUNC(3)) dut  (.fa(fa), .fb(fb), .mr(mr));
  approx_mult #(.FB(3), .TRUNC(2)) dut2 (.fa(fa), .fb(fb), .mr(mr_t));

  function automatic real mitch(input real x, input real y);
    return (x + y < 1.0) ? (1.0 + x + y) : (2.0 * (x + y));
  endfunction

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real x, y, got, exact, xt, yt;
    for (int i = 0; i < 8; i++) begin
      for (int j = 0; j < 8; j++) begin
        fa = 3'(i); fb = 3'(j); #1;
        x = i / 8.0; y = j / 8.0;
        got = real'(mr) / 8.0;
        exact = (1.0 + x) * (1.0 + y);
        checks++;
        if (got != mitch(x, y)) begin
          failures++; $display("fa=%0d fb=%0d got %f want %f", i, j, got, mitch(x, y));
        end
        checks++;
        if (got > exact || got < exact * 0.888) begin
          failures++; $display("error bound fa=%0d fb=%0d", i, j);
        end
        // truncated to 2 bits with a '1' appended below
        xt = ((i & 6) + 1) / 8.0; yt = ((j & 6) + 1) / 8.0;
        checks++;
        if (real'(mr_t) / 8.0 != mitch(xt, yt)) begin
          failures++; $display("trunc fa=%0d fb=%0d got %f", i, j, real'(mr_t) / 8.0);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
