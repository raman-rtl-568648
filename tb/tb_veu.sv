// tb_veu: a 4-lane VEU runs a 25-tap kernel (one product per lane per cycle,
// first step from the bias, the rest cyclically accumulated) and then a 3-tap
// one. Each lane's final result is compared with bias + sum of logarithmic
// products computed in real numbers (within 3 ULP of posit(16,2)); the number of
// results and the six-cycle latency are checked too. A chained 10-tap run
// (acc_prev set) must continue each lane from its previous posit(16,2) result.
module tb_veu;
  import posit_ref_pkg::*;
  localparam int N = 4;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, acc_fb = 0, acc_prev = 0;
  logic [7:0] a [N], w [N], bias [N];
  logic out_valid;
  logic [15:0] out [N];
  int checks = 0, failures = 0;
  int nres = 0, cyc = 0, first_issue = -1, first_res = -1;
  real ref_sum [N];

  veu #(.N_MAC(N), .VEC(1)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;
  always @(posedge clk) if (out_valid) begin
    nres++;
    if (first_res < 0) first_res = cyc;
  end

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [7:0] rnd8();
    logic [7:0] v = 8'($urandom_range(8'h28, 8'h58));
    return $urandom_range(0, 1) ? ~v + 1'b1 : v;
  endfunction

  task automatic run_kernel(input int k, input logic chain);
    nres = 0; first_res = -1;
    acc_prev = chain;
    for (int l = 0; l < N; l++) begin
      bias[l] = rnd8();
      ref_sum[l] = chain ? p2r(out[l], 16) : p2r(16'(bias[l]) << 8, 16);
    end
    for (int s = 0; s < k; s++) begin
      for (int l = 0; l < N; l++) begin
        a[l] = rnd8(); w[l] = rnd8();
        ref_sum[l] += amul(a[l], w[l]);
      end
      in_valid = 1; acc_fb = (s != 0);
      @(posedge clk);
      if (s == 0) first_issue = cyc;
      #1;
    end
    in_valid = 0; acc_prev = 0;
    repeat (8) @(posedge clk);
    #1;
    checks++; if (nres != k) begin failures++; $display("%0d results for %0d steps", nres, k); end
    checks++; if (first_res - first_issue != 6) begin failures++; $display("latency %0d", first_res - first_issue); end
    for (int l = 0; l < N; l++) begin
      checks++;
      if (pdist(out[l], r2p16(ref_sum[l])) > 3) begin
        failures++; $display("lane %0d: %h (%f) want %f", l, out[l], p2r(out[l], 16), ref_sum[l]);
      end
    end
  endtask

  initial begin
    for (int l = 0; l < N; l++) begin a[l] = 0; w[l] = 0; bias[l] = 0; end
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int r = 0; r < 10; r++) begin
      run_kernel(25, 0);
      run_kernel(10, 1);
      run_kernel(3, 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
