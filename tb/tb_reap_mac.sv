// tb_reap_mac: self-checking testbench of the REAP MAC (VEC=4).
// Checks hand-worked results (the logarithmic product 1.5 x 1.5 = 2.0 rather than
// 2.25, signs, zero, NaR), the six-cycle latency, one result per cycle, random dot
// products against a real-number model (within 2 ULP of posit(16,2), the alignment
// truncates), and cyclic accumulation chains of back-to-back operations (3 ULP). Where
// products cancel to a small sum, a result also passes within the alignment bound:
// (VEC+2) * 2^-14 times the largest term of each step, summed over the chain.
module tb_reap_mac;
  import posit_ref_pkg::*;
  localparam int VEC = 4;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, acc_fb = 0;
  logic [7:0]  va [VEC];
  logic [7:0]  vb [VEC];
  logic [15:0] acc;
  logic        out_valid;
  logic [15:0] out;
  int checks = 0, failures = 0;

  reap_mac #(.VEC(VEC)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expected results queue, filled when operands are sampled
  logic [15:0] exp_q [$];
  int          tol_q [$];
  real         abs_q [$];
  int          issue_cyc [$];
  int          cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      logic [15:0] e; int t; int ic; real ab, d;
      checks++;
      if (exp_q.size() == 0) begin
        failures++; $display("unexpected result %h", out);
      end else begin
        e = exp_q.pop_front(); t = tol_q.pop_front(); ic = issue_cyc.pop_front();
        ab = abs_q.pop_front();
        d = p2r(out, 16) - p2r(e, 16);
        if (pdist(out, e) > t && (d > ab || -d > ab)) begin
          failures++;
          $display("MISMATCH out=%h exp=%h (%f vs %f)", out, e, p2r(out, 16), p2r(e, 16));
        end
        checks++;
        if (cyc - ic != 6) begin
          failures++; $display("latency %0d", cyc - ic);
        end
      end
    end
  end

  real run_sum, mag_run;

  task automatic issue(input logic [7:0] a[VEC], input logic [7:0] b[VEC], input logic [15:0] c,
                       input logic fb, input logic [15:0] expv, input int tol);
    va = a; vb = b; acc = c; acc_fb = fb; in_valid = 1;
    @(posedge clk);
    exp_q.push_back(expv); tol_q.push_back(tol); abs_q.push_back(0.0); issue_cyc.push_back(cyc);
    #1 in_valid = 0;
  endtask

  task automatic issue_rand(input logic fb, input int tol);
    logic [7:0] a[VEC], b[VEC]; logic [15:0] c; real r, m, p;
    for (int i = 0; i < VEC; i++) begin
      // keep operands in a moderate range so the sum is not dominated by one term
      a[i] = 8'($urandom_range(8'h20, 8'h5F)); if ($urandom_range(0,1)) a[i] = ~a[i] + 1'b1;
      b[i] = 8'($urandom_range(8'h20, 8'h5F)); if ($urandom_range(0,1)) b[i] = ~b[i] + 1'b1;
    end
    c = 16'($urandom_range(16'h3000, 16'h4FFF));
    r = fb ? run_sum : p2r(c, 16);
    m = (r < 0.0) ? -r : r;
    for (int i = 0; i < VEC; i++) begin
      p = amul(a[i], b[i]);
      r += p;
      if (p > m) m = p;
      if (-p > m) m = -p;
    end
    mag_run = fb ? mag_run + m : m;
    run_sum = r;
    va = a; vb = b; acc = c; acc_fb = fb; in_valid = 1;
    @(posedge clk);
    exp_q.push_back(r2p16(r)); tol_q.push_back(tol); issue_cyc.push_back(cyc);
    abs_q.push_back(real'(VEC + 2) * mag_run / 16384.0);
    #1 in_valid = 0;
  endtask

  initial begin
    logic [7:0] a[VEC], b[VEC];
    for (int i = 0; i < VEC; i++) begin va[i] = 0; vb[i] = 0; end
    acc = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk); #1;

    // 1.5*1.5 (log product 2.0) + 0 -> 2.0 = 0x4800 (exact product would be 0x4900)
    a = '{8'h44, 0, 0, 0}; b = '{8'h44, 0, 0, 0};
    issue(a, b, 16'h0000, 0, 16'h4800, 0);
    // 1*1 + 1*1 + 1 = 3.0 -> 0x4C00
    a = '{8'h40, 8'h40, 0, 0}; b = '{8'h40, 8'h40, 0, 0};
    issue(a, b, 16'h4000, 0, 16'h4C00, 0);
    // -1*1 + 1 = 0
    a = '{8'hC0, 0, 0, 0}; b = '{8'h40, 0, 0, 0};
    issue(a, b, 16'h4000, 0, 16'h0000, 0);
    // 2*4 + (-1) = 7: 2=0x48, 4=0x50 in posit(8,2); 7.0 posit(16,2)=0x5600
    a = '{8'h48, 0, 0, 0}; b = '{8'h50, 0, 0, 0};
    issue(a, b, 16'hC000, 0, 16'h5600, 0);
    // NaR operand
    a = '{8'h80, 0, 0, 0}; b = '{8'h40, 0, 0, 0};
    issue(a, b, 16'h0000, 0, 16'h8000, 0);
    // cyclic: previous was NaR, fb keeps NaR
    a = '{8'h40, 0, 0, 0}; b = '{8'h40, 0, 0, 0};
    issue(a, b, 16'h0000, 1, 16'h8000, 0);
    // restart at 1 and accumulate 1*1 three times, back to back -> 1, 2, 3, 4
    issue(a, b, 16'h0000, 0, 16'h4000, 0);
    issue(a, b, 16'h0000, 1, 16'h4800, 0);
    issue(a, b, 16'h0000, 1, 16'h4C00, 0);
    issue(a, b, 16'h0000, 1, 16'h5000, 0);
    repeat (8) @(posedge clk); #1;

    // random single operations, back to back
    for (int n = 0; n < 300; n++) issue_rand(0, 2);
    // random cyclic chains of 25 steps (a 5x5 kernel)
    for (int c = 0; c < 20; c++) begin
      issue_rand(0, 2);
      for (int s = 1; s < 25; s++) issue_rand(1, 3);
    end
    repeat (10) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("%0d results missing", exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
