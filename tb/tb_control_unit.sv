// tb_control_unit: launches with KLEN = 25 (a 5x5 kernel), 1 and 32 against a
// six-stage pipeline model of the VEU; checks the issued entry sequence, the
// cyclic-accumulation flag (off only for the first step), that done comes
// exactly KLEN + 5 cycles after start (30 for 5x5), the done counter and the
// parameter registers.
module tb_control_unit;
  logic clk = 0, rst_n = 0;
  logic reg_wr = 0;
  logic [7:0] reg_addr = 0;
  logic [31:0] reg_wdata = 0, reg_rdata, layer_cfg;
  logic reg_hit, start = 0, busy, mac_valid, mac_fb, done, af_valid;
  logic [4:0] rd_idx, bias_idx;
  logic res_valid;
  logic [5:0] pipe = 0;
  int checks = 0, failures = 0;
  int cyc = 0, issued = 0, t_start;

  control_unit dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  // six-stage pipeline model of the MAC lanes
  always @(posedge clk) pipe <= {pipe[4:0], mac_valid};
  assign res_valid = pipe[5];

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (mac_valid) begin
    checks++;
    if (rd_idx != 5'(issued) || mac_fb != (issued != 0)) begin
      failures++; $display("step %0d: idx %0d fb %b", issued, rd_idx, mac_fb);
    end
    issued++;
  end

  task automatic wr(input logic [7:0] a, input logic [31:0] d);
    reg_wr = 1; reg_addr = a; reg_wdata = d; @(posedge clk); #1 reg_wr = 0;
  endtask

  task automatic launch(input int k);
    wr(8'h08, 32'(k));
    reg_addr = 8'h08; #1;
    checks++; if (reg_rdata != 32'(k) || !reg_hit) begin failures++; $display("KLEN reads %0d", reg_rdata); end
    issued = 0;
    start = 1; @(posedge clk); #1 t_start = cyc; start = 0;
    while (!done) begin @(posedge clk); #1; end
    checks++;
    if (cyc - t_start != k + 5) begin failures++; $display("K=%0d: %0d cycles, want %0d", k, cyc - t_start, k + 5); end
    checks++; if (!af_valid) failures++;
    @(posedge clk); #1;
    checks++; if (issued != k || busy) begin failures++; $display("issued %0d", issued); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    wr(8'h0C, 32'd7);
    wr(8'h10, 32'hDEADBEEF);
    checks++; if (bias_idx != 7 || layer_cfg != 32'hDEADBEEF) failures++;
    launch(25);
    launch(1);
    launch(32);
    reg_addr = 8'h14; #1;
    checks++; if (reg_rdata != 3) begin failures++; $display("dones %0d", reg_rdata); end
    reg_addr = 8'h30; #1;
    checks++; if (reg_hit) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
