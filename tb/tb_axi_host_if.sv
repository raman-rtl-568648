// tb_axi_host_if: AXI4-Lite writes with address first, data first and both
// together, and reads with a slow master; checks the register strobes, the
// write data and address, OKAY responses, read data and that responses wait for
// the ready signals.
module tb_axi_host_if;
  logic clk = 0, rst_n = 0;
  logic s_awvalid = 0, s_awready, s_wvalid = 0, s_wready, s_bvalid, s_bready = 0;
  logic [7:0] s_awaddr = 0, s_araddr = 0;
  logic [31:0] s_wdata = 0, s_rdata;
  logic [1:0] s_bresp, s_rresp;
  logic s_arvalid = 0, s_arready, s_rvalid, s_rready = 0;
  logic reg_wr, reg_rd;
  logic [7:0] reg_addr;
  logic [31:0] reg_wdata, reg_rdata;
  int checks = 0, failures = 0;
  int nwr = 0;
  logic [7:0]  last_wa;
  logic [31:0] last_wd;

  axi_host_if dut (.*);
  always #5 clk = ~clk;
  assign reg_rdata = {reg_addr, 8'hA5, ~reg_addr, 8'h3C};   // register file model

  always @(posedge clk) if (reg_wr) begin nwr++; last_wa = reg_addr; last_wd = reg_wdata; end

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic axi_write(input logic [7:0] a, input logic [31:0] d, input int order);
    int n0 = nwr;
    if (order != 1) begin s_awvalid = 1; s_awaddr = a; end
    if (order != 0) begin s_wvalid = 1; s_wdata = d; end
    while ((s_awvalid && !s_awready) || (s_wvalid && !s_wready)) @(posedge clk);
    @(posedge clk); #1;
    if (order == 0) begin
      s_awvalid = 0; s_wvalid = 1; s_wdata = d;
      @(posedge clk); #1;
    end else if (order == 1) begin
      s_wvalid = 0; s_awvalid = 1; s_awaddr = a;
      @(posedge clk); #1;
    end
    s_awvalid = 0; s_wvalid = 0;
    // response must wait for bready
    repeat (3) @(posedge clk);
    #1;
    checks++; if (!s_bvalid || s_bresp != 2'b00) begin failures++; $display("no B response"); end
    s_bready = 1; @(posedge clk); #1 s_bready = 0;
    checks++; if (s_bvalid) begin failures++; $display("B not cleared"); end
    checks++;
    if (nwr != n0 + 1 || last_wa != a || last_wd != d) begin
      failures++; $display("write strobe wrong: n=%0d a=%h d=%h", nwr - n0, last_wa, last_wd);
    end
  endtask

  task automatic axi_read(input logic [7:0] a);
    s_arvalid = 1; s_araddr = a;
    while (!s_arready) @(posedge clk);
    @(posedge clk); #1 s_arvalid = 0;
    repeat (2) @(posedge clk);
    #1;
    checks++;
    if (!s_rvalid || s_rdata != {a, 8'hA5, ~a, 8'h3C} || s_rresp != 0) begin
      failures++; $display("read %h got %h", a, s_rdata);
    end
    s_rready = 1; @(posedge clk); #1 s_rready = 0;
    checks++; if (s_rvalid) begin failures++; $display("R not cleared"); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int n = 0; n < 30; n++) begin
      axi_write(8'($urandom), $urandom, n % 3);
      axi_read(8'($urandom));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
