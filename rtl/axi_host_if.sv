// axi_host_if: AXI4-Lite slave through which the host processor reaches the
// accelerator's registers.
//
// Write: the address (AW) and data (W) channels are accepted independently; once
// both are held, reg_wr pulses for one cycle with reg_addr/reg_wdata and the
// response (B, always OKAY) is raised until the master takes it. Read: an AR
// request is accepted when no read response is pending; reg_rd pulses with
// reg_addr in the same cycle, reg_rdata (combinational from reg_addr) is
// registered and returned on R, held until rready. One transaction per direction
// at a time; a read and a write issued in the same cycle are served write first.
// The host link is an AXI interface in the published architecture; AXI4-Lite,
// the 32-bit data width and this register-strobe form are this design's own.
// Lint reports rst_n as used both asynchronously and synchronously: the synchronous
// use is only the 'disable iff (!rst_n)' of the assertions below, not a flop, so the
// reset stays purely asynchronous in the circuit.
module axi_host_if #(
  parameter int unsigned AW = 8,
  parameter int unsigned DW = 32
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          s_awvalid,
  output logic          s_awready,
  input  logic [AW-1:0] s_awaddr,
  input  logic          s_wvalid,
  output logic          s_wready,
  input  logic [DW-1:0] s_wdata,
  output logic          s_bvalid,
  input  logic          s_bready,
  output logic [1:0]    s_bresp,
  input  logic          s_arvalid,
  output logic          s_arready,
  input  logic [AW-1:0] s_araddr,
  output logic          s_rvalid,
  input  logic          s_rready,
  output logic [DW-1:0] s_rdata,
  output logic [1:0]    s_rresp,
  output logic          reg_wr,
  output logic          reg_rd,
  output logic [AW-1:0] reg_addr,
  output logic [DW-1:0] reg_wdata,
  input  logic [DW-1:0] reg_rdata
);
  logic          aw_held, w_held;
  logic [AW-1:0] aw_addr;
  logic [DW-1:0] w_data;
  logic          do_wr, do_rd;

  assign s_awready = !aw_held && !s_bvalid;
  assign s_wready  = !w_held && !s_bvalid;
  assign s_bresp   = 2'b00;
  assign s_rresp   = 2'b00;
  assign do_wr     = aw_held && w_held && !s_bvalid;
  assign s_arready = !s_rvalid && !do_wr;
  assign do_rd     = s_arvalid && s_arready;

  always_comb begin
    reg_wr    = do_wr;
    reg_rd    = do_rd;
    reg_addr  = do_wr ? aw_addr : s_araddr;
    reg_wdata = w_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      aw_held  <= 1'b0;
      w_held   <= 1'b0;
      aw_addr  <= '0;
      w_data   <= '0;
      s_bvalid <= 1'b0;
      s_rvalid <= 1'b0;
      s_rdata  <= '0;
    end else begin
      if (s_awvalid && s_awready) begin
        aw_held <= 1'b1;
        aw_addr <= s_awaddr;
      end
      if (s_wvalid && s_wready) begin
        w_held <= 1'b1;
        w_data <= s_wdata;
      end
      if (do_wr) begin
        aw_held  <= 1'b0;
        w_held   <= 1'b0;
        s_bvalid <= 1'b1;
      end else if (s_bvalid && s_bready) begin
        s_bvalid <= 1'b0;
      end
      if (do_rd) begin
        s_rvalid <= 1'b1;
        s_rdata  <= reg_rdata;
      end else if (s_rvalid && s_rready) begin
        s_rvalid <= 1'b0;
      end
    end
  end

  // AXI rule: a response, once raised, stays until it is accepted.
  a_bvalid_hold : assert property (@(posedge clk) disable iff (!rst_n)
                                   s_bvalid && !s_bready |=> s_bvalid);
  a_rvalid_hold : assert property (@(posedge clk) disable iff (!rst_n)
                                   s_rvalid && !s_rready |=> s_rvalid && $stable(s_rdata));
endmodule
