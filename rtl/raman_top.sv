// raman_top: RAMAN accelerator, a vector of approximate posit(8,2) MACs with
// ping-pong operand buffers, host control over AXI and an external activation path.
//
// Data flow: the host (a RISC-V processor on the AXI4-Lite port) sets the layer
// parameters, then streams operands as 256-bit beats: ifmap beats on the ifmap
// port, weight and bias beats on the weight port (weight_is_bias selects the bias
// buffer). A beat holds 32 posit(8,2) values for one MAC lane, so filling one
// bank costs 3 beats per lane. Writing CTRL bit 0 commits the bank; the runtime
// scheduler launches the control unit on it, which steps all lanes of the VEU
// through KLEN entries (first from the bias, then cyclic accumulation). The final
// posit(16,2) vector goes out on af_data_o with af_valid_o to the off-chip
// activation/normalisation/pooling unit, whose answer (af_valid_i, af_data_i)
// is stored in the output buffer and read back as 256-bit ofmap beats. exec_done
// pulses when a launch finishes. While one bank computes, the other one can be
// loaded; if both are full the feed ports deassert ready.
// A commit with CTRL bit 1 (chain) set makes that bank's launch start from each
// lane's previous result instead of the bias, so dot products longer than 32 taps
// are split over several launches without leaving the chip.
// Register map (byte address): 0x00 CTRL (W, bit0 commit, bit1 chain), 0x04 STATUS (R:
// bit0 fill_ready, bit1 fill_bank, bit2 exec_bank, bit3 running, bits5:4 full,
// bit6 commit_err, bit7 output buffer filled), 0x08 KLEN, 0x0C BIAS, 0x10 LAYER,
// 0x14 DONES. Other addresses read as zero.
// The block structure follows the published accelerator drawing; port formats,
// register map and handshakes are this design's own.
// Lint reports rst_n as used both asynchronously and synchronously: the synchronous
// use is only the 'disable iff (!rst_n)' of the assertions below, not a flop, so the
// reset stays purely asynchronous in the circuit.
module raman_top #(
  parameter int unsigned N_MAC = 256,
  parameter int unsigned LW    = (N_MAC > 1) ? $clog2(N_MAC) : 1,
  parameter int unsigned OW    = (N_MAC > 16) ? $clog2(N_MAC / 16) : 1
) (
  input  logic         clk,
  input  logic         rst_n,
  // AXI4-Lite host interface
  input  logic         s_awvalid,
  output logic         s_awready,
  input  logic [7:0]   s_awaddr,
  input  logic         s_wvalid,
  output logic         s_wready,
  input  logic [31:0]  s_wdata,
  output logic         s_bvalid,
  input  logic         s_bready,
  output logic [1:0]   s_bresp,
  input  logic         s_arvalid,
  output logic         s_arready,
  input  logic [7:0]   s_araddr,
  output logic         s_rvalid,
  input  logic         s_rready,
  output logic [31:0]  s_rdata,
  output logic [1:0]   s_rresp,
  // ifmap feed
  input  logic         ifmap_valid,
  output logic         ifmap_ready,
  input  logic [LW-1:0] ifmap_lane,
  input  logic [255:0] ifmap_data,
  // weight / bias feed
  input  logic         weight_valid,
  output logic         weight_ready,
  input  logic         weight_is_bias,
  input  logic [LW-1:0] weight_lane,
  input  logic [255:0] weight_data,
  // off-chip activation / normalisation / pooling unit
  output logic         af_valid_o,
  output logic [15:0]  af_data_o [N_MAC],
  output logic [31:0]  af_cfg_o,
  input  logic         af_valid_i,
  input  logic [15:0]  af_data_i [N_MAC],
  // ofmap read-out
  input  logic         ofmap_rd_en,
  input  logic [OW-1:0] ofmap_addr,
  output logic [255:0] ofmap_data,
  // status
  output logic         exec_done
);
  import raman_pkg::*;

  // ---------------- host interface and register file ----------------
  logic        reg_wr, reg_rd, cu_hit;
  logic [7:0]  reg_addr;
  logic [31:0] reg_wdata, reg_rdata, cu_rdata;

  axi_host_if #(.AW(8), .DW(32)) u_axi (
    .clk, .rst_n,
    .s_awvalid, .s_awready, .s_awaddr, .s_wvalid, .s_wready, .s_wdata,
    .s_bvalid, .s_bready, .s_bresp, .s_arvalid, .s_arready, .s_araddr,
    .s_rvalid, .s_rready, .s_rdata, .s_rresp,
    .reg_wr, .reg_rd, .reg_addr, .reg_wdata, .reg_rdata);

  // ---------------- scheduler ----------------
  logic       commit, fill_bank, fill_ready, exec_bank, start, running, commit_err;
  logic [1:0] full;
  logic       cu_done, ob_filled;

  assign commit = reg_wr && (reg_addr == REG_CTRL) && reg_wdata[0];

  // chain flag per bank, taken with an accepted commit
  logic [1:0] chain_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                     chain_q <= '0;
    else if (commit && fill_ready) chain_q[fill_bank] <= reg_wdata[1];
  end

  runtime_scheduler u_sched (
    .clk, .rst_n, .commit, .cu_done, .fill_bank, .fill_ready, .exec_bank,
    .start, .running, .full, .commit_err);

  always_comb begin
    if (reg_addr == REG_STATUS)
      reg_rdata = {24'd0, ob_filled, commit_err, full, running, exec_bank, fill_bank, fill_ready};
    else if (cu_hit)
      reg_rdata = cu_rdata;
    else
      reg_rdata = '0;
  end

  // ---------------- control unit ----------------
  logic [4:0] rd_idx, bias_idx;
  logic       mac_valid, mac_fb, cu_busy, res_valid;

  control_unit #(.DEPTH(BUF_DEPTH), .LATENCY(MAC_LATENCY)) u_cu (
    .clk, .rst_n, .reg_wr, .reg_addr, .reg_wdata, .reg_rdata(cu_rdata), .reg_hit(cu_hit),
    .start, .busy(cu_busy), .rd_idx, .bias_idx, .mac_valid, .mac_fb, .res_valid,
    .done(cu_done), .af_valid(af_valid_o), .layer_cfg(af_cfg_o));

  assign exec_done = cu_done;

  // ---------------- operand buffers ----------------
  logic [7:0] a_rd [N_MAC];
  logic [7:0] w_rd [N_MAC];
  logic [7:0] b_rd [N_MAC];

  assign ifmap_ready  = fill_ready;
  assign weight_ready = fill_ready;

  operand_buffer #(.LANES(N_MAC), .DEPTH(BUF_DEPTH), .DW(8)) u_ifmap_buf (
    .clk, .wr_en(ifmap_valid && ifmap_ready), .wr_bank(fill_bank), .wr_lane(ifmap_lane),
    .wr_data(ifmap_data), .rd_bank(exec_bank), .rd_idx(rd_idx), .rd_data(a_rd));

  operand_buffer #(.LANES(N_MAC), .DEPTH(BUF_DEPTH), .DW(8)) u_weight_buf (
    .clk, .wr_en(weight_valid && weight_ready && !weight_is_bias), .wr_bank(fill_bank),
    .wr_lane(weight_lane), .wr_data(weight_data), .rd_bank(exec_bank), .rd_idx(rd_idx),
    .rd_data(w_rd));

  operand_buffer #(.LANES(N_MAC), .DEPTH(BUF_DEPTH), .DW(8)) u_bias_buf (
    .clk, .wr_en(weight_valid && weight_ready && weight_is_bias), .wr_bank(fill_bank),
    .wr_lane(weight_lane), .wr_data(weight_data), .rd_bank(exec_bank), .rd_idx(bias_idx),
    .rd_data(b_rd));

  // ---------------- vector execution unit ----------------
  veu #(.N_MAC(N_MAC), .VEC(1)) u_veu (
    .clk, .rst_n, .in_valid(mac_valid), .acc_fb(mac_fb), .acc_prev(chain_q[exec_bank]),
    .a(a_rd), .w(w_rd), .bias(b_rd),
    .out_valid(res_valid), .out(af_data_o));

  // ---------------- output buffer ----------------
  output_buffer #(.LANES(N_MAC), .RW(16), .BEAT(256)) u_obuf (
    .clk, .rst_n, .wr_en(af_valid_i), .wr_data(af_data_i), .rd_en(ofmap_rd_en),
    .rd_addr(ofmap_addr), .rd_data(ofmap_data), .filled(ob_filled));

  // reg_rd and cu_busy are observed by the assertions only
  a_feed_only_when_ready : assert property (@(posedge clk) disable iff (!rst_n)
                                            (ifmap_valid && ifmap_ready) |-> !full[fill_bank]);
  a_read_strobe : assert property (@(posedge clk) disable iff (!rst_n) reg_rd |-> !reg_wr);
  a_start_idle  : assert property (@(posedge clk) disable iff (!rst_n) start |-> !cu_busy);
endmodule
