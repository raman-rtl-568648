// tb_raman_top: end-to-end run of a 4-lane accelerator.
// The host model programs KLEN=25 (a 5x5 kernel) and a bias entry over AXI4-Lite,
// fills bank 0 with ifmaps, weights and biases, commits it, fills bank 1 while
// bank 0 computes, commits it, then finds the feed ports stalled and a further
// commit dropped. An activation model (ReLU, three cycles late) returns every
// result vector to the output buffer, which is read back on the ofmap port.
// Checked: each lane's result against bias + sum of logarithmic products
// (within 3 ULP of posit(16,2)), the ReLU'd ofmap data, the 30-cycle launch,
// the layer word on af_cfg_o, and the DONES/STATUS registers. A last launch is
// committed with the chain bit and must continue every lane from its previous result.
// Every mechanism (ping-pong overlap, feed stall, dropped commit, bias start,
// chained start, cyclic accumulation, Exec_Done) is counted and must occur at least once.
module tb_raman_top;
  import posit_ref_pkg::*;
  localparam int N = 4;
  localparam int K = 25;
  localparam int BIAS_IDX = 3;
  logic clk = 0, rst_n = 0;
  logic s_awvalid = 0, s_awready, s_wvalid = 0, s_wready, s_bvalid, s_bready = 0;
  logic [7:0] s_awaddr = 0, s_araddr = 0;
  logic [31:0] s_wdata = 0, s_rdata;
  logic [1:0] s_bresp, s_rresp;
  logic s_arvalid = 0, s_arready, s_rvalid, s_rready = 0;
  logic ifmap_valid = 0, ifmap_ready, weight_valid = 0, weight_ready, weight_is_bias = 0;
  logic [1:0] ifmap_lane = 0, weight_lane = 0;
  logic [255:0] ifmap_data = 0, weight_data = 0;
  logic af_valid_o, af_valid_i = 0;
  logic [15:0] af_data_o [N];
  logic [15:0] af_data_i [N];
  logic [31:0] af_cfg_o;
  logic ofmap_rd_en = 0;
  logic [0:0] ofmap_addr = 0;
  logic [255:0] ofmap_data;
  logic exec_done;
  int checks = 0, failures = 0;
  int cyc = 0;
  // mechanism counters
  int n_overlap = 0, n_stall = 0, n_drop = 0, n_bias = 0, n_chain = 0, n_cyclic = 0, n_done = 0;

  raman_top #(.N_MAC(N)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog: done=%0d full=%b running=%b", n_done, dut.full, dut.running);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- host model ----------------
  task automatic axi_write(input logic [7:0] a, input logic [31:0] d);
    #1 s_awvalid = 1; s_awaddr = a; s_wvalid = 1; s_wdata = d;
    do @(posedge clk); while (!(s_awready && s_wready));
    #1 s_awvalid = 0; s_wvalid = 0; s_bready = 1;
    do @(posedge clk); while (!s_bvalid);
    #1 s_bready = 0;
  endtask

  task automatic axi_read(input logic [7:0] a, output logic [31:0] d);
    #1 s_arvalid = 1; s_araddr = a;
    do @(posedge clk); while (!s_arready);
    #1 s_arvalid = 0; s_rready = 1;
    do @(posedge clk); while (!s_rvalid);
    d = s_rdata;
    #1 s_rready = 0;
  endtask

  function automatic logic [7:0] rnd8();
    logic [7:0] v = 8'($urandom_range(8'h28, 8'h58));
    return $urandom_range(0, 1) ? ~v + 1'b1 : v;
  endfunction

  real    ref_q [$];              // expected sums, N entries per committed bank
  logic   running_seen;

  logic [15:0] last_out [N];      // results of the latest launch

  task automatic fill_bank(input logic chain);
    real r [N];
    logic [255:0] ib, wb, bb;
    for (int l = 0; l < N; l++) begin
      for (int j = 0; j < 32; j++) begin
        ib[j*8 +: 8] = rnd8();
        wb[j*8 +: 8] = rnd8();
        bb[j*8 +: 8] = rnd8();
      end
      r[l] = chain ? p2r(last_out[l], 16) : p2r(16'(bb[BIAS_IDX*8 +: 8]) << 8, 16);
      for (int j = 0; j < K; j++) r[l] += amul(ib[j*8 +: 8], wb[j*8 +: 8]);
      ifmap_valid = 1; ifmap_lane = 2'(l); ifmap_data = ib;
      do @(posedge clk); while (!ifmap_ready);
      if (dut.running) n_overlap++;
      #1 ifmap_valid = 0;
      weight_valid = 1; weight_lane = 2'(l); weight_is_bias = 0; weight_data = wb;
      do @(posedge clk); while (!weight_ready);
      #1 weight_is_bias = 1; weight_data = bb;
      do @(posedge clk); while (!weight_ready);
      #1 weight_valid = 0; weight_is_bias = 0;
    end
    for (int l = 0; l < N; l++) ref_q.push_back(r[l]);
  endtask

  // ---------------- activation model and result checks ----------------
  int   t_start = -1;
  always @(posedge clk) begin
    if (dut.start) t_start = cyc;
    if (dut.mac_valid && !dut.mac_fb && !dut.u_veu.acc_prev) n_bias++;
    if (dut.mac_valid && !dut.mac_fb && dut.u_veu.acc_prev)  n_chain++;
    if (dut.mac_valid && dut.mac_fb)  n_cyclic++;
    if (exec_done) begin
      n_done++;
      checks++;
      // exec_done sampled here became high after the previous edge
      if (cyc - 1 - t_start != K + 5) begin failures++; $display("launch took %0d cycles", cyc - 1 - t_start); end
    end
  end

  logic [15:0] relu [N];
  initial begin : af_model
    real r [N];
    forever begin
      @(posedge clk);
      if (af_valid_o) begin
        for (int l = 0; l < N; l++) r[l] = ref_q.pop_front();
        checks++; if (af_cfg_o != 32'h1234_5678) failures++;
        for (int l = 0; l < N; l++) begin
          checks++;
          if (pdist(af_data_o[l], r2p16(r[l])) > 3) begin
            failures++; $display("lane %0d: %h (%f) want %f", l, af_data_o[l], p2r(af_data_o[l], 16), r[l]);
          end
          relu[l] = af_data_o[l][15] ? 16'h0000 : af_data_o[l];
          last_out[l] = af_data_o[l];
        end
        repeat (3) @(posedge clk);
        #1 af_valid_i = 1; af_data_i = relu;
        @(posedge clk); #1 af_valid_i = 0;
        // read the ofmap beat back
        ofmap_rd_en = 1; ofmap_addr = 0;
        @(posedge clk); #1 ofmap_rd_en = 0;
        for (int l = 0; l < N; l++) begin
          checks++;
          if (ofmap_data[l*16 +: 16] != relu[l]) begin failures++; $display("ofmap lane %0d", l); end
        end
      end
    end
  end

  initial begin
    logic [31:0] st;
    for (int l = 0; l < N; l++) af_data_i[l] = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    axi_write(8'h08, K);
    axi_write(8'h0C, BIAS_IDX);
    axi_write(8'h10, 32'h1234_5678);
    axi_read(8'h08, st);
    checks++; if (st != K) begin failures++; $display("KLEN reads %0d", st); end
    for (int rep = 0; rep < 3; rep++) begin
      fill_bank(0);
      axi_write(8'h00, 1);          // commit bank 0: starts computing
      fill_bank(0);                 // bank 1 loads while bank 0 computes
      axi_write(8'h00, 1);
      // both banks are full now: the feed must stall and a commit is dropped
      #1;
      checks++;
      if (ifmap_ready || weight_ready) begin failures++; $display("feed not stalled"); end
      else n_stall++;
      axi_write(8'h00, 1);
      axi_read(8'h04, st);
      checks++; if (!st[6]) begin failures++; $display("commit_err not set: %h", st); end
      else n_drop++;
      wait (n_done == 2 * (rep + 1));
      repeat (12) @(posedge clk);
    end
    // chained launch: 25 more taps added to every lane's previous result
    fill_bank(1);
    axi_write(8'h00, 3);
    wait (n_done == 7);
    repeat (12) @(posedge clk);
    axi_read(8'h14, st);
    checks++; if (st != 7) begin failures++; $display("DONES %0d", st); end
    // every mechanism must have happened
    checks++; if (n_overlap == 0) begin failures++; $display("no ping-pong overlap"); end
    checks++; if (n_stall == 0)   begin failures++; $display("no stall"); end
    checks++; if (n_drop == 0)    begin failures++; $display("no dropped commit"); end
    checks++; if (n_bias == 0)    begin failures++; $display("no bias start"); end
    checks++; if (n_chain == 0)   begin failures++; $display("no chained start"); end
    checks++; if (n_cyclic == 0)  begin failures++; $display("no cyclic accumulation"); end
    checks++; if (n_done != 7)    begin failures++; $display("exec_done %0d", n_done); end
    $display("mechanisms: overlap=%0d stall=%0d drop=%0d bias=%0d chain=%0d cyclic=%0d done=%0d",
             n_overlap, n_stall, n_drop, n_bias, n_chain, n_cyclic, n_done);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
