// tb_raman_full: the accelerator at its full size (256 MAC lanes, all parameters
// at their defaults) runs two 5x5-kernel launches, one from each operand bank.
// The host model loads 3 beats per lane (ifmaps, weights, biases) for all 256
// lanes, commits bank 0, loads bank 1 while bank 0 computes and commits it. Every
// lane's result is compared with bias + sum of logarithmic products (within 3 ULP
// of posit(16,2)); an activation model (ReLU) returns the vectors, and all 16
// ofmap beats are read back and compared. The launch must take 30 cycles.
module tb_raman_full;
  import posit_ref_pkg::*;
  localparam int N = 256;
  localparam int K = 25;
  logic clk = 0, rst_n = 0;
  logic s_awvalid = 0, s_awready, s_wvalid = 0, s_wready, s_bvalid, s_bready = 0;
  logic [7:0] s_awaddr = 0, s_araddr = 0;
  logic [31:0] s_wdata = 0, s_rdata;
  logic [1:0] s_bresp, s_rresp;
  logic s_arvalid = 0, s_arready, s_rvalid, s_rready = 0;
  logic ifmap_valid = 0, ifmap_ready, weight_valid = 0, weight_ready, weight_is_bias = 0;
  logic [7:0] ifmap_lane = 0, weight_lane = 0;
  logic [255:0] ifmap_data = 0, weight_data = 0;
  logic af_valid_o, af_valid_i = 0;
  logic [15:0] af_data_o [N];
  logic [15:0] af_data_i [N];
  logic [31:0] af_cfg_o;
  logic ofmap_rd_en = 0;
  logic [3:0] ofmap_addr = 0;
  logic [255:0] ofmap_data;
  logic exec_done;
  int checks = 0, failures = 0;
  int cyc = 0, n_done = 0, t_start = -1;

  raman_top dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic axi_write(input logic [7:0] a, input logic [31:0] d);
    #1 s_awvalid = 1; s_awaddr = a; s_wvalid = 1; s_wdata = d;
    do @(posedge clk); while (!(s_awready && s_wready));
    #1 s_awvalid = 0; s_wvalid = 0; s_bready = 1;
    do @(posedge clk); while (!s_bvalid);
    #1 s_bready = 0;
  endtask

  function automatic logic [7:0] rnd8();
    logic [7:0] v = 8'($urandom_range(8'h28, 8'h58));
    return $urandom_range(0, 1) ? ~v + 1'b1 : v;
  endfunction

  real ref_q [$];

  task automatic fill_bank();
    real r;
    logic [255:0] ib, wb, bb;
    for (int l = 0; l < N; l++) begin
      for (int j = 0; j < 32; j++) begin
        ib[j*8 +: 8] = rnd8(); wb[j*8 +: 8] = rnd8(); bb[j*8 +: 8] = rnd8();
      end
      r = p2r(16'(bb[7:0]) << 8, 16);
      for (int j = 0; j < K; j++) r += amul(ib[j*8 +: 8], wb[j*8 +: 8]);
      ref_q.push_back(r);
      ifmap_valid = 1; ifmap_lane = 8'(l); ifmap_data = ib;
      weight_valid = 1; weight_lane = 8'(l); weight_is_bias = 0; weight_data = wb;
      do @(posedge clk); while (!ifmap_ready);
      #1 ifmap_valid = 0; weight_is_bias = 1; weight_data = bb;
      do @(posedge clk); while (!weight_ready);
      #1 weight_valid = 0; weight_is_bias = 0;
    end
  endtask

  always @(posedge clk) begin
    if (dut.start) t_start = cyc;
    if (exec_done) begin
      n_done++;
      checks++;
      if (cyc - 1 - t_start != K + 5) begin failures++; $display("launch took %0d cycles", cyc - 1 - t_start); end
    end
  end

  logic [15:0] relu [N];
  initial begin : af_model
    real r;
    forever begin
      @(posedge clk);
      if (af_valid_o) begin
        for (int l = 0; l < N; l++) begin
          r = ref_q.pop_front();
          checks++;
          if (pdist(af_data_o[l], r2p16(r)) > 3) begin
            failures++; $display("lane %0d: %h (%f) want %f", l, af_data_o[l], p2r(af_data_o[l], 16), r);
          end
          relu[l] = af_data_o[l][15] ? 16'h0000 : af_data_o[l];
        end
        #1 af_valid_i = 1; af_data_i = relu;
        @(posedge clk); #1 af_valid_i = 0;
        for (int b = 0; b < N / 16; b++) begin
          ofmap_rd_en = 1; ofmap_addr = 4'(b);
          @(posedge clk); #1 ofmap_rd_en = 0;
          for (int k = 0; k < 16; k++) begin
            checks++;
            if (ofmap_data[k*16 +: 16] != relu[b*16+k]) begin failures++; $display("ofmap %0d", b*16+k); end
          end
        end
      end
    end
  end

  initial begin
    for (int l = 0; l < N; l++) af_data_i[l] = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    axi_write(8'h08, K);
    axi_write(8'h0C, 0);
    fill_bank();
    axi_write(8'h00, 1);
    fill_bank();
    axi_write(8'h00, 1);
    wait (n_done == 2);
    repeat (40) @(posedge clk);
    checks++; if (ref_q.size() != 0) begin failures++; $display("%0d results not seen", ref_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
