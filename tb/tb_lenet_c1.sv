// tb_lenet_c1: one output channel of LeNet-5 layer C1 run on the full-size accelerator
// (256 MAC lanes, every parameter at its default).
// A 28x28 posit(8,2) image (pixel values in [0, 1]) is convolved with one 5x5 posit(8,2)
// kernel plus a bias, giving the 24x24 = 576 outputs of one C1 feature map. The host
// model does the im2col rearrangement: output pixel o goes to lane o mod 256 of launch
// o / 256, so the map takes three launches (256, 256 and 64 busy lanes; idle lanes get
// zero operands and return the bias). Each lane's 25 window pixels go to its ifmap
// registers and the kernel to its weight registers. Launches alternate between the two
// operand banks, the third waiting for bank 0 to be released.
// Checks: every lane against bias + sum of logarithmic products (within 3 ULP of
// posit(16,2), or, for small sums left by cancelling products, within KLEN * 2^-14
// of the sum of product magnitudes, the bound of the 16-bit alignment); every used
// output against the exact convolution, within 12 % of the sum of product magnitudes
// (the logarithmic multiplier errs by at most 11.1 % per product);
// 30 cycles per launch; the ReLU'd feature map read back through the output buffer.
// The workload size is the publication's; image and kernel values are random.
module tb_lenet_c1;
  import posit_ref_pkg::*;
  localparam int N   = 256;
  localparam int IMG = 28;
  localparam int KS  = 5;
  localparam int K   = KS * KS;
  localparam int OD  = IMG - KS + 1;      // 24
  localparam int NO  = OD * OD;           // 576
  localparam int NL  = (NO + N - 1) / N;  // 3 launches

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
  int cyc = 0, n_done = 0, t_start = -1, n_af = 0, n_out = 0;

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

  logic [7:0] img [IMG][IMG];
  logic [7:0] kern [KS][KS];
  logic [7:0] bias;
  real ref_q [$];   // logarithmic-product reference, one per lane and launch
  real ex_q  [$];   // exact convolution value
  real mag_q [$];   // sum of product magnitudes

  // im2col for launch n: lane l computes output pixel n*N + l
  task automatic fill_launch(input int n);
    real r, ex, mag, pa, pw;
    logic [255:0] ib, wb, bb;
    int o, oy, ox;
    for (int l = 0; l < N; l++) begin
      o = n * N + l;
      ib = '0; wb = '0; bb = '0;
      bb[7:0] = bias;
      r = p2r(16'(bias) << 8, 16);
      ex = r; mag = 0.0;
      if (o < NO) begin
        oy = o / OD; ox = o % OD;
        for (int ky = 0; ky < KS; ky++)
          for (int kx = 0; kx < KS; kx++) begin
            ib[(ky*KS+kx)*8 +: 8] = img[oy+ky][ox+kx];
            wb[(ky*KS+kx)*8 +: 8] = kern[ky][kx];
            pa = p2r(16'(img[oy+ky][ox+kx]), 8);
            pw = p2r(16'(kern[ky][kx]), 8);
            r  += amul(img[oy+ky][ox+kx], kern[ky][kx]);
            ex += pa * pw;
            mag += (pa * pw < 0.0) ? -(pa * pw) : pa * pw;
          end
      end
      ref_q.push_back(r); ex_q.push_back(ex); mag_q.push_back(mag);
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
      if (cyc - 1 - t_start != K + 5) begin
        failures++; $display("launch took %0d cycles", cyc - 1 - t_start);
      end
    end
  end

  logic [15:0] fmap [NO];
  logic [15:0] relu [N];
  initial begin : af_model
    real r, ex, mag, got, err;
    int o;
    forever begin
      @(posedge clk);
      if (af_valid_o) begin
        for (int l = 0; l < N; l++) begin
          r = ref_q.pop_front(); ex = ex_q.pop_front(); mag = mag_q.pop_front();
          got = p2r(af_data_o[l], 16);
          checks++;
          // 3 ULP, or the alignment-truncation bound where products cancel
          if (pdist(af_data_o[l], r2p16(r)) > 3 &&
              ((got > r) ? got - r : r - got) > K * mag / 16384.0) begin
            failures++; $display("launch %0d lane %0d: %h (%f) want %f", n_af, l, af_data_o[l], got, r);
          end
          o = n_af * N + l;
          if (o < NO) begin
            err = (got > ex) ? got - ex : ex - got;
            checks++;
            if (err > 0.12 * mag + 0.004 * ((ex < 0.0) ? -ex : ex) + 1.0e-6) begin
              failures++; $display("pixel %0d: %f exact %f", o, got, ex);
            end
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
            o = n_af * N + b * 16 + k;
            if (o < NO) begin fmap[o] = ofmap_data[k*16 +: 16]; n_out++; end
          end
        end
        n_af++;
      end
    end
  end

  initial begin
    int pos;
    for (int l = 0; l < N; l++) af_data_i[l] = 0;
    // pixels: posit(8,2) patterns 0x00..0x40 cover [0, 1]
    for (int y = 0; y < IMG; y++)
      for (int x = 0; x < IMG; x++) img[y][x] = 8'($urandom_range(0, 8'h40));
    for (int y = 0; y < KS; y++)
      for (int x = 0; x < KS; x++) begin
        kern[y][x] = 8'($urandom_range(8'h20, 8'h48));
        if ($urandom_range(0, 1)) kern[y][x] = ~kern[y][x] + 1'b1;
      end
    bias = 8'($urandom_range(8'h10, 8'h30));
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    axi_write(8'h08, K);
    axi_write(8'h0C, 0);
    for (int n = 0; n < NL; n++) begin
      fill_launch(n);
      axi_write(8'h00, 1);
    end
    wait (n_af == NL);
    repeat (40) @(posedge clk);
    checks++; if (n_done != NL) begin failures++; $display("%0d launches done", n_done); end
    checks++; if (n_out != NO) begin failures++; $display("%0d map pixels read", n_out); end
    pos = 0;
    for (int o = 0; o < NO; o++) if (fmap[o] != 16'h0000) pos++;
    $display("C1 feature map: %0d of %0d outputs positive after ReLU", pos, NO);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
