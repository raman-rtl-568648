// tb_output_buffer: stores two result vectors of 40 lanes (three 256-bit beats,
// the last one partly padded with zeros) and reads them back beat by beat,
// checking the data one cycle after rd_en and the 'filled' flag.
module tb_output_buffer;
  localparam int LANES = 40;
  logic clk = 0, rst_n = 0;
  logic wr_en = 0, rd_en = 0;
  logic [15:0] wr_data [LANES];
  logic [1:0]  rd_addr = 0;
  logic [255:0] rd_data;
  logic filled;
  int checks = 0, failures = 0;

  output_buffer #(.LANES(LANES)) dut (.*);
  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [15:0] v;
    for (int l = 0; l < LANES; l++) wr_data[l] = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    checks++; if (filled) failures++;
    for (int rep = 0; rep < 2; rep++) begin
      for (int l = 0; l < LANES; l++) wr_data[l] = 16'($urandom);
      wr_en = 1; @(posedge clk); #1 wr_en = 0;
      for (int l = 0; l < LANES; l++) wr_data[l] = ~wr_data[l];   // must not disturb the store
      checks++; if (!filled) begin failures++; $display("filled not set"); end
      for (int a = 0; a < 3; a++) begin
        rd_en = 1; rd_addr = 2'(a); @(posedge clk); #1 rd_en = 0;
        for (int k = 0; k < 16; k++) begin
          v = (a * 16 + k < LANES) ? ~wr_data[a*16+k] : 16'h0;
          checks++;
          if (rd_data[k*16 +: 16] !== v) begin
            failures++; $display("beat %0d slot %0d: %h want %h", a, k, rd_data[k*16 +: 16], v);
          end
        end
      end
      checks++; if (filled) begin failures++; $display("filled not cleared"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
