// tb_operand_buffer: fills both banks of an 8-lane buffer with random beats, then
// reads every (bank, entry) and compares all lanes with a model of the contents;
// also checks that writing one bank leaves the other unchanged.
module tb_operand_buffer;
  localparam int LANES = 8, DEPTH = 32;
  logic clk = 0;
  logic wr_en = 0, wr_bank = 0, rd_bank = 0;
  logic [2:0] wr_lane = 0;
  logic [255:0] wr_data = 0;
  logic [4:0] rd_idx = 0;
  logic [7:0] rd_data [LANES];
  logic [7:0] model [2][LANES][DEPTH];
  int checks = 0, failures = 0;

  operand_buffer #(.LANES(LANES), .DEPTH(DEPTH), .DW(8)) dut (.*);
  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic write_beat(input logic bank, input int lane);
    logic [255:0] d;
    for (int k = 0; k < 8; k++) d[k*32 +: 32] = $urandom;
    for (int j = 0; j < DEPTH; j++) model[bank][lane][j] = d[j*8 +: 8];
    wr_en = 1; wr_bank = bank; wr_lane = 3'(lane); wr_data = d;
    @(posedge clk); #1 wr_en = 0;
  endtask

  task automatic check_all();
    for (int b = 0; b < 2; b++)
      for (int j = 0; j < DEPTH; j++) begin
        rd_bank = 1'(b); rd_idx = 5'(j); #1;
        for (int l = 0; l < LANES; l++) begin
          checks++;
          if (rd_data[l] !== model[b][l][j]) begin
            failures++; $display("bank %0d lane %0d idx %0d: %h want %h", b, l, j, rd_data[l], model[b][l][j]);
          end
        end
      end
  endtask

  initial begin
    @(posedge clk); #1;
    for (int b = 0; b < 2; b++) for (int l = 0; l < LANES; l++) write_beat(1'(b), l);
    check_all();
    // refill bank 1 only; bank 0 must keep its data
    for (int l = 0; l < LANES; l++) write_beat(1'b1, l);
    check_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
