// operand_buffer: per-lane ping-pong operand register files of the VEU.
//
// Every MAC lane owns DEPTH x DW-bit registers in each of two banks. One write beat
// of DEPTH*DW bits (256 bits by default) fills all entries of one lane in one bank,
// so loading a buffer for all lanes takes LANES beats. While one bank is being
// filled the other is read by the VEU: all lanes read the same entry rd_idx of bank
// rd_bank in the same cycle (combinational read, synchronous write).
// The accelerator uses three instances: input feature maps, weights and biases.
// The 32 x 8-bit registers per MAC and the ping-pong feeding follow the published
// architecture; the beat format and the combinational read are this design's own.
module operand_buffer #(
  parameter int unsigned LANES = 256,
  parameter int unsigned DEPTH = 32,
  parameter int unsigned DW    = 8,
  parameter int unsigned LW    = (LANES > 1) ? $clog2(LANES) : 1,
  parameter int unsigned IW    = $clog2(DEPTH)
) (
  input  logic                clk,
  input  logic                wr_en,
  input  logic                wr_bank,
  input  logic [LW-1:0]       wr_lane,
  input  logic [DEPTH*DW-1:0] wr_data,
  input  logic                rd_bank,
  input  logic [IW-1:0]       rd_idx,
  output logic [DW-1:0]       rd_data [LANES]
);
  // one row per (bank, lane): a whole beat, entry j in bits j*DW upward
  logic [DEPTH*DW-1:0] mem [2*LANES];

  always_ff @(posedge clk) begin
    if (wr_en) mem[{wr_bank, wr_lane}] <= wr_data;
  end

  always_comb begin
    for (int l = 0; l < int'(LANES); l++)
      rd_data[l] = mem[{rd_bank, LW'(l)}][int'(rd_idx)*DW +: DW];
  end
endmodule
