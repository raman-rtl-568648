// output_buffer: result store between the activation/pooling path and the ofmap port.
//
// Holds one RW-bit result per MAC lane. wr_en stores a whole result vector (one
// per VEU launch, as returned by the off-chip activation/normalisation/pooling
// unit). The ofmap side reads BEAT/RW results per beat: rd_data is registered and
// valid in the cycle after rd_en with address rd_addr (results rd_addr*PER_BEAT
// upward, lowest lane in the lowest bits). 'filled' is set by a store and cleared
// when the last beat is read. Only the existence of output buffers is given by the
// architecture drawing; widths and read protocol are this design's own.
module output_buffer #(
  parameter int unsigned LANES = 256,
  parameter int unsigned RW    = 16,
  parameter int unsigned BEAT  = 256,
  parameter int unsigned PER_BEAT = BEAT / RW,
  parameter int unsigned NBEATS   = (LANES + PER_BEAT - 1) / PER_BEAT,
  parameter int unsigned AW       = (NBEATS > 1) ? $clog2(NBEATS) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            wr_en,
  input  logic [RW-1:0]   wr_data [LANES],
  input  logic            rd_en,
  input  logic [AW-1:0]   rd_addr,
  output logic [BEAT-1:0] rd_data,
  output logic            filled
);
  logic [RW-1:0] mem [NBEATS*PER_BEAT];

  always_ff @(posedge clk) begin
    if (wr_en) begin
      for (int l = 0; l < int'(NBEATS * PER_BEAT); l++)
        mem[l] <= (l < int'(LANES)) ? wr_data[l] : '0;
    end
    if (rd_en) begin
      for (int k = 0; k < int'(PER_BEAT); k++)
        rd_data[k*RW +: RW] <= mem[int'(rd_addr) * int'(PER_BEAT) + k];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                                          filled <= 1'b0;
    else if (wr_en)                                      filled <= 1'b1;
    else if (rd_en && rd_addr == AW'(NBEATS - 1))        filled <= 1'b0;
  end
endmodule
