// raman_pkg: shared constants and types of the RAMAN approximate-posit accelerator.
//
// Operands are posit(8,2) (8-bit words, 2 exponent bits); the accumulator and the
// MAC result are posit(16,2). The posit(8,2) operand format is the one the design
// is built around; the 16-bit accumulator width is this design's own choice.
// MAC_LATENCY is the number of register stages in the REAP MAC pipeline
// (decode, multiply, align, accumulate, normalize, encode).
package raman_pkg;
  localparam int unsigned IN_NB       = 8;   // operand posit width
  localparam int unsigned ES          = 2;   // exponent bits
  localparam int unsigned ACC_NB      = 16;  // accumulator / result posit width
  localparam int unsigned MAC_LATENCY = 6;   // pipeline stages of one MAC
  localparam int unsigned BUF_DEPTH   = 32;  // entries per per-lane operand register file
  localparam int unsigned BEAT_W      = 256; // data beat width of the feed ports
  localparam int unsigned EXP_W       = 10;  // signed width of internal scale factors

  typedef logic [IN_NB-1:0]  posit8_t;
  typedef logic [ACC_NB-1:0] posit16_t;

  // Operand buffer selector used on the feed path.
  typedef enum logic [1:0] {
    BUF_IFMAP  = 2'd0,
    BUF_WEIGHT = 2'd1,
    BUF_BIAS   = 2'd2
  } buf_sel_e;

  // Register map of the host interface (byte addresses).
  localparam logic [7:0] REG_CTRL   = 8'h00; // W: bit0 commit fill bank
  localparam logic [7:0] REG_STATUS = 8'h04; // R: status word
  localparam logic [7:0] REG_KLEN   = 8'h08; // RW: MAC steps per launch (1..32)
  localparam logic [7:0] REG_BIAS   = 8'h0C; // RW: bias entry index
  localparam logic [7:0] REG_LAYER  = 8'h10; // RW: layer parameters for the AF/pool unit
  localparam logic [7:0] REG_DONES  = 8'h14; // R: number of completed launches
endpackage
