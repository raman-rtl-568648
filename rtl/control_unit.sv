// control_unit: layer parameters and the per-launch sequence of the VEU.
//
// Parameter registers (written by the host): KLEN, the number of MAC steps of one
// launch (the kernel size after im2col, 1..DEPTH), BIAS, the bias entry used as
// initial accumulator, and LAYER, a 32-bit word of layer settings (layer type,
// activation, pooling, stride, ...) that is only passed on to the off-chip
// activation/normalisation/pooling unit. DONES counts completed launches.
// On start the unit issues KLEN steps on consecutive cycles: step j reads entry j
// of the operand buffers; step 0 starts from the bias, steps 1..KLEN-1 accumulate
// cyclically onto the previous step. It then counts the results leaving the MAC
// pipeline; with the last one, done (Exec_Done) pulses and the result vector is
// handed to the activation unit (af_valid). A launch therefore takes KLEN cycles
// of compute plus LATENCY-1 cycles of pipeline fill: start sampled at edge t0,
// done visible after edge t0 + KLEN + LATENCY - 1 (30 cycles for a 5x5 kernel).
// The parameters listed, the bias/input/weight feeding and the cycle count follow
// the published description; register layout and encoding are this design's own.
// Lint reports rst_n as used both asynchronously and synchronously: the synchronous
// use is only the 'disable iff (!rst_n)' of the assertions below, not a flop, so the
// reset stays purely asynchronous in the circuit.
// LATENCY records the MAC pipeline depth for the timing stated above; the drain
// ends on the MAC's own result-valid, so the parameter is not read by the logic.
module control_unit #(
  parameter int unsigned DEPTH   = 32,
  parameter int unsigned LATENCY = 6,
  parameter int unsigned IW      = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  // register access
  input  logic          reg_wr,
  input  logic [7:0]    reg_addr,
  input  logic [31:0]   reg_wdata,
  output logic [31:0]   reg_rdata,
  output logic          reg_hit,
  // sequencing
  input  logic          start,
  output logic          busy,
  output logic [IW-1:0] rd_idx,
  output logic [IW-1:0] bias_idx,
  output logic          mac_valid,
  output logic          mac_fb,
  input  logic          res_valid,
  output logic          done,
  output logic          af_valid,
  output logic [31:0]   layer_cfg
);
  import raman_pkg::*;

  typedef enum logic [1:0] {S_IDLE, S_ISSUE, S_DRAIN} state_e;
  state_e        state;
  logic [IW:0]   klen;          // 1..DEPTH
  logic [IW:0]   step;
  logic [IW:0]   nres;
  logic [31:0]   dones;

  // ---------------- parameter registers ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      klen      <= (IW+1)'(1);
      bias_idx  <= '0;
      layer_cfg <= '0;
    end else if (reg_wr) begin
      unique case (reg_addr)
        REG_KLEN: begin
          if (reg_wdata == 0)                klen <= (IW+1)'(1);
          else if (reg_wdata > DEPTH)        klen <= (IW+1)'(DEPTH);
          else                               klen <= (IW+1)'(reg_wdata);
        end
        REG_BIAS:  bias_idx  <= IW'(reg_wdata);
        REG_LAYER: layer_cfg <= reg_wdata;
        default: ;
      endcase
    end
  end

  always_comb begin
    reg_hit   = 1'b1;
    reg_rdata = '0;
    unique case (reg_addr)
      REG_KLEN:  reg_rdata = 32'(klen);
      REG_BIAS:  reg_rdata = 32'(bias_idx);
      REG_LAYER: reg_rdata = layer_cfg;
      REG_DONES: reg_rdata = dones;
      default:   reg_hit   = 1'b0;
    endcase
  end

  // ---------------- launch sequencing ----------------
  assign busy      = (state != S_IDLE);
  assign mac_valid = (state == S_ISSUE);
  assign mac_fb    = (step != 0);
  assign rd_idx    = IW'(step);
  assign done      = (state != S_IDLE) && res_valid && (nres == klen - 1'b1);
  assign af_valid  = done;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      step  <= '0;
      nres  <= '0;
      dones <= '0;
    end else begin
      unique case (state)
        S_IDLE: begin
          step <= '0;
          nres <= '0;
          if (start) state <= S_ISSUE;
        end
        S_ISSUE: begin
          if (step == klen - 1'b1) state <= S_DRAIN;
          else                     step  <= step + 1'b1;
        end
        S_DRAIN: ;
        default: state <= S_IDLE;
      endcase
      if (state != S_IDLE && res_valid) begin
        nres <= nres + 1'b1;
        if (done) begin
          state <= S_IDLE;
          dones <= dones + 1'b1;
        end
      end
    end
  end

  a_no_start_when_busy : assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy);
endmodule
