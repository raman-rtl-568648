// veu: Vector Execution Unit, N_MAC REAP MAC lanes under one control.
//
// All lanes receive the same issue strobe and cyclic-accumulation flag, and each
// lane its own ifmap operand a[l], weight w[l] and bias[l] (posit(8,2)). The bias
// is widened to the posit(16,2) accumulator by appending eight zero bits, which
// keeps its value exactly. With VEC=1 each lane performs one product per cycle,
// so a kernel of K taps needs K issue cycles; results appear MAC latency (6)
// cycles after issue, out_valid being common to all lanes.
// With acc_prev set, a lane's first step adds to its own previous result instead of
// the bias: every MAC holds its last output, so a dot product longer than the operand
// registers continues over several launches at full posit(16,2) precision.
// The lane count (256) and the use of REAP MACs follow the published VEU; the
// per-lane vector length of 1 is chosen to match its cycle count for a 5x5 kernel.
// The publication adds each dot product to a high-precision previous value (acc);
// the choice between bias and previous result by acc_prev is this design's own.
module veu #(
  parameter int unsigned N_MAC = 256,
  parameter int unsigned VEC   = 1
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  logic        acc_fb,
  input  logic        acc_prev,
  input  logic [7:0]  a    [N_MAC*VEC],
  input  logic [7:0]  w    [N_MAC*VEC],
  input  logic [7:0]  bias [N_MAC],
  output logic        out_valid,
  output logic [15:0] out  [N_MAC]
);
  logic [N_MAC-1:0] lane_valid;

  for (genvar l = 0; l < N_MAC; l++) begin : g_lane
    logic [7:0] va [VEC];
    logic [7:0] vb [VEC];
    always_comb begin
      for (int i = 0; i < int'(VEC); i++) begin
        va[i] = a[l*VEC + i];
        vb[i] = w[l*VEC + i];
      end
    end
    reap_mac #(.VEC(VEC)) u_mac (
      .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .va(va), .vb(vb),
      .acc(acc_prev ? out[l] : {bias[l], 8'h00}), .acc_fb(acc_fb),
      .out_valid(lane_valid[l]), .out(out[l]));
  end

  assign out_valid = &lane_valid;
endmodule
