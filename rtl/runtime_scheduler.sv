// runtime_scheduler: ping-pong bank management and launch of VEU executions.
//
// The operand buffers have two banks. The host fills bank fill_bank through the
// feed ports and then issues commit (a CTRL register write): the bank is marked
// full and filling moves to the other bank. Whenever the control unit is idle and
// bank exec_bank is full, start pulses for one cycle; when the control unit
// reports done, that bank is freed and execution moves to the other bank. Thus
// one bank computes while the other loads. If both banks are full, fill_ready is
// low and the feed ports stall; a commit in that state is dropped and flagged in
// commit_err (sticky until reset).
// The scheduler and ping-pong feeding are named by the published architecture;
// this two-bank in-order policy is this design's own.
// Lint reports rst_n as used both asynchronously and synchronously: the synchronous
// use is only the 'disable iff (!rst_n)' of the assertions below, not a flop, so the
// reset stays purely asynchronous in the circuit.
module runtime_scheduler (
  input  logic clk,
  input  logic rst_n,
  input  logic commit,
  input  logic cu_done,
  output logic fill_bank,
  output logic fill_ready,
  output logic exec_bank,
  output logic start,
  output logic running,
  output logic [1:0] full,
  output logic commit_err
);
  assign fill_ready = !full[fill_bank];
  assign start      = !running && full[exec_bank];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full       <= 2'b00;
      fill_bank  <= 1'b0;
      exec_bank  <= 1'b0;
      running    <= 1'b0;
      commit_err <= 1'b0;
    end else begin
      if (commit) begin
        if (fill_ready) begin
          full[fill_bank] <= 1'b1;
          fill_bank       <= ~fill_bank;
        end else begin
          commit_err <= 1'b1;
        end
      end
      if (start) running <= 1'b1;
      if (cu_done) begin
        full[exec_bank] <= 1'b0;
        exec_bank       <= ~exec_bank;
        running         <= 1'b0;
      end
    end
  end

  a_done_when_running : assert property (@(posedge clk) disable iff (!rst_n) cu_done |-> running);
endmodule
