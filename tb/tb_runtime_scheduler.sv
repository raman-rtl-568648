// tb_runtime_scheduler: drives commits and completions against a cycle model of a
// control unit that takes a fixed number of cycles per launch; checks the start
// pulses, the alternating banks, fill_ready going low when both banks are full,
// and the dropped-commit flag.
module tb_runtime_scheduler;
  logic clk = 0, rst_n = 0;
  logic commit = 0, cu_done = 0;
  logic fill_bank, fill_ready, exec_bank, start, running, commit_err;
  logic [1:0] full;
  int checks = 0, failures = 0;
  int starts = 0, busy_cnt = 0;
  logic expect_bank = 0;

  runtime_scheduler dut (.*);
  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // control-unit model: done 10 cycles after start
  always @(posedge clk) begin
    cu_done <= 0;
    if (start) begin
      checks++;
      if (exec_bank != expect_bank) begin failures++; $display("launch on bank %0d", exec_bank); end
      expect_bank <= ~expect_bank;
      starts++;
      busy_cnt <= 10;
    end else if (busy_cnt > 0) begin
      busy_cnt <= busy_cnt - 1;
      if (busy_cnt == 1) cu_done <= 1;
    end
  end

  task automatic do_commit();
    commit = 1; @(posedge clk); #1 commit = 0;
  endtask

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    checks++; if (!fill_ready || fill_bank != 0 || start) failures++;
    do_commit();                       // bank 0 full -> launch
    checks++; if (fill_bank != 1 || !fill_ready) begin failures++; $display("after first commit"); end
    do_commit();                       // bank 1 full while bank 0 runs
    checks++; if (fill_ready) begin failures++; $display("fill_ready should be low"); end
    do_commit();                       // dropped
    checks++; if (!commit_err) begin failures++; $display("commit_err not set"); end
    wait (cu_done); @(posedge clk); #1;
    checks++; if (!fill_ready || fill_bank != 0) begin failures++; $display("bank 0 not freed"); end
    repeat (30) @(posedge clk);
    #1;
    checks++; if (starts != 2 || running || full != 0) begin failures++; $display("starts=%0d", starts); end
    for (int n = 0; n < 6; n++) begin
      wait (fill_ready); #1 do_commit();
    end
    repeat (60) @(posedge clk);
    checks++; if (starts != 8) begin failures++; $display("starts=%0d want 8", starts); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
