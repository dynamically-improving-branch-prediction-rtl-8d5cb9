// tb_tid_monitor: self-checking test of the thread ID write monitor.
//
// Random writes to the thread ID register, with values drawn from a small
// pool so that rewrites of the running thread's ID are frequent. The
// expected switch pulse, outgoing and incoming IDs and running ID are worked
// out one cycle ahead in the testbench and compared every clock.
module tb_tid_monitor;
  import csaf_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic tid_wr_en, cs_valid;
  pid_t tid_wr_data, cs_prev_pid, cs_next_pid, cur_pid;

  int checks = 0, failures = 0;

  tid_monitor dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  pid_t model_cur, exp_prev, exp_next;
  bit   exp_cs;
  int   n_sw = 0, n_same = 0;

  initial begin
    tid_wr_en = 0; tid_wr_data = '0;
    model_cur = '0; exp_cs = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    check(cur_pid == '0 && cs_valid == 0, "reset state");
    for (int it = 0; it < 5000; it++) begin
      @(negedge clk);
      tid_wr_en   = ($urandom_range(0, 2) == 0);
      tid_wr_data = pid_t'($urandom_range(0, 3)) * 32'h1001_0000;
      exp_cs = 0;
      if (tid_wr_en && tid_wr_data != model_cur) begin
        exp_cs   = 1;
        exp_prev = model_cur;
        exp_next = tid_wr_data;
        model_cur = tid_wr_data;
        n_sw++;
      end else if (tid_wr_en) n_same++;
      @(posedge clk); #1;
      check(cs_valid == exp_cs, "cs_valid");
      check(cur_pid == model_cur, "cur_pid");
      if (exp_cs) check(cs_prev_pid == exp_prev && cs_next_pid == exp_next, "switch ids");
    end
    check(n_sw > 100 && n_same > 100, "coverage");
    $display("switches=%0d same-value writes=%0d", n_sw, n_same);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
