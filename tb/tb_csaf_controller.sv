// tb_csaf_controller: self-checking test of the context switch sequencer.
//
// The testbench stands in for the change tracker and the transition table:
// it answers the tracker's slice count and the table's lookup result (index
// and counter decision) with random values, registered like the real blocks.
// For every switch it checks, cycle by cycle, the tracker switch request,
// the update of the previous transition's index with the slice count (absent
// on the very first switch), the lookup of (from, to), the wipe decision, the
// busy flag and the four-cycle length of the sequence.
module tb_csaf_controller;
  import csaf_pkg::*;

  localparam int unsigned TT = 32;
  localparam int unsigned CW = 16;
  localparam int unsigned IW = $clog2(TT);

  logic clk = 1'b0, rst_n = 1'b0;
  logic          cs_valid, busy, tr_switch_en, tt_upd_en, tt_lk_en, tt_lk_taken, wipe_en;
  pid_t          cs_prev_pid, cs_next_pid, tr_switch_pid, tt_lk_from, tt_lk_to;
  logic [CW-1:0] tr_slice_flips, tt_upd_count;
  logic [IW-1:0] tt_upd_idx, tt_lk_idx;

  int checks = 0, failures = 0;

  csaf_controller #(.TT_ENTRIES(TT), .CNT_W(CW)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
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

  logic [IW-1:0] prev_idx;
  bit            prev_valid = 0;
  int n_wipe = 0, n_keep = 0, n_upd = 0;

  initial begin
    cs_valid = 0; cs_prev_pid = '0; cs_next_pid = '0;
    tr_slice_flips = '0; tt_lk_idx = '0; tt_lk_taken = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int it = 0; it < 3000; it++) begin
      pid_t f, t;
      logic [CW-1:0] cnt;
      logic [IW-1:0] idx;
      bit tk;
      int len;
      // idle gap
      repeat ($urandom_range(0, 3)) begin
        @(negedge clk);
        check(!busy && !tr_switch_en && !tt_upd_en && !tt_lk_en && !wipe_en, "idle");
      end
      // cycle 0: switch request
      @(negedge clk);
      f = $urandom; t = $urandom;
      cs_valid = 1; cs_prev_pid = f; cs_next_pid = t;
      #1;
      check(tr_switch_en && tr_switch_pid == t && !busy, "tracker switch request");
      check(!tt_upd_en && !tt_lk_en && !wipe_en, "nothing else in cycle 0");
      len = 1;
      @(posedge clk);
      cnt = CW'($urandom);
      tr_slice_flips <= cnt;   // registered tracker output
      // cycle 1: update of the previous transition
      @(negedge clk);
      cs_valid = 0; cs_prev_pid = $urandom; cs_next_pid = $urandom;
      #1;
      check(busy && !tr_switch_en && !tt_lk_en && !wipe_en, "cycle 1 controls");
      check(tt_upd_en == prev_valid, "update only when a previous transition exists");
      if (prev_valid) begin
        check(tt_upd_idx == prev_idx && tt_upd_count == cnt, "update index and count");
        n_upd++;
      end
      len++;
      // cycle 2: lookup
      @(negedge clk);
      #1;
      check(busy && tt_lk_en && !tt_upd_en && !wipe_en, "cycle 2 controls");
      check(tt_lk_from == f && tt_lk_to == t, "lookup key");
      len++;
      @(posedge clk);
      idx = IW'($urandom); tk = $urandom_range(0, 1);
      tt_lk_idx <= idx; tt_lk_taken <= tk;  // registered table outputs
      // cycle 3: decision
      @(negedge clk);
      #1;
      check(busy && !tt_lk_en && !tt_upd_en, "cycle 3 controls");
      check(wipe_en == tk, "wipe decision");
      if (tk) n_wipe++; else n_keep++;
      len++;
      prev_idx = idx; prev_valid = 1;
      @(negedge clk);
      #1;
      check(!busy && !wipe_en, "sequence over after four cycles");
      check(len == 4, "sequence length");
    end
    check(n_wipe > 100 && n_keep > 100 && n_upd > 100, "coverage");
    $display("wipes=%0d kept=%0d updates=%0d", n_wipe, n_keep, n_upd);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
