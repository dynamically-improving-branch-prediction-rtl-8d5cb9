// tb_csaf_top: end-to-end test of the predictor with the context switch
// framework, at the design's default sizes.
//
// A multi-process workload is played into the top level: every process runs
// the same 32 branch addresses (so the processes alias in the 128-entry
// tables) with its own taken/not-taken biases, one resolved branch per clock,
// in time slices of random length. A context switch is a write of the next
// process's ID to the thread ID register. The first part of the run
// schedules 9 processes at random (72 possible transitions, more than the
// 32-entry transition table holds); the second part brings in 20 processes,
// more than the 16 process slots.
//
// The complete behaviour is compared against the untimed model of
// csaf_ref_pkg: every prediction and history, and for every switch whether
// the transition counter was inverted, whether a wipe happened and how many
// entries it cleared, and the replacements in both tables. The latency from
// the switch event to the counter update (1 cycle) and to the wipe (3 cycles)
// is checked too. Each mechanism (switch, rewrite of the running ID, counter
// inversion, wipe, wipe that changed predictor state, transition table
// replacement, process slot replacement, busy) must occur at least once.
module tb_csaf_top;
  import csaf_pkg::*;
  import csaf_ref_pkg::*;

  localparam int unsigned N  = 128;
  localparam int unsigned HW = $clog2(N);

  logic clk = 1'b0, rst_n = 1'b0;
  pc_t           pred_pc, upd_pc;
  logic          pred_taken, upd_valid, upd_taken, tid_wr_en;
  logic [HW-1:0] pred_ghr, upd_ghr;
  pid_t          tid_wr_data;
  logic          busy, cs_event, wipe_event, invert_event, tt_evict_event, slot_evict_event;
  logic [$clog2(2*N):0] wipe_entries;

  int checks = 0, failures = 0;

  csaf_top dut (.*);

  always #5 clk = ~clk;

  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  localparam int NB    = 32;
  localparam int NPMAX = 20;
  int bias [NPMAX+1][NB];

  csaf_ref m;
  int unsigned cur = 0;
  int n_cs = 0, n_same = 0, n_inv = 0, n_wipe = 0, n_wipe_state = 0, n_tt_ev = 0, n_slot_ev = 0, n_busy = 0;
  int n_pred = 0, n_mispred = 0;

  task automatic run_slice(int unsigned p, int len);
    for (int b = 0; b < len; b++) begin
      int  k = $urandom_range(0, NB - 1);
      int unsigned pc = 32'h0001_0000 + 4 * k * 3;
      bit  t = ($urandom_range(0, 99) < bias[p][k]);
      @(negedge clk);
      pred_pc = pc;
      #1;
      check(pred_taken == m.bp.predict(pc), "prediction");
      check(pred_ghr == HW'(m.bp.ghr), "history");
      n_pred++;
      if (pred_taken != t) n_mispred++;
      upd_valid = 1; upd_pc = pc; upd_ghr = pred_ghr; upd_taken = t;
      m.branch(pc, int'(pred_ghr), t);
    end
    @(negedge clk);
    upd_valid = 0;
  endtask

  task automatic do_switch(int unsigned next);
    longint c_cs = -1, c_inv = -1, c_wipe = -1;
    int entries = 0;
    bit tt_ev = 0, slot_ev = 0;
    @(negedge clk);
    tid_wr_en = 1; tid_wr_data = pid_t'(next);
    @(negedge clk);
    tid_wr_en = 0;
    m.context_switch(cur, next);
    cur = next;
    for (int c = 0; c < 6; c++) begin
      if (cs_event) c_cs = cycle;
      if (invert_event) c_inv = cycle;
      if (wipe_event) begin c_wipe = cycle; entries = int'(wipe_entries); end
      if (tt_evict_event) tt_ev = 1;
      if (slot_evict_event) slot_ev = 1;
      if (busy) n_busy++;
      @(negedge clk);
    end
    n_cs++;
    check(c_cs >= 0, "switch event");
    check((c_inv >= 0) == m.exp_invert, "counter inversion");
    if (c_inv >= 0) check(c_inv == c_cs + 1, "inversion latency");
    check((c_wipe >= 0) == m.exp_wipe, "wipe decision");
    if (c_wipe >= 0) begin
      check(c_wipe == c_cs + 3, "wipe latency");
      check(entries == m.exp_wipe_entries, "wiped entry count");
    end
    check(tt_ev == m.exp_tt_evict, "transition table replacement");
    check(slot_ev == m.exp_slot_evict, "process slot replacement");
    if (m.exp_invert) n_inv++;
    if (m.exp_wipe) n_wipe++;
    if (m.exp_wipe && m.exp_wipe_entries > 0) n_wipe_state++;
    if (m.exp_tt_evict) n_tt_ev++;
    if (m.exp_slot_evict) n_slot_ev++;
  endtask

  initial begin
    m = new(N, N, 16, 32, 16, 8);
    for (int p = 0; p <= NPMAX; p++)
      for (int k = 0; k < NB; k++)
        bias[p][k] = ($urandom_range(0, 1) != 0) ? 95 : 5;
    pred_pc = '0; upd_pc = '0; upd_valid = 0; upd_taken = 0; upd_ghr = '0;
    tid_wr_en = 0; tid_wr_data = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run_slice(0, 300);
    // part 1: 9 processes
    for (int s = 0; s < 300; s++) begin
      int unsigned nx;
      do nx = $urandom_range(1, 9); while (nx == cur);
      do_switch(nx);
      run_slice(cur, $urandom_range(50, 1200));
    end
    // a rewrite of the running thread's ID is not a switch
    @(negedge clk);
    tid_wr_en = 1; tid_wr_data = pid_t'(cur);
    @(negedge clk);
    tid_wr_en = 0;
    repeat (4) begin
      check(!cs_event && !busy, "same-ID write ignored");
      @(negedge clk);
    end
    n_same++;
    // part 2: 20 processes
    for (int s = 0; s < 200; s++) begin
      int unsigned nx;
      do nx = $urandom_range(1, NPMAX); while (nx == cur);
      do_switch(nx);
      run_slice(cur, $urandom_range(50, 600));
    end
    $display("switches=%0d same_id_writes=%0d inversions=%0d wipes=%0d wipes_with_entries=%0d tt_replacements=%0d slot_replacements=%0d busy_cycles=%0d",
             n_cs, n_same, n_inv, n_wipe, n_wipe_state, n_tt_ev, n_slot_ev, n_busy);
    $display("branches=%0d mispredicted=%0d", n_pred, n_mispred);
    check(n_cs > 0,         "mechanism: context switch");
    check(n_same > 0,       "mechanism: same-ID write");
    check(n_inv > 0,        "mechanism: counter inversion");
    check(n_wipe > 0,       "mechanism: wipe");
    check(n_wipe_state > 0, "mechanism: wipe of changed entries");
    check(n_tt_ev > 0,      "mechanism: transition table replacement");
    check(n_slot_ev > 0,    "mechanism: process slot replacement");
    check(n_busy > 0,       "mechanism: busy");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
