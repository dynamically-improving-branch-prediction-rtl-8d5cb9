// tb_csaf_workload: multi-program workloads in the style of those the
// framework was evaluated with, run on the full design at its default sizes.
//
// Two workloads share this testbench and differ only in size: 8 programs
// and then the 11 named programs of the per-process evaluation (Bubblesort,
// FloatMM, IntMM, Oscar, Perm, Puzzle, Queens, Quicksort, RealMM, Towers,
// Treesort), each scheduled round-robin with a fixed time slice. The programs
// are synthetic branch streams, not the real benchmarks: each has its own
// code footprint (8 to 48 branches at its own addresses, which alias in the
// 128-entry tables) made of loop branches (taken k-1 times, then not taken)
// and biased branches, and it switches between two behaviours from one round
// to the next so that transitions become harmful and harmless over time. A
// slice is 20,000 branches, far shorter than a 1 ms slice of a real core.
//
// Every prediction and every framework decision is compared with the
// reference model of csaf_ref_pkg, and the misprediction rate of each program
// is printed. Inversions and wipes must occur.
module tb_csaf_workload;
  import csaf_pkg::*;
  import csaf_ref_pkg::*;

  localparam int unsigned N     = 128;
  localparam int unsigned HW    = $clog2(N);
  localparam int          SLICE = 20000;
  localparam int          NPROG = 11;
  localparam int          MAXB  = 48;

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

  initial begin
    repeat (6000000) @(posedge clk);
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

  string names [NPROG] = '{"Bubblesort", "FloatMM", "IntMM", "Oscar", "Perm", "Puzzle",
                           "Queens", "Quicksort", "RealMM", "Towers", "Treesort"};

  // program description
  int          nbr   [NPROG];
  int unsigned base  [NPROG];
  int          trip  [NPROG][2][MAXB];   // 0: biased branch, else loop trip count
  int          bias  [NPROG][2][MAXB];
  int          iter  [NPROG][MAXB];
  int          phase [NPROG];
  longint      n_br  [NPROG];
  longint      n_mis [NPROG];

  csaf_ref m;
  int unsigned cur = 0;
  int n_inv = 0, n_wipe = 0, n_sw = 0;

  function automatic bit outcome(int p, int k);
    int ph = phase[p];
    if (trip[p][ph][k] == 0) return $urandom_range(0, 99) < bias[p][ph][k];
    iter[p][k]++;
    if (iter[p][k] >= trip[p][ph][k]) begin iter[p][k] = 0; return 0; end
    return 1;
  endfunction

  task automatic run_slice(int p);
    for (int b = 0; b < SLICE; b++) begin
      int  k = $urandom_range(0, nbr[p] - 1);
      int unsigned pc = base[p] + 4 * k;
      bit  t = outcome(p, k);
      @(negedge clk);
      pred_pc = pc;
      #1;
      check(pred_taken == m.bp.predict(pc), "prediction");
      n_br[p]++;
      if (pred_taken != t) n_mis[p]++;
      upd_valid = 1; upd_pc = pc; upd_ghr = pred_ghr; upd_taken = t;
      m.branch(pc, int'(pred_ghr), t);
    end
    @(negedge clk);
    upd_valid = 0;
  endtask

  task automatic do_switch(int unsigned next);
    bit inv = 0, wp = 0;
    int entries = 0;
    @(negedge clk);
    tid_wr_en = 1; tid_wr_data = pid_t'(next);
    @(negedge clk);
    tid_wr_en = 0;
    m.context_switch(cur, next);
    cur = next;
    repeat (6) begin
      if (invert_event) inv = 1;
      if (wipe_event) begin wp = 1; entries = int'(wipe_entries); end
      @(negedge clk);
    end
    check(inv == m.exp_invert, "counter inversion");
    check(wp == m.exp_wipe, "wipe decision");
    if (wp) check(entries == m.exp_wipe_entries, "wiped entry count");
    n_sw++;
    if (inv) n_inv++;
    if (wp) n_wipe++;
  endtask

  task automatic run_workload(int nprog, int rounds);
    for (int r = 0; r < rounds; r++) begin
      for (int p = 0; p < nprog; p++) begin
        if ($urandom_range(0, 2) == 0) phase[p] = 1 - phase[p];
        do_switch(32'h4000 + p);
        run_slice(p);
      end
    end
  endtask

  initial begin
    m = new(N, N, 16, 32, 16, 8);
    for (int p = 0; p < NPROG; p++) begin
      nbr[p]  = $urandom_range(8, MAXB);
      base[p] = 32'h0000_8000 + 32'h1000 * p + 4 * $urandom_range(0, 127);
      phase[p] = 0;
      n_br[p] = 0; n_mis[p] = 0;
      for (int k = 0; k < MAXB; k++) begin
        iter[p][k] = 0;
        for (int ph = 0; ph < 2; ph++) begin
          trip[p][ph][k] = ($urandom_range(0, 2) == 0) ? $urandom_range(2, 12) : 0;
          bias[p][ph][k] = ($urandom_range(0, 1) != 0) ? $urandom_range(85, 99) : $urandom_range(1, 15);
        end
      end
    end
    pred_pc = '0; upd_pc = '0; upd_valid = 0; upd_taken = 0; upd_ghr = '0;
    tid_wr_en = 0; tid_wr_data = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run_workload(8, 6);       // eight-program workload
    run_workload(NPROG, 6);   // eleven-program workload
    for (int p = 0; p < NPROG; p++)
      $display("%-10s branches=%0d mispredicted=%0.3f%%", names[p], n_br[p],
               (n_br[p] == 0) ? 0.0 : 100.0 * real'(n_mis[p]) / real'(n_br[p]));
    $display("switches=%0d inversions=%0d wipes=%0d", n_sw, n_inv, n_wipe);
    check(n_inv > 0, "mechanism: counter inversion");
    check(n_wipe > 0, "mechanism: wipe");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
