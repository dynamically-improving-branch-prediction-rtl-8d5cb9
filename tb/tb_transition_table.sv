// tb_transition_table: self-checking test of the PID-to-PID transition
// table at a reduced size (4 entries, 8-bit counts, threshold 3).
//
// The test plays the controller's part: each round updates the entry of the
// previous lookup with a random slice count, then looks up a random
// transition among 4 PIDs (12 possible transitions, so entries are replaced
// often). A model keyed by (from, to), with LRU by time stamp, predicts the
// inversion of every update and the hit, eviction and counter decision of
// every lookup; the index the table hands out must stay the same for a
// transition as long as it is resident.
module tb_transition_table;
  import csaf_pkg::*;

  localparam int unsigned ENT = 4;
  localparam int unsigned CW  = 8;
  localparam int unsigned TH  = 3;
  localparam int unsigned IW  = $clog2(ENT);

  logic clk = 1'b0, rst_n = 1'b0;
  logic          upd_en, upd_inverted, lk_en, lk_taken, lk_hit, lk_evict;
  logic [IW-1:0] upd_idx, lk_idx;
  logic [CW-1:0] upd_count;
  pid_t          lk_from, lk_to;

  int checks = 0, failures = 0;

  transition_table #(.ENTRIES(ENT), .CNT_W(CW), .THRESH(TH)) dut (.*);

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

  // model
  int     m_count [longint unsigned];
  bit     m_cval  [longint unsigned];
  int     m_ctr   [longint unsigned];
  longint m_stamp [longint unsigned];
  int     m_idx   [longint unsigned];
  longint now = 0;
  longint unsigned prev_key;
  bit     prev_valid = 0;
  int n_inv = 0, n_hit = 0, n_evict = 0, n_taken = 0, n_noinv = 0;

  initial begin
    upd_en = 0; lk_en = 0; upd_idx = '0; upd_count = '0; lk_from = '0; lk_to = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int it = 0; it < 6000; it++) begin
      int unsigned f, t;
      longint unsigned key;
      int  cnt;
      bit  e_inv, e_hit, e_evict, e_taken;
      // ---- update of the previous transition
      @(negedge clk);
      if (prev_valid) begin
        cnt = (m_cval[prev_key] && $urandom_range(0, 1)) ?
              m_count[prev_key] + $urandom_range(0, 2 * TH) - TH / 2 : $urandom_range(0, 40);
        if (cnt < 0) cnt = 0;
        if (cnt > 255) cnt = 255;
        upd_en    = 1;
        upd_idx   = IW'(m_idx[prev_key]);
        upd_count = CW'(cnt);
        e_inv = m_cval[prev_key] && (cnt >= m_count[prev_key] + TH);
        #1;
        check(upd_inverted == e_inv, "upd_inverted");
        if (e_inv) begin m_ctr[prev_key] = 3 - m_ctr[prev_key]; n_inv++; end
        else n_noinv++;
        m_count[prev_key] = cnt;
        m_cval[prev_key]  = 1;
      end
      // ---- lookup of a new transition
      @(negedge clk);
      upd_en = 0;
      f = $urandom_range(0, 3);
      do t = $urandom_range(0, 3); while (t == f);
      lk_en = 1; lk_from = pid_t'(f) + 32'h100; lk_to = pid_t'(t) + 32'h100;
      key = {32'(f), 32'(t)};
      now++;
      e_evict = 0;
      e_hit = m_ctr.exists(key);
      if (e_hit) e_taken = m_ctr[key] >= 2;
      else begin
        if (m_ctr.num() == ENT) begin
          automatic longint unsigned v = 0;
          automatic longint b = 64'h7fffffffffffffff;
          foreach (m_stamp[k]) if (m_stamp[k] < b) begin b = m_stamp[k]; v = k; end
          m_count.delete(v); m_cval.delete(v); m_ctr.delete(v); m_stamp.delete(v); m_idx.delete(v);
          e_evict = 1;
        end
        m_ctr[key] = 0; m_cval[key] = 0; m_count[key] = 0;
        e_taken = 0;
      end
      m_stamp[key] = now;
      @(posedge clk); #1;
      lk_en = 0;
      check(lk_hit == e_hit, "lk_hit");
      check(lk_evict == e_evict, "lk_evict");
      check(lk_taken == e_taken, "lk_taken");
      if (e_hit) check(m_idx[key] == int'(lk_idx), "lk_idx stable");
      m_idx[key] = int'(lk_idx);
      prev_key = key; prev_valid = 1;
      if (e_hit) n_hit++;
      if (e_evict) n_evict++;
      if (e_taken) n_taken++;
    end
    @(negedge clk); upd_en = 0; lk_en = 0;
    check(n_inv > 100 && n_noinv > 100 && n_hit > 100 && n_evict > 100 && n_taken > 100, "coverage");
    $display("inversions=%0d kept=%0d hits=%0d evictions=%0d taken=%0d", n_inv, n_noinv, n_hit, n_evict, n_taken);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
