// tb_pht_change_tracker: self-checking test of the per-process changed-entry
// tracker, at a reduced size (16 PHT entries, 4 process slots, 4-bit slice
// counter) so that slot replacement and counter saturation happen often.
//
// Each clock drives a sparse random direction-change vector and a random
// update-flip pulse; now and then the running process is switched for another
// one out of a pool of 7 PIDs. A model keyed by PID (LRU by time stamp)
// predicts the wipe mask, slice count, hit and eviction of every switch.
module tb_pht_change_tracker;
  import csaf_pkg::*;

  localparam int unsigned NE    = 16;
  localparam int unsigned SLOTS = 4;
  localparam int unsigned CW    = 4;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [NE-1:0] flip_vec, wipe_mask;
  logic          upd_flip, switch_en, slot_hit, slot_evict;
  pid_t          switch_pid;
  logic [CW-1:0] slice_flips;

  int checks = 0, failures = 0;

  pht_change_tracker #(.N_ENTRIES(NE), .PID_SLOTS(SLOTS), .CNT_W(CW)) dut (.*);

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

  logic [NE-1:0] m_changed [int unsigned];
  longint        m_stamp   [int unsigned];
  int unsigned   m_cur;
  bit            m_cur_valid = 0;
  int            m_cnt = 0;
  longint        now = 0;
  int n_hit = 0, n_evict = 0, n_sat = 0, n_nonempty = 0;

  initial begin
    flip_vec = '0; upd_flip = 0; switch_en = 0; switch_pid = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int it = 0; it < 20000; it++) begin
      logic [NE-1:0] e_mask;
      int   e_cnt;
      bit   e_hit, e_evict, sw;
      int unsigned p;
      @(negedge clk);
      flip_vec = '0;
      for (int i = 0; i < NE; i++) flip_vec[i] = ($urandom_range(0, 11) == 0);
      upd_flip  = ($urandom_range(0, 1) == 0);
      sw        = ($urandom_range(0, 9) == 0);
      do p = $urandom_range(1, 7); while (m_cur_valid && p == m_cur);
      switch_en  = sw;
      switch_pid = pid_t'(p) << 20;
      // model, this clock
      if (sw) begin
        now++;
        e_cnt = m_cnt + int'(upd_flip);
        if (e_cnt > (1 << CW) - 1) begin e_cnt = (1 << CW) - 1; n_sat++; end
        e_evict = 0;
        e_hit   = m_changed.exists(p);
        if (e_hit) e_mask = m_changed[p] | flip_vec;
        else begin
          e_mask = '0;
          if (m_changed.num() == SLOTS) begin
            automatic int unsigned v = 0;
            automatic longint b = 64'h7fffffffffffffff;
            foreach (m_stamp[q]) if (m_stamp[q] < b) begin b = m_stamp[q]; v = q; end
            m_changed.delete(v); m_stamp.delete(v);
            e_evict = 1;
          end
        end
        foreach (m_changed[q]) if (!(m_cur_valid && q == m_cur)) m_changed[q] |= flip_vec;
        m_changed[p] = '0;
        m_stamp[p]   = now;
        m_cur = p; m_cur_valid = 1;
        m_cnt = 0;
      end else begin
        foreach (m_changed[q]) if (!(m_cur_valid && q == m_cur)) m_changed[q] |= flip_vec;
        m_cnt += int'(upd_flip);
      end
      @(posedge clk); #1;
      if (sw) begin
        check(wipe_mask == e_mask, "wipe_mask");
        check(slice_flips == CW'(e_cnt), "slice_flips");
        check(slot_hit == e_hit, "slot_hit");
        check(slot_evict == e_evict, "slot_evict");
        if (e_hit) n_hit++;
        if (e_evict) n_evict++;
        if (e_mask != '0) n_nonempty++;
      end
    end
    @(negedge clk); switch_en = 0;
    check(n_hit > 50 && n_evict > 50 && n_sat > 10 && n_nonempty > 50, "coverage");
    $display("hits=%0d evictions=%0d saturated=%0d nonempty=%0d", n_hit, n_evict, n_sat, n_nonempty);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
