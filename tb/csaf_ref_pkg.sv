// csaf_ref_pkg: untimed reference models used by the testbenches.
//
// bimode_ref models the Bi-Mode predictor at the level of whole branches
// (counter values 0..3, bank 0 = not-taken bank, bank 1 = taken bank).
// csaf_ref adds the context switch framework on top of it: the per-process
// changed-entry sets, the per-slice direction change count, the transition
// table with least-recently-used replacement (kept as time stamps rather than
// ranks) and the wipe decision. The models are written from the behavioural
// description of the design, independently of the RTL's structure.
package csaf_ref_pkg;

  class bimode_ref;
    int n;          // entries per direction bank
    int nc;         // choice entries
    int ch[];
    int dt[];       // 2*n direction counters
    int ghr;

    function new(int n_dir, int n_choice);
      n  = n_dir;
      nc = n_choice;
      ch = new[nc];
      dt = new[2*n];
      foreach (ch[i]) ch[i] = 1;
      foreach (dt[i]) dt[i] = (i < n) ? 1 : 2;
      ghr = 0;
    endfunction

    static function int sat(int c, bit up);
      if (up) return (c < 3) ? c + 1 : 3;
      return (c > 0) ? c - 1 : 0;
    endfunction

    function int entry(int unsigned pc, int g);
      int sel = (ch[(pc >> 2) % nc] >= 2) ? 1 : 0;
      return sel * n + ((((pc >> 2) % n) ^ g) % n);
    endfunction

    function bit predict(int unsigned pc);
      return dt[entry(pc, ghr)] >= 2;
    endfunction

    // trains with the outcome; returns 1 if the trained entry changed direction
    function bit update(int unsigned pc, int g, bit t, output int e);
      int  ci  = (pc >> 2) % nc;
      bit  sel = ch[ci] >= 2;
      int  old;
      bit  ok;
      e   = entry(pc, g);
      old = dt[e];
      dt[e] = sat(old, t);
      ok  = ((old >= 2) == t);
      if (!((sel != t) && ok)) ch[ci] = sat(ch[ci], t);
      ghr = ((ghr << 1) | int'(t)) % n;
      return (old >= 2) != (dt[e] >= 2);
    endfunction

    function bit dir(int e);
      return dt[e] >= 2;
    endfunction

    function void wipe_one(int e);
      dt[e] = (e < n) ? 1 : 2;
    endfunction
  endclass

  typedef struct {
    bit changed[];
    longint stamp;
  } pid_slot_t;

  typedef struct {
    int     count;
    bit     cnt_valid;
    int     ctr;
    longint stamp;
  } trans_t;

  class csaf_ref;
    bimode_ref bp;
    int  ne, n_slots, n_trans, thresh, cnt_max;
    pid_slot_t slots[int unsigned];        // resident processes
    trans_t    trans[longint unsigned];    // resident transitions, key {from,to}
    int unsigned cur;
    bit     cur_valid;
    int     flips;
    longint unsigned prev_key;
    bit     prev_valid;
    longint now;

    // results of the last switch
    bit exp_invert, exp_wipe, exp_tt_evict, exp_slot_evict;
    int exp_wipe_entries;

    function new(int n_dir, int n_choice, int slots_n, int trans_n, int cnt_w, int th);
      bp      = new(n_dir, n_choice);
      ne      = 2 * n_dir;
      n_slots = slots_n;
      n_trans = trans_n;
      thresh  = th;
      cnt_max = (1 << cnt_w) - 1;
      cur_valid = 0; flips = 0; prev_valid = 0; now = 0;
    endfunction

    function void mark(int e);
      foreach (slots[p]) if (!(cur_valid && p == cur)) slots[p].changed[e] = 1;
    endfunction

    // one resolved branch of the running process
    function void branch(int unsigned pc, int g, bit t);
      int e;
      if (bp.update(pc, g, t, e)) begin
        flips++;
        mark(e);
      end
    endfunction

    function void context_switch(int unsigned from_pid, int unsigned to_pid);
      bit mask[];
      int slice;
      longint unsigned key, victim;
      longint best;
      bit taken;
      now++;
      exp_invert = 0; exp_wipe = 0; exp_tt_evict = 0; exp_slot_evict = 0;
      exp_wipe_entries = 0;
      // close the slice and open the incoming process
      slice = (flips > cnt_max) ? cnt_max : flips;
      flips = 0;
      mask  = new[ne];
      if (slots.exists(to_pid)) begin
        mask = slots[to_pid].changed;
      end else begin
        if (slots.num() == n_slots) begin
          int unsigned v; longint b = 64'h7fffffffffffffff;
          foreach (slots[p]) if (slots[p].stamp < b) begin b = slots[p].stamp; v = p; end
          slots.delete(v);
          exp_slot_evict = 1;
        end
        slots[to_pid].changed = new[ne];
      end
      slots[to_pid].changed = new[ne];
      slots[to_pid].stamp   = now;
      cur = to_pid; cur_valid = 1;
      // update the previous transition
      if (prev_valid) begin
        if (trans[prev_key].cnt_valid && slice >= trans[prev_key].count + thresh) begin
          trans[prev_key].ctr = 3 - trans[prev_key].ctr;
          exp_invert = 1;
        end
        trans[prev_key].count     = slice;
        trans[prev_key].cnt_valid = 1;
      end
      // look up the new transition
      key = {32'(from_pid), 32'(to_pid)};
      if (trans.exists(key)) begin
        taken = trans[key].ctr >= 2;
      end else begin
        if (trans.num() == n_trans) begin
          best = 64'h7fffffffffffffff;
          foreach (trans[k]) if (trans[k].stamp < best) begin best = trans[k].stamp; victim = k; end
          trans.delete(victim);
          exp_tt_evict = 1;
        end
        trans[key] = '{count: 0, cnt_valid: 0, ctr: 0, stamp: 0};
        taken = 0;
      end
      trans[key].stamp = now;
      prev_key = key; prev_valid = 1;
      // conditional wipe
      if (taken) begin
        exp_wipe = 1;
        for (int e = 0; e < ne; e++) if (mask[e]) begin
          bit d = bp.dir(e);
          exp_wipe_entries++;
          bp.wipe_one(e);
          if (bp.dir(e) != d) mark(e);
        end
      end
    endfunction
  endclass

endpackage
