// pht_change_tracker: remembers, for each recently seen process, which PHT
// entries changed direction since that process last ran, and counts the
// direction changes made by training during the current time slice.
//
// A small table of PID_SLOTS process slots (PID tag, valid bit and one
// "changed" bit per PHT entry) is kept with true LRU replacement. Every cycle
// the entries reported in flip_vec are marked changed in every valid slot
// except the running one. On switch_en the incoming PID is looked up; on a
// hit its changed bits become wipe_mask and are cleared, on a miss the LRU
// (or a free) slot is given to the PID with nothing marked, so wipe_mask is
// empty. At the same edge slice_flips receives the number of upd_flip pulses
// of the slice that just ended (saturating at CNT_W bits) and the slice
// counter restarts.
//
// Timing: wipe_mask, slice_flips, slot_hit and slot_evict are registered and
// valid from the cycle after switch_en until the next switch. Until the
// first switch no slot is running and nothing is marked.
//
// Wiping only the entries that changed since the incoming process last ran,
// and counting direction changes per slice, follow the framework's
// description. The per-process slot table, its size and LRU policy, and the
// counter width are this design's choices.
module pht_change_tracker
  import csaf_pkg::*;
#(
  parameter int unsigned N_ENTRIES = 256,
  parameter int unsigned PID_SLOTS = 16,
  parameter int unsigned CNT_W     = 16
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [N_ENTRIES-1:0] flip_vec,
  input  logic                 upd_flip,
  input  logic                 switch_en,
  input  pid_t                 switch_pid,
  output logic [N_ENTRIES-1:0] wipe_mask,
  output logic [CNT_W-1:0]     slice_flips,
  output logic                 slot_hit,
  output logic                 slot_evict
);
  localparam int unsigned SW = $clog2(PID_SLOTS);

  logic [N_ENTRIES-1:0] changed [PID_SLOTS];
  pid_t                 tag     [PID_SLOTS];
  logic [PID_SLOTS-1:0] valid;
  logic [SW-1:0]        cur_slot;
  logic                 cur_valid;
  logic [CNT_W-1:0]     flip_cnt;

  // lookup of the incoming PID
  logic          hit, has_free;
  logic [SW-1:0] hit_idx, free_idx, lru_idx, sel_idx;
  always_comb begin
    hit      = 1'b0;
    hit_idx  = '0;
    has_free = 1'b0;
    free_idx = '0;
    for (int s = PID_SLOTS - 1; s >= 0; s--) begin
      if (valid[s] && (tag[s] == switch_pid)) begin
        hit     = 1'b1;
        hit_idx = SW'(s);
      end
      if (!valid[s]) begin
        has_free = 1'b1;
        free_idx = SW'(s);
      end
    end
    sel_idx = hit ? hit_idx : (has_free ? free_idx : lru_idx);
  end

  lru_rank #(.N(PID_SLOTS)) u_lru (
    .clk        (clk),
    .rst_n      (rst_n),
    .touch_en   (switch_en),
    .touch_idx  (sel_idx),
    .victim_idx (lru_idx)
  );

  logic [CNT_W-1:0] flip_cnt_inc;
  assign flip_cnt_inc = (upd_flip && (flip_cnt != '1)) ? flip_cnt + 1'b1 : flip_cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < PID_SLOTS; s++) begin
        changed[s] <= '0;
        tag[s]     <= '0;
      end
      valid       <= '0;
      cur_slot    <= '0;
      cur_valid   <= 1'b0;
      flip_cnt    <= '0;
      wipe_mask   <= '0;
      slice_flips <= '0;
      slot_hit    <= 1'b0;
      slot_evict  <= 1'b0;
    end else begin
      // mark direction changes for every process that is not running
      for (int s = 0; s < PID_SLOTS; s++)
        if (!(cur_valid && (SW'(s) == cur_slot)))
          changed[s] <= changed[s] | flip_vec;

      if (switch_en) begin
        wipe_mask        <= hit ? (changed[sel_idx] | flip_vec) : '0;
        changed[sel_idx] <= '0;
        tag[sel_idx]     <= switch_pid;
        valid[sel_idx]   <= 1'b1;
        cur_slot         <= sel_idx;
        cur_valid        <= 1'b1;
        slice_flips      <= flip_cnt_inc;
        flip_cnt         <= '0;
        slot_hit         <= hit;
        slot_evict       <= !hit && !has_free;
      end else begin
        flip_cnt <= flip_cnt_inc;
      end
    end
  end
endmodule
