// transition_table: the framework's table of PID-to-PID transitions.
//
// Each of ENTRIES entries holds a (from PID, to PID) tag, the number of PHT
// direction changes seen in the time slice that followed the transition the
// last time it happened, and a 2-bit saturating counter that starts strongly
// not taken. Entries are replaced in LRU order once the table is full.
//
// Two operations, never in the same cycle:
//  * update (upd_en): entry upd_idx receives upd_count, the number of PHT
//    changes of the slice that followed it this time. If a count was stored
//    and it is smaller than upd_count by THRESH or more, the behaviour got
//    worse and the counter is inverted (bitwise complement, so the opposite
//    action is taken next time); otherwise the counter is left alone. The new
//    count is stored either way. upd_inverted reports the inversion.
//  * lookup (lk_en): the (lk_from, lk_to) transition is looked up; a miss
//    allocates a free or the LRU entry with a strongly-not-taken counter and
//    no stored count. Registered results, valid the next cycle and held until
//    the next lookup: lk_idx, lk_taken (the counter says "wipe"), lk_hit and
//    lk_evict.
//
// The table organisation, LRU replacement, initial counter state, the
// inversion on a worsening beyond a threshold and the update order follow the
// framework's description. The size, the threshold, the count width and the
// meaning of inversion as a 2-bit complement are this design's choices.
module transition_table
  import csaf_pkg::*;
#(
  parameter int unsigned ENTRIES = 32,
  parameter int unsigned CNT_W   = 16,
  parameter int unsigned THRESH  = 8
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // update of the previous transition
  input  logic                       upd_en,
  input  logic [$clog2(ENTRIES)-1:0] upd_idx,
  input  logic [CNT_W-1:0]           upd_count,
  output logic                       upd_inverted,
  // lookup / allocation of the new transition
  input  logic                       lk_en,
  input  pid_t                       lk_from,
  input  pid_t                       lk_to,
  output logic [$clog2(ENTRIES)-1:0] lk_idx,
  output logic                       lk_taken,
  output logic                       lk_hit,
  output logic                       lk_evict
);
  localparam int unsigned IW = $clog2(ENTRIES);

  typedef struct packed {
    logic             valid;
    pid_t             from_pid;
    pid_t             to_pid;
    logic             cnt_valid;
    logic [CNT_W-1:0] count;
    ctr2_e            ctr;
  } tt_entry_t;

  tt_entry_t ent [ENTRIES];

  // ------------------------------------------------------------ lookup path
  logic          hit, has_free;
  logic [IW-1:0] hit_idx, free_idx, lru_idx, sel_idx;
  always_comb begin
    hit      = 1'b0;
    hit_idx  = '0;
    has_free = 1'b0;
    free_idx = '0;
    for (int i = ENTRIES - 1; i >= 0; i--) begin
      if (ent[i].valid && (ent[i].from_pid == lk_from) && (ent[i].to_pid == lk_to)) begin
        hit     = 1'b1;
        hit_idx = IW'(i);
      end
      if (!ent[i].valid) begin
        has_free = 1'b1;
        free_idx = IW'(i);
      end
    end
    sel_idx = hit ? hit_idx : (has_free ? free_idx : lru_idx);
  end

  lru_rank #(.N(ENTRIES)) u_lru (
    .clk        (clk),
    .rst_n      (rst_n),
    .touch_en   (lk_en),
    .touch_idx  (sel_idx),
    .victim_idx (lru_idx)
  );

  // ------------------------------------------------------------ update path
  tt_entry_t   u_ent;
  logic        worse;
  always_comb begin
    u_ent        = ent[upd_idx];
    // stored count smaller than the new count by at least THRESH
    worse        = u_ent.cnt_valid &&
                   ({1'b0, upd_count} >= ({1'b0, u_ent.count} + (CNT_W+1)'(THRESH)));
    upd_inverted = upd_en && u_ent.valid && worse;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < ENTRIES; i++) ent[i] <= '0;
      lk_idx   <= '0;
      lk_taken <= 1'b0;
      lk_hit   <= 1'b0;
      lk_evict <= 1'b0;
    end else begin
      if (upd_en && u_ent.valid) begin
        if (worse) ent[upd_idx].ctr <= ctr2_e'(~u_ent.ctr);
        ent[upd_idx].count     <= upd_count;
        ent[upd_idx].cnt_valid <= 1'b1;
      end
      if (lk_en) begin
        lk_idx   <= sel_idx;
        lk_hit   <= hit;
        lk_evict <= !hit && !has_free;
        if (hit) begin
          lk_taken <= ent[sel_idx].ctr[1];
        end else begin
          lk_taken      <= 1'b0;
          ent[sel_idx]  <= '{valid: 1'b1, from_pid: lk_from, to_pid: lk_to,
                             cnt_valid: 1'b0, count: '0, ctr: CTR_SNT};
        end
      end
    end
  end

  // the controller never updates and looks up in the same cycle
  a_one_op: assert property (@(posedge clk) disable iff (!rst_n) !(upd_en && lk_en));
endmodule
