// csaf_top: Bi-Mode branch predictor with the context switch accuracy
// framework (CSAF).
//
// The core side of the design is the predictor's lookup and training ports
// plus the write port of the software thread ID register. tid_monitor turns a
// write of a new thread ID into a context switch event; csaf_controller then
// (1) lets pht_change_tracker close the outgoing time slice and open the
// incoming process's slot, (2) updates the previous transition's entry in
// transition_table with the slice's PHT change count, (3) looks up the new
// transition and (4) wipes, through the predictor's wipe port, the PHT
// entries that changed since the incoming process last ran if that
// transition's counter says taken. The predictor keeps predicting
// throughout; the wipe lands four cycles after the thread ID write.
//
// Status outputs pulse for one cycle on a context switch (cs_event), a wipe
// (wipe_event, with wipe_entries set bits in the mask), a counter inversion
// (invert_event) and table replacements (tt_evict_event, slot_evict_event),
// so the framework's activity can be observed.
module csaf_top
  import csaf_pkg::*;
#(
  parameter int unsigned DIR_ENTRIES    = 128,
  parameter int unsigned CHOICE_ENTRIES = 128,
  parameter int unsigned PID_SLOTS      = 16,
  parameter int unsigned TT_ENTRIES     = 32,
  parameter int unsigned CNT_W          = 16,
  parameter int unsigned THRESH         = 8
) (
  input  logic                           clk,
  input  logic                           rst_n,
  // branch prediction
  input  pc_t                            pred_pc,
  output logic                           pred_taken,
  output logic [$clog2(DIR_ENTRIES)-1:0] pred_ghr,
  input  logic                           upd_valid,
  input  pc_t                            upd_pc,
  input  logic [$clog2(DIR_ENTRIES)-1:0] upd_ghr,
  input  logic                           upd_taken,
  // software thread ID register writes
  input  logic                           tid_wr_en,
  input  pid_t                           tid_wr_data,
  // status
  output logic                           busy,
  output logic                           cs_event,
  output logic                           wipe_event,
  output logic [$clog2(2*DIR_ENTRIES):0] wipe_entries,
  output logic                           invert_event,
  output logic                           tt_evict_event,
  output logic                           slot_evict_event
);
  localparam int unsigned NE = 2 * DIR_ENTRIES;

  logic              cs_valid;
  pid_t              cs_prev_pid, cs_next_pid, cur_pid;
  logic [NE-1:0]     flip_vec, wipe_mask;
  logic              upd_flip, wipe_en;
  logic              tr_switch_en;
  pid_t              tr_switch_pid;
  logic [CNT_W-1:0]  slice_flips;
  logic              slot_hit, slot_evict;
  logic              tt_upd_en, tt_lk_en, tt_lk_taken, tt_lk_hit, tt_lk_evict;
  logic [$clog2(TT_ENTRIES)-1:0] tt_upd_idx, tt_lk_idx;
  logic [CNT_W-1:0]  tt_upd_count;
  pid_t              tt_lk_from, tt_lk_to;
  logic              lk_done;

  tid_monitor u_tid (
    .clk, .rst_n,
    .tid_wr_en, .tid_wr_data,
    .cs_valid, .cs_prev_pid, .cs_next_pid, .cur_pid
  );

  bimode_predictor #(.DIR_ENTRIES(DIR_ENTRIES), .CHOICE_ENTRIES(CHOICE_ENTRIES)) u_pred (
    .clk, .rst_n,
    .pred_pc, .pred_taken, .pred_ghr,
    .upd_valid, .upd_pc, .upd_ghr, .upd_taken,
    .wipe_en, .wipe_mask,
    .flip_vec, .upd_flip
  );

  pht_change_tracker #(.N_ENTRIES(NE), .PID_SLOTS(PID_SLOTS), .CNT_W(CNT_W)) u_trk (
    .clk, .rst_n,
    .flip_vec, .upd_flip,
    .switch_en(tr_switch_en), .switch_pid(tr_switch_pid),
    .wipe_mask, .slice_flips, .slot_hit, .slot_evict
  );

  transition_table #(.ENTRIES(TT_ENTRIES), .CNT_W(CNT_W), .THRESH(THRESH)) u_tt (
    .clk, .rst_n,
    .upd_en(tt_upd_en), .upd_idx(tt_upd_idx), .upd_count(tt_upd_count), .upd_inverted(invert_event),
    .lk_en(tt_lk_en), .lk_from(tt_lk_from), .lk_to(tt_lk_to),
    .lk_idx(tt_lk_idx), .lk_taken(tt_lk_taken), .lk_hit(tt_lk_hit), .lk_evict(tt_lk_evict)
  );

  csaf_controller #(.TT_ENTRIES(TT_ENTRIES), .CNT_W(CNT_W)) u_ctl (
    .clk, .rst_n,
    .cs_valid, .cs_prev_pid, .cs_next_pid, .busy,
    .tr_switch_en, .tr_switch_pid, .tr_slice_flips(slice_flips),
    .tt_upd_en, .tt_upd_idx, .tt_upd_count,
    .tt_lk_en, .tt_lk_from, .tt_lk_to, .tt_lk_idx, .tt_lk_taken,
    .wipe_en
  );

  // one-cycle status pulses
  logic sw_done;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lk_done <= 1'b0;
      sw_done <= 1'b0;
    end else begin
      lk_done <= tt_lk_en;
      sw_done <= tr_switch_en;
    end
  end

  always_comb begin
    cs_event         = cs_valid;
    wipe_event       = wipe_en;
    wipe_entries     = wipe_en ? $bits(wipe_entries)'($countones(wipe_mask)) : '0;
    tt_evict_event   = lk_done && tt_lk_evict;
    slot_evict_event = sw_done && slot_evict;
  end
endmodule
