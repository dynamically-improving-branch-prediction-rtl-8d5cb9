// csaf_controller: sequences the framework's work at each context switch.
//
// On a context switch cur -> next (cs_valid) it walks four states:
//  IDLE    : tells the change tracker to switch to the incoming PID
//            (tr_switch_en); the tracker hands back the outgoing slice's PHT
//            change count and the incoming process's changed-entry mask.
//  UPDATE  : the previous transition (old -> cur), remembered by its table
//            index, is updated with that count; the table inverts its
//            counter if the behaviour got worse by the threshold.
//  LOOKUP  : the new transition (cur -> next) is looked up or allocated.
//  DECIDE  : if its counter says taken, wipe_en is raised for one cycle and
//            the PHT entries in the tracker's mask return to their reset
//            state. The new transition becomes the "previous" one.
// A switch therefore takes four cycles; busy is high for the last three and
// the operating system cannot switch again that fast, which an assertion
// checks. No previous transition exists before the first switch, so the
// first UPDATE does nothing.
//
// The order (update the previous transition first, then look up the new one
// and wipe if its counter says taken) follows the framework's description;
// the state machine and its timing are this design's choices.
module csaf_controller
  import csaf_pkg::*;
#(
  parameter int unsigned TT_ENTRIES = 32,
  parameter int unsigned CNT_W      = 16
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          cs_valid,
  input  pid_t                          cs_prev_pid,
  input  pid_t                          cs_next_pid,
  output logic                          busy,
  // change tracker
  output logic                          tr_switch_en,
  output pid_t                          tr_switch_pid,
  input  logic [CNT_W-1:0]              tr_slice_flips,
  // transition table
  output logic                          tt_upd_en,
  output logic [$clog2(TT_ENTRIES)-1:0] tt_upd_idx,
  output logic [CNT_W-1:0]              tt_upd_count,
  output logic                          tt_lk_en,
  output pid_t                          tt_lk_from,
  output pid_t                          tt_lk_to,
  input  logic [$clog2(TT_ENTRIES)-1:0] tt_lk_idx,
  input  logic                          tt_lk_taken,
  // predictor
  output logic                          wipe_en
);
  localparam int unsigned IW = $clog2(TT_ENTRIES);

  typedef enum logic [1:0] {S_IDLE, S_UPDATE, S_LOOKUP, S_DECIDE} state_e;

  state_e        state;
  pid_t          from_q, to_q;
  logic          prev_valid;
  logic [IW-1:0] prev_idx;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      from_q     <= '0;
      to_q       <= '0;
      prev_valid <= 1'b0;
      prev_idx   <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (cs_valid) begin
          from_q <= cs_prev_pid;
          to_q   <= cs_next_pid;
          state  <= S_UPDATE;
        end
        S_UPDATE: state <= S_LOOKUP;
        S_LOOKUP: state <= S_DECIDE;
        S_DECIDE: begin
          prev_idx   <= tt_lk_idx;
          prev_valid <= 1'b1;
          state      <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    busy          = (state != S_IDLE);
    tr_switch_en  = (state == S_IDLE) && cs_valid;
    tr_switch_pid = cs_next_pid;
    tt_upd_en     = (state == S_UPDATE) && prev_valid;
    tt_upd_idx    = prev_idx;
    tt_upd_count  = tr_slice_flips;
    tt_lk_en      = (state == S_LOOKUP);
    tt_lk_from    = from_q;
    tt_lk_to      = to_q;
    wipe_en       = (state == S_DECIDE) && tt_lk_taken;
  end

  a_no_switch_while_busy: assert property (@(posedge clk) disable iff (!rst_n) cs_valid |-> !busy);
endmodule
