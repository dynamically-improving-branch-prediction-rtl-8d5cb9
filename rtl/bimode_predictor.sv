// bimode_predictor: Bi-Mode branch predictor (Lee, Chen and Mudge) whose
// direction pattern history table (PHT) entries can be wiped selectively.
//
// Three tables of 2-bit saturating counters: a choice table indexed by the
// branch address, and a "not-taken" and a "taken" direction bank, both
// indexed by branch address XOR global history. The choice counter selects
// the bank whose counter gives the prediction. On a resolved branch only the
// selected bank is trained; the choice counter is trained with the outcome
// except when it pointed away from the outcome while the selected bank still
// predicted correctly. The global history shifts in the outcome on update.
//
// The two direction banks form the PHT that the context switch framework
// manages. They are held in flip-flops, flattened as entries 0..N-1 (not-taken
// bank) and N..2N-1 (taken bank), so that wipe_en can return every entry set
// in wipe_mask to its reset state in one clock. flip_vec reports each entry
// whose direction (counter MSB) changes at this clock edge, from training or
// from a wipe; upd_flip says that the training update alone flipped one.
//
// Timing: pred_taken/pred_ghr are combinational from pred_pc. Updates and
// wipes take effect at the next rising edge; a wipe wins over a training
// update of the same entry. The core hands back the history it received with
// the prediction (upd_ghr), so training indexes the same entries.
//
// The 128-entry size is the configuration the framework was evaluated with;
// that every table has 128 entries, the history length (index width), the
// PC bits used (word address bits [8:2]) and the reset states are this
// design's choices.
module bimode_predictor
  import csaf_pkg::*;
#(
  parameter int unsigned DIR_ENTRIES    = 128,
  parameter int unsigned CHOICE_ENTRIES = 128
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // prediction
  input  pc_t                           pred_pc,
  output logic                          pred_taken,
  output logic [$clog2(DIR_ENTRIES)-1:0] pred_ghr,
  // training with the resolved outcome
  input  logic                          upd_valid,
  input  pc_t                           upd_pc,
  input  logic [$clog2(DIR_ENTRIES)-1:0] upd_ghr,
  input  logic                          upd_taken,
  // selective wipe of direction PHT entries
  input  logic                          wipe_en,
  input  logic [2*DIR_ENTRIES-1:0]      wipe_mask,
  // direction-change report
  output logic [2*DIR_ENTRIES-1:0]      flip_vec,
  output logic                          upd_flip
);
  localparam int unsigned HW = $clog2(DIR_ENTRIES);
  localparam int unsigned CW = $clog2(CHOICE_ENTRIES);
  localparam int unsigned NE = 2 * DIR_ENTRIES;

  ctr2_e         choice  [CHOICE_ENTRIES];
  ctr2_e         pht     [NE];
  ctr2_e         pht_nxt [NE];
  logic [HW-1:0] ghr;

  // ---------------------------------------------------------------- predict
  logic [CW-1:0] p_cidx;
  logic [HW-1:0] p_didx;
  logic          p_sel;   // 1: taken bank
  always_comb begin
    p_cidx     = pred_pc[CW+1:2];
    p_didx     = pred_pc[HW+1:2] ^ ghr;
    p_sel      = choice[p_cidx][1];
    pred_taken = pht[{p_sel, p_didx}][1];
    pred_ghr   = ghr;
  end

  // ----------------------------------------------------------------- update
  logic [CW-1:0] u_cidx;
  logic [HW-1:0] u_didx;
  logic          u_sel;
  logic [HW:0]   u_eidx;      // flat entry index of the trained counter
  ctr2_e         u_old, u_new;
  logic          u_bank_ok;   // selected bank predicted the outcome
  logic          u_choice_wr;
  always_comb begin
    u_cidx      = upd_pc[CW+1:2];
    u_didx      = upd_pc[HW+1:2] ^ upd_ghr;
    u_sel       = choice[u_cidx][1];
    u_eidx      = {u_sel, u_didx};
    u_old       = pht[u_eidx];
    u_new       = ctr2_step(u_old, upd_taken);
    u_bank_ok   = (u_old[1] == upd_taken);
    u_choice_wr = upd_valid && !((u_sel != upd_taken) && u_bank_ok);
    upd_flip    = upd_valid && (u_new[1] != u_old[1]);
  end

  always_comb begin
    for (int e = 0; e < NE; e++) begin
      pht_nxt[e] = pht[e];
      if (upd_valid && (e == int'(u_eidx))) pht_nxt[e] = u_new;
      if (wipe_en && wipe_mask[e])          pht_nxt[e] = (e < DIR_ENTRIES) ? NT_BANK_INIT : T_BANK_INIT;
      flip_vec[e] = pht_nxt[e][1] ^ pht[e][1];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int e = 0; e < NE; e++)             pht[e]    <= (e < DIR_ENTRIES) ? NT_BANK_INIT : T_BANK_INIT;
      for (int c = 0; c < CHOICE_ENTRIES; c++) choice[c] <= CHOICE_INIT;
      ghr <= '0;
    end else begin
      for (int e = 0; e < NE; e++) pht[e] <= pht_nxt[e];
      if (u_choice_wr) choice[u_cidx] <= ctr2_step(choice[u_cidx], upd_taken);
      if (upd_valid)   ghr <= {ghr[HW-2:0], upd_taken};
    end
  end
endmodule
