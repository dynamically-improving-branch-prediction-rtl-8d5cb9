// csaf_pkg: types and constants shared by the context switch accuracy
// framework (CSAF) and the Bi-Mode predictor it manages.
//
// The framework watches context switches, remembers for each PID-to-PID
// transition how many pattern history table (PHT) entries flipped direction
// in the time slice that followed it, and keeps a 2-bit saturating counter
// per transition that decides whether the PHT entries modified since the
// incoming process last ran are wiped. The PC width follows the 32-bit ARMv7
// core the framework was evaluated with; the PID width follows the 32-bit
// ARM software thread ID registers. Counter encodings are this design's own.
package csaf_pkg;

  localparam int unsigned PC_W  = 32;
  localparam int unsigned PID_W = 32;

  typedef logic [PC_W-1:0]  pc_t;
  typedef logic [PID_W-1:0] pid_t;

  // 2-bit saturating counter states. "Taken" is the upper bit.
  typedef enum logic [1:0] {
    CTR_SNT = 2'b00,   // strongly not taken
    CTR_WNT = 2'b01,   // weakly not taken
    CTR_WT  = 2'b10,   // weakly taken
    CTR_ST  = 2'b11    // strongly taken
  } ctr2_e;

  // Saturating increment / decrement of a 2-bit counter.
  function automatic ctr2_e ctr2_step(ctr2_e c, logic up);
    ctr2_e r;
    if (up) r = (c == CTR_ST)  ? CTR_ST  : ctr2_e'(c + 2'd1);
    else    r = (c == CTR_SNT) ? CTR_SNT : ctr2_e'(c - 2'd1);
    return r;
  endfunction

  // Reset ("default") state of the PHT entries. Entry indices 0..N-1 form the
  // not-taken direction bank, N..2N-1 the taken direction bank.
  localparam ctr2_e NT_BANK_INIT = CTR_WNT;
  localparam ctr2_e T_BANK_INIT  = CTR_WT;
  localparam ctr2_e CHOICE_INIT  = CTR_WNT;

endpackage
