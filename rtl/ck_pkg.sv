// ck_pkg: shared types and sizing functions for the ColumnKeeper
// ColumnDisturb mitigation.
//
// ColumnKeeper sits in the memory controller. It watches every DRAM
// activation, tracks it at subarray granularity, and asks the scheduler
// for one preventive ACT+PRE at a time to rows of the subarrays that an
// open-bitline activation disturbs (the activated subarray and its two
// neighbours). This package holds the command and event encodings shared
// by the modules and the functions that derive the preventive refresh
// threshold N_PR and the coin-flip threshold for P_PR from the DRAM
// geometry. The default numbers are those of the evaluated system:
// DDR4, 2 ranks, 16 banks per rank, 64 subarrays per bank, 1K rows per
// subarray, ColumnDisturb threshold N_CD = 1M activations.
package ck_pkg;

  // Which trigger mechanism the top instantiates.
  typedef enum logic {
    CK_D = 1'b0,   // deterministic: per-subarray even/odd activation counters
    CK_P = 1'b1    // probabilistic: coin flip on every activation
  } ck_variant_e;

  // Commands the memory controller reports to ColumnKeeper.
  typedef enum logic [1:0] {
    CMD_ACT       = 2'd0,  // ACT to a row whose subarray is known (also ColumnKeeper's own ACT+PRE)
    CMD_BANK_WIDE = 2'd1,  // activation that may hit any subarray of one bank
                           // (same-bank RFM, or an ACT to a row of unknown subarray)
    CMD_RANK_WIDE = 2'd2   // activation that may hit any subarray of any bank of a rank
                           // (all-bank RFM, or an extra REF issued by a RowHammer mitigation)
  } ck_cmd_e;

  // Per-subarray events fed to a trigger, one per clock cycle.
  typedef enum logic {
    EV_ACT  = 1'b0,  // open-bitline activation of subarray k: disturbs k-1, k and k+1
    EV_SELF = 1'b1   // "any subarray" activation, applied to subarray k alone
  } ck_event_e;

  // Evaluated defaults.
  localparam int unsigned DEF_RANKS       = 2;
  localparam int unsigned DEF_BANKS       = 16;      // 4 bank groups x 4 banks
  localparam int unsigned DEF_SA_PER_BANK = 64;
  localparam int unsigned DEF_ROWS_PER_SA = 1024;
  localparam longint unsigned DEF_N_CD    = 64'd1048576;   // 1M
  localparam int unsigned DEF_REF_POSTPONE = 8;      // DDR4 may postpone 8 REFs
  localparam int unsigned DEF_REFS_PER_WINDOW = 8192; // REF commands per 64 ms window (DDR4)

  // Rows refreshed by one REF command in one bank (Q).
  function automatic int unsigned rows_per_ref(int unsigned sa_per_bank,
                                               int unsigned rows_per_sa,
                                               int unsigned refs_per_window);
    return (sa_per_bank * rows_per_sa) / refs_per_window;
  endfunction

  // Preventive refresh threshold of CK-D:
  //   N_PR = floor((N_CD - 2S - POSTPONE*Q) / S)
  // 2S covers the periodic REFs in a window, POSTPONE*Q the REFs that may
  // be postponed into the next window. Rounding down keeps it safe.
  function automatic int unsigned ckd_npr(longint unsigned n_cd,
                                          int unsigned rows_per_sa,
                                          int unsigned sa_per_bank,
                                          int unsigned ref_postpone,
                                          int unsigned refs_per_window);
    longint unsigned budget;
    budget = n_cd - 2 * rows_per_sa
             - ref_postpone * rows_per_ref(sa_per_bank, rows_per_sa, refs_per_window);
    return int'(budget / 64'(rows_per_sa));
  endfunction

endpackage
