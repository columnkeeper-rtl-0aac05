// columnkeeper: memory-controller-side ColumnDisturb mitigation.
//
// ColumnDisturb flips bits in every cell that shares a bitline with a
// hammered row. With open bitlines, the sense amplifiers between two
// subarrays serve alternate columns of both, so an activation in
// subarray k disturbs all of k, the even columns of k-1 and the odd
// columns of k+1. ColumnKeeper keeps every row of every such subarray
// refreshed before the disturbance threshold N_CD can be reached, one
// preventive ACT+PRE at a time:
//
//   command in -> ck_event_seq -> trigger (CK-D or CK-P) -> ck_rpt -> ck_req_fifo -> request out
//
// ck_event_seq turns each reported command into per-subarray events; the
// trigger decides *when* a subarray needs a preventive refresh (CK-D:
// even/odd activation counters against N_PR; CK-P: a coin flip with
// probability P_PR); the Row Pointer Table decides *which* row (round
// robin); the queue holds the resulting row addresses until the memory
// request scheduler takes them. The structure and the two triggers follow
// the paper; the command encoding, the sweep of rank/bank-wide commands,
// the queue and its handshake are this design's choices.
//
// VARIANT selects the trigger at elaboration (default CK-D). The defaults
// are the evaluated DDR4 system: 2 ranks x 16 banks x 64 subarrays x 1024
// rows (K = 2048 subarrays), N_CD = 1M, hence N_PR = 1021 for CK-D and
// P_PR = 1385/2^20 (about 1.32e-3) for CK-P.
//
// Interface and timing:
//  * cmd_*: every ACT the controller issues, including the preventive
//    ACT+PRE it issues on ColumnKeeper's behalf (these count as ordinary
//    activations), and every RFM / extra REF as a bank- or rank-wide
//    command. Valid/ready; cmd_ready drops during a sweep and while the
//    queue has fewer than three free places.
//  * pr_*: preventive refresh requests (rank, bank, row within the bank),
//    valid/ready. A request caused by an ACT accepted in cycle t is
//    offered from cycle t+1.
//  * cmd_busy: a bank/rank-wide sweep is in progress.
module columnkeeper
  import ck_pkg::*;
#(
  parameter ck_variant_e VARIANT      = CK_D,
  parameter int unsigned RANKS        = DEF_RANKS,
  parameter int unsigned BANKS        = DEF_BANKS,
  parameter int unsigned SA_PER_BANK  = DEF_SA_PER_BANK,
  parameter int unsigned ROWS_PER_SA  = DEF_ROWS_PER_SA,
  parameter longint unsigned N_CD     = DEF_N_CD,
  parameter int unsigned N_PR         = ckd_npr(N_CD, ROWS_PER_SA, SA_PER_BANK,
                                                DEF_REF_POSTPONE, DEF_REFS_PER_WINDOW),
  parameter int unsigned RAND_W       = 20,
  parameter int unsigned PPR_TH       = 1385,
  parameter logic [31:0] SEED         = 32'h2545_F491,
  parameter int unsigned FIFO_DEPTH   = 16,
  localparam int unsigned K    = RANKS * BANKS * SA_PER_BANK,
  localparam int unsigned KW   = (K > 1) ? $clog2(K) : 1,
  localparam int unsigned RKW  = (RANKS > 1) ? $clog2(RANKS) : 1,
  localparam int unsigned BKW  = (BANKS > 1) ? $clog2(BANKS) : 1,
  localparam int unsigned RW   = (ROWS_PER_SA > 1) ? $clog2(ROWS_PER_SA) : 1,
  localparam int unsigned ROWW = $clog2(SA_PER_BANK * ROWS_PER_SA)
) (
  input  logic            clk,
  input  logic            rst_n,
  // commands reported by the memory controller
  input  logic            cmd_valid,
  output logic            cmd_ready,
  input  ck_cmd_e         cmd_kind,
  input  logic [RKW-1:0]  cmd_rank,
  input  logic [BKW-1:0]  cmd_bank,
  input  logic [ROWW-1:0] cmd_row,
  output logic            cmd_busy,
  // preventive refresh (ACT+PRE) requests to the memory request scheduler
  output logic            pr_valid,
  input  logic            pr_ready,
  output logic [RKW-1:0]  pr_rank,
  output logic [BKW-1:0]  pr_bank,
  output logic [ROWW-1:0] pr_row
);

  localparam int unsigned QW   = KW + RW;          // queue entry: {subarray, row in subarray}
  localparam int unsigned CNTW = $clog2(FIFO_DEPTH + 1);

  logic                 room;
  logic [CNTW-1:0]      free;
  logic                 ev_valid;
  ck_event_e            ev_kind;
  logic [KW-1:0]        ev_sa;
  logic [2:0]           fire;
  logic [2:0][KW-1:0]   fire_idx;
  logic [2:0][RW-1:0]   rpt_row;
  logic [2:0][QW-1:0]   push_data;
  logic [QW-1:0]        q_out;

  assign room = free >= CNTW'(3);

  ck_event_seq #(
    .RANKS(RANKS), .BANKS(BANKS), .SA_PER_BANK(SA_PER_BANK), .ROWS_PER_SA(ROWS_PER_SA)
  ) u_seq (
    .clk, .rst_n,
    .cmd_valid, .cmd_ready, .cmd_kind, .cmd_rank, .cmd_bank, .cmd_row,
    .room, .ev_valid, .ev_kind, .ev_sa, .busy(cmd_busy)
  );

  if (VARIANT == CK_D) begin : g_ckd
    ckd_trigger #(.K(K), .SA_PER_BANK(SA_PER_BANK), .N_PR(N_PR)) u_trig (
      .clk, .rst_n, .ev_valid, .ev_kind, .ev_sa, .fire, .fire_idx
    );
  end else begin : g_ckp
    ckp_trigger #(.K(K), .SA_PER_BANK(SA_PER_BANK), .RAND_W(RAND_W),
                  .PPR_TH(PPR_TH), .SEED(SEED)) u_trig (
      .clk, .rst_n, .ev_valid, .ev_kind, .ev_sa, .fire, .fire_idx
    );
  end

  ck_rpt #(.K(K), .S(ROWS_PER_SA), .NPROBE(3)) u_rpt (
    .clk, .rst_n,
    .probe_valid(fire), .probe_idx(fire_idx), .probe_row(rpt_row)
  );

  always_comb begin
    for (int s = 0; s < 3; s++) push_data[s] = {fire_idx[s], rpt_row[s]};
  end

  ck_req_fifo #(.W(QW), .DEPTH(FIFO_DEPTH)) u_q (
    .clk, .rst_n,
    .push_valid(fire), .push_data, .free,
    .out_valid(pr_valid), .out_ready(pr_ready), .out_data(q_out)
  );

  // Split {global subarray, row in subarray} into rank, bank, row in bank.
  always_comb begin
    logic [KW-1:0] sa;
    sa      = q_out[QW-1 -: KW];
    pr_rank = RKW'(int'(sa) / (BANKS * SA_PER_BANK));
    pr_bank = BKW'((int'(sa) / SA_PER_BANK) % BANKS);
    pr_row  = ROWW'((int'(sa) % SA_PER_BANK) * ROWS_PER_SA + int'(q_out[RW-1:0]));
  end

  initial begin
    assert (FIFO_DEPTH >= 3) else $error("FIFO_DEPTH must be at least 3");
    assert (SA_PER_BANK >= 2) else $error("need at least two subarrays per bank");
  end

endmodule
