// ck_attack_env: one ColumnKeeper top under a ColumnDisturb attack, with a
// scheduler model and a model of the disturbance each DRAM row receives.
//
// Geometry: 1 rank, 1 bank, 8 subarrays of 16 rows, N_CD = 512, so CK-D
// works with N_PR = (512 - 2*16) / 16 = 30. CK-P uses P_PR = PPR_TH/256 (1/8 by default).
//
// Disturbance model (open bitlines): an ACT to a row of subarray k adds
// one hammer to both halves of every other row of k, to the even half of
// every row of k-1 and to the odd half of every row of k+1; the activated
// row itself is restored (its counts return to 0). ColumnKeeper's
// preventive ACT+PRE is such an ACT too. The environment records the
// largest count any half of any row reaches; ColumnKeeper is secure when
// it stays below N_CD.
//
// Attack (ATTACK selects): 0 hammers one row of subarray 3; 1 alternates
// between subarrays 2 and 4 (the double-counting pattern around 3);
// 2 hammers random rows across subarrays 2, 3 and 4 with occasional
// bank-wide commands (same-bank RFM). The scheduler takes a request when
// its random ready is high and issues its ACT before the next attacker
// ACT. After NACT attacker ACTs, `done` rises.
module ck_attack_env
  import ck_pkg::*;
#(
  parameter ck_variant_e VARIANT = CK_D,
  parameter int unsigned ATTACK  = 0,
  parameter int unsigned PPR_TH  = 32,
  parameter int unsigned NACT    = 20000
) (
  input  logic clk,
  input  logic rst_n,
  output logic done,
  output int   hc_max,
  output int   n_refresh,
  output int   n_act
);
  localparam int unsigned SPB = 8, S = 16, NCD = 512, ROWW = 7;

  logic            cmd_valid, cmd_ready, cmd_busy;
  ck_cmd_e         cmd_kind;
  logic            cmd_rank, cmd_bank;
  logic [ROWW-1:0] cmd_row;
  logic            pr_valid, pr_ready;
  logic            pr_rank, pr_bank;
  logic [ROWW-1:0] pr_row;

  columnkeeper #(.VARIANT(VARIANT), .RANKS(1), .BANKS(1), .SA_PER_BANK(SPB), .ROWS_PER_SA(S),
                 .N_CD(NCD), .RAND_W(8), .PPR_TH(PPR_TH), .FIFO_DEPTH(8)) dut (.*);

  int he [SPB*S], ho [SPB*S];
  int pend [$];
  logic accepted;

  function automatic void hammer(int row);
    int k;
    k = row / S;
    for (int r = 0; r < S; r++) begin
      int v;
      v = k * S + r;
      if (v == row) begin he[v] = 0; ho[v] = 0; end
      else begin he[v]++; ho[v]++; end
      if (k > 0)       he[(k - 1) * S + r]++;
      if (k < SPB - 1) ho[(k + 1) * S + r]++;
    end
    for (int r = 0; r < S; r++) begin
      int a, b;
      if (k > 0) begin a = he[(k - 1) * S + r]; if (a > hc_max) hc_max = a; end
      if (k < SPB - 1) begin b = ho[(k + 1) * S + r]; if (b > hc_max) hc_max = b; end
      a = he[k * S + r]; b = ho[k * S + r];
      if (a > hc_max) hc_max = a;
      if (b > hc_max) hc_max = b;
    end
  endfunction

  always @(posedge clk) begin
    accepted <= cmd_valid && cmd_ready;
    if (rst_n && pr_valid && pr_ready) begin
      pend.push_back(int'(pr_row));
      n_refresh++;
    end
    if (rst_n && cmd_valid && cmd_ready && cmd_kind == CMD_ACT) hammer(int'(cmd_row));
  end

  initial begin
    for (int i = 0; i < SPB * S; i++) begin he[i] = 0; ho[i] = 0; end
    hc_max = 0; n_refresh = 0; n_act = 0; done = 0;
    cmd_valid = 0; cmd_kind = CMD_ACT; cmd_rank = 0; cmd_bank = 0; cmd_row = 0; pr_ready = 0;
    wait (rst_n);
    @(negedge clk);
    while (n_act < NACT) begin
      int row;
      if (pend.size() != 0) begin
        row = pend.pop_front();
        cmd_kind = CMD_ACT;
      end else begin
        case (ATTACK)
          0: row = 3 * S + 5;
          1: row = ((n_act % 2) ? 4 : 2) * S + $urandom_range(S - 1);
          default: row = (2 + $urandom_range(2)) * S + $urandom_range(S - 1);
        endcase
        cmd_kind = (ATTACK == 2 && $urandom_range(199) == 0) ? CMD_BANK_WIDE : CMD_ACT;
        n_act++;
      end
      cmd_row = ROWW'(row);
      cmd_valid = 1;
      while (1) begin
        pr_ready = $urandom_range(1) == 0;
        @(negedge clk);
        if (accepted) break;
      end
      cmd_valid = 0;
    end
    pr_ready = 1;
    repeat (40) @(negedge clk);
    done = 1;
  end
endmodule
