// tb_columnkeeper_full: the ColumnKeeper top at its default parameters.
//
// Default build: CK-D, 2 ranks x 16 banks x 64 subarrays x 1024 rows,
// N_CD = 1M, so N_PR = 1021. The scenario, with the request latency
// checked in cycles:
//  1. 1020 ACTs to one row of subarray 10 (rank 1, bank 5): no request.
//     The 1021st ACT brings subarray 10 (both halves), 9 (even half) and
//     11 (odd half) to N_PR: exactly three requests, row 0 of each
//     subarray, the first offered in the cycle after the ACT is taken.
//  2. The scheduler issues those three refreshes back as ACTs, which
//     count like any other ACT; 1019 more ACTs then yield row 1 of the
//     same subarrays (round-robin RPT).
//  3. Double counting: 1020 ACTs alternate between subarrays 20 and 22.
//     Subarray 21 has seen 2040 activations in all but only 1020 on each
//     half of its bitlines, so nothing fires. One more ACT to 20 fires
//     19, 20 and 21.
//  4. A rank-wide command (all-bank RFM) sweeps all 1024 subarrays of
//     rank 0 in 1024 cycles, adding one count to each: subarrays 22 and 23,
//     left at 1020 by step 3, fire; nothing else does.
//  5. Bank edge: 1021 ACTs to subarray 0 of bank 3 fire subarrays 0 and 1
//     only; subarray 63 of bank 2 is in another bank and is left alone.
//  6. A bank-wide command (same-bank RFM) sweeps the 64 subarrays of one
//     bank in 64 cycles and, with low counts, issues nothing.
module tb_columnkeeper_full;
  import ck_pkg::*;

  logic        clk = 0, rst_n = 0;
  logic        cmd_valid, cmd_ready, cmd_busy;
  ck_cmd_e     cmd_kind;
  logic        cmd_rank;
  logic [3:0]  cmd_bank;
  logic [15:0] cmd_row;
  logic        pr_valid, pr_ready;
  logic        pr_rank;
  logic [3:0]  pr_bank;
  logic [15:0] pr_row;
  int checks = 0, failures = 0;
  int got [$];               // requests seen: rank<<20 | bank<<16 | row
  longint cyc = 0, acc_cyc = 0, first_req_cyc = -1;

  columnkeeper dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  assign pr_ready = 1'b1;
  always @(posedge clk) begin
    if (rst_n && pr_valid && pr_ready) begin
      got.push_back((int'(pr_rank) << 20) | (int'(pr_bank) << 16) | int'(pr_row));
      if (first_req_cyc < 0) first_req_cyc = cyc;
    end
  end

  task automatic send(ck_cmd_e kind, int rank, int bank, int row);
    #1;                         // never drive in the same time step as a clock edge
    cmd_valid = 1; cmd_kind = kind;
    cmd_rank = 1'(rank); cmd_bank = 4'(bank); cmd_row = 16'(row);
    do @(posedge clk); while (!cmd_ready);
    acc_cyc = cyc;
    #1;
    cmd_valid = 0;
  endtask

  task automatic expect_reqs(string what, int exp [$]);
    repeat (4) @(posedge clk);
    while (cmd_busy) @(posedge clk);
    repeat (4) @(posedge clk);
    checks++;
    if (got.size() != exp.size()) begin
      failures++;
      $display("%s: %0d requests, expected %0d", what, got.size(), exp.size());
    end else begin
      foreach (exp[i]) begin
        checks++;
        if (got[i] != exp[i]) begin
          failures++;
          $display("%s: request %0d = %h, expected %h", what, i, got[i], exp[i]);
        end
      end
    end
  endtask

  function automatic int addr(int rank, int bank, int sa, int row);
    return (rank << 20) | (bank << 16) | (sa * 1024 + row);
  endfunction

  initial begin
    cmd_valid = 0; cmd_kind = CMD_ACT; cmd_rank = 0; cmd_bank = 0; cmd_row = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    // 1. threshold crossing
    for (int n = 0; n < 1020; n++) send(CMD_ACT, 1, 5, 10 * 1024 + 77);
    expect_reqs("below N_PR", '{});
    first_req_cyc = -1;
    send(CMD_ACT, 1, 5, 10 * 1024 + 77);
    expect_reqs("at N_PR", '{addr(1, 5, 9, 0), addr(1, 5, 10, 0), addr(1, 5, 11, 0)});
    checks++;
    if (first_req_cyc != acc_cyc + 1) begin
      failures++;
      $display("first request %0d cycles after the ACT, expected 1", first_req_cyc - acc_cyc);
    end
    // 2. feed the refreshes back, then a second round
    foreach (got[i]) send(CMD_ACT, got[i] >> 20, (got[i] >> 16) & 15, got[i] & 16'hffff);
    got.delete();
    // the three refresh ACTs left 2 counts on each half of subarray 10, on the
    // even half of 9 and on the odd half of 11: 1019 more ACTs reach N_PR
    for (int n = 0; n < 1018; n++) send(CMD_ACT, 1, 5, 10 * 1024 + 3);
    expect_reqs("second round, below N_PR", '{});
    send(CMD_ACT, 1, 5, 10 * 1024 + 3);
    expect_reqs("second round", '{addr(1, 5, 9, 1), addr(1, 5, 10, 1), addr(1, 5, 11, 1)});
    got.delete();

    // 3. double counting
    for (int n = 0; n < 1020; n++) begin
      send(CMD_ACT, 0, 2, 20 * 1024 + n);
      send(CMD_ACT, 0, 2, 22 * 1024 + n);
    end
    expect_reqs("double counting", '{});
    send(CMD_ACT, 0, 2, 20 * 1024);
    expect_reqs("after double counting", '{addr(0, 2, 19, 0), addr(0, 2, 20, 0), addr(0, 2, 21, 0)});
    got.delete();

    // 4. rank-wide sweep
    begin
      longint t0;
      t0 = cyc;
      send(CMD_RANK_WIDE, 0, 0, 0);
      while (!cmd_busy) @(posedge clk);
      while (cmd_busy) @(posedge clk);
      checks++;
      if (cyc - t0 < 1024 || cyc - t0 > 1030) begin
        failures++;
        $display("rank-wide sweep took %0d cycles, expected 1024 + handshake", cyc - t0);
      end
      // the sweep adds one count to both halves of every subarray of rank 0:
      // subarray 22 (1020 on both halves) and 23 (1020 on its odd half) fire
      expect_reqs("rank sweep", '{addr(0, 2, 22, 0), addr(0, 2, 23, 0)});
      got.delete();
    end

    // 5. bank edge
    for (int n = 0; n < 1021; n++) send(CMD_ACT, 0, 3, 5);
    expect_reqs("bank edge", '{addr(0, 3, 0, 0), addr(0, 3, 1, 0)});

    got.delete();

    // 6. bank-wide sweep (same-bank RFM) of rank 1, bank 5: 64 subarrays in
    //    64 cycles; every count there is far below N_PR, so nothing fires
    begin
      longint t0;
      send(CMD_BANK_WIDE, 1, 5, 0);
      t0 = cyc;
      while (cmd_busy) @(posedge clk);
      checks++;
      if (cyc - t0 < 63 || cyc - t0 > 66) begin
        failures++;
        $display("bank-wide sweep took %0d cycles, expected 64", cyc - t0);
      end
      expect_reqs("bank sweep", '{});
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
