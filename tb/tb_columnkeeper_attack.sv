// tb_columnkeeper_attack: ColumnDisturb attacks against both variants.
//
// Runs six ck_attack_env instances in parallel: CK-D and CK-P (P_PR =
// 1/8) under the three attack patterns (one hammered row; alternating
// neighbours; random rows over three consecutive subarrays with
// same-bank RFMs). Every row's largest per-half hammer count since its
// last refresh must stay below N_CD = 512. For CK-D the bound is
// deterministic; for CK-P at this P_PR the chance of a failure over the
// run is negligible. The testbench also prints how many preventive
// refreshes each variant needed for the same attack.
module tb_columnkeeper_attack;
  import ck_pkg::*;
  localparam int unsigned NCD = 512;

  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;
  logic [5:0] done;
  int hc [6], nref [6], nact [6];

  always #5 clk = ~clk;

  for (genvar a = 0; a < 3; a++) begin : g_att
    ck_attack_env #(.VARIANT(CK_D), .ATTACK(a)) u_d (
      .clk, .rst_n, .done(done[2*a]), .hc_max(hc[2*a]), .n_refresh(nref[2*a]), .n_act(nact[2*a]));
    ck_attack_env #(.VARIANT(CK_P), .ATTACK(a)) u_p (
      .clk, .rst_n, .done(done[2*a+1]), .hc_max(hc[2*a+1]), .n_refresh(nref[2*a+1]),
      .n_act(nact[2*a+1]));
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    wait (&done);
    for (int i = 0; i < 6; i++) begin
      $display("attack %0d %s: %0d attacker ACTs, %0d preventive refreshes, max hammers %0d (N_CD %0d)",
               i / 2, (i % 2) ? "CK-P" : "CK-D", nact[i], nref[i], hc[i], NCD);
      checks++;
      if (hc[i] >= NCD) begin
        failures++;
        $display("  ColumnDisturb threshold reached");
      end
      checks++;
      if (nref[i] == 0) begin
        failures++;
        $display("  no preventive refresh issued");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
