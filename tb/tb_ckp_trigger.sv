// tb_ckp_trigger: self-checking testbench for the CK-P trigger.
//
// Two instances run side by side on the same events:
//  * a small one (2 banks x 8 subarrays, P_PR = 64/256) whose every coin
//    is predicted by a reference xorshift32 generator written from its
//    definition; each cycle the expected fire pattern (k-1, k, k+1, with
//    the neighbours beyond a bank edge dropped) and indices are compared;
//  * one at the default parameters (K = 2048, P_PR = 1385/2^20, the
//    paper's 1.32e-3), whose hit rate over 400k events must fall within
//    20% of P_PR.
// Idle cycles (no event) must never fire.
module tb_ckp_trigger;
  import ck_pkg::*;
  localparam int unsigned K = 16, SPB = 8, KW = 4, RW = 8, TH = 64;
  localparam logic [31:0] SEED = 32'h1234_5678;
  localparam int unsigned NEV = 400000;

  logic clk = 0, rst_n = 0;
  logic               ev_valid;
  ck_event_e          ev_kind;
  logic [KW-1:0]      ev_sa;
  logic [2:0]         fire;
  logic [2:0][KW-1:0] fire_idx;
  logic [10:0]        ev_sa_big;
  logic [2:0]         fire_big;
  logic [2:0][10:0]   fire_idx_big;
  int checks = 0, failures = 0;
  int hits = 0, hits_big = 0, edges = 0, events = 0;
  logic [31:0] model;

  ckp_trigger #(.K(K), .SA_PER_BANK(SPB), .RAND_W(RW), .PPR_TH(TH), .SEED(SEED)) dut (.*);
  ckp_trigger big (
    .clk, .rst_n, .ev_valid, .ev_kind, .ev_sa(ev_sa_big), .fire(fire_big), .fire_idx(fire_idx_big)
  );

  always #5 clk = ~clk;

  function automatic logic [31:0] xs32(logic [31:0] x);
    x = x ^ (x << 13);
    x = x ^ (x >> 17);
    x = x ^ (x << 5);
    return x;
  endfunction

  always @(posedge clk) model <= rst_n ? xs32(model) : SEED;

  initial begin
    repeat (NEV + 10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ev_valid = 0; ev_kind = EV_ACT; ev_sa = '0; ev_sa_big = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < NEV; n++) begin
      int sa;
      bit hit;
      logic [2:0] exp;
      sa        = $urandom_range(K - 1);
      ev_sa     = KW'(sa);
      ev_sa_big = 11'($urandom_range(2047));
      ev_kind   = ($urandom_range(3) == 0) ? EV_SELF : EV_ACT;
      ev_valid  = (n % 16) != 15;
      #1;
      hit = ev_valid && (model[RW-1:0] < TH);
      exp = {hit && (sa % SPB != SPB - 1), hit, hit && (sa % SPB != 0)};
      checks++;
      if (fire !== exp ||
          (exp[0] && int'(fire_idx[0]) != sa - 1) ||
          (exp[1] && int'(fire_idx[1]) != sa) ||
          (exp[2] && int'(fire_idx[2]) != sa + 1)) begin
        failures++;
        if (failures < 10)
          $display("event %0d sa %0d: fire %b expected %b", n, sa, fire, exp);
      end
      if (hit) hits++;
      if (hit && exp != 3'b111) edges++;
      if (ev_valid) events++;
      if (!ev_valid && fire_big != 0) begin
        checks++;
        failures++;
        $display("default instance fired without an event");
      end
      if (fire_big[1]) hits_big++;
      @(negedge clk);
    end
    begin
      real p, pexp;
      p    = real'(hits_big) / real'(events);
      pexp = 1385.0 / 1048576.0;
      $display("small: hits %0d of %0d events (%0d at a bank edge); default: rate %e, P_PR %e",
               hits, events, edges, p, pexp);
      checks++;
      if (p < 0.8 * pexp || p > 1.2 * pexp) begin
        failures++;
        $display("default-parameter hit rate off P_PR");
      end
      checks++;
      if (hits < events / 5 || hits > events / 3 || edges == 0) begin
        failures++;
        $display("small-instance hit rate off 1/4");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
