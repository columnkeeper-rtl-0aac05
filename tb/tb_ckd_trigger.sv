// tb_ckd_trigger: self-checking testbench for the CK-D trigger.
//
// Two banks of 8 subarrays (K = 16) with N_PR = 5. A reference model
// keeps its own even and odd counts per subarray, applies the
// open-bitline rule (ACT to k: both counts of k, even of k-1, odd of k+1,
// never across a bank edge), fires when the larger count of a touched
// subarray reaches N_PR and then clears both counts. Every cycle the
// fire vector and the indices of the firing slots are compared.
//
// Directed part: the "double counting" pattern. ACTs alternate between
// subarrays 1 and 3, so subarray 2 sees 4 activations on its odd and 4
// on its even bitlines: 8 in total, but no more than 4 on any bitline.
// It must not fire until one side reaches 5. Random part: ACT and
// EV_SELF events crowded onto a few subarrays so that the bank edges and
// simultaneous firings of k-1, k and k+1 all occur.
module tb_ckd_trigger;
  import ck_pkg::*;
  localparam int unsigned K = 16, SPB = 8, NPR = 5, KW = 4;

  logic clk = 0, rst_n = 0;
  logic               ev_valid;
  ck_event_e          ev_kind;
  logic [KW-1:0]      ev_sa;
  logic [2:0]         fire;
  logic [2:0][KW-1:0] fire_idx;
  int checks = 0, failures = 0;
  int me [K], mo [K];
  logic [2:0] last_fire;
  int n_fire = 0, n_multi = 0, n_edge = 0, n_self_fire = 0;

  ckd_trigger #(.K(K), .SA_PER_BANK(SPB), .N_PR(NPR)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // drive one event, compare, update the model
  task automatic event_(input ck_event_e kind, input int sa, input bit valid = 1);
    bit   exp_fire [3];
    int   idx [3];
    bit   t_e [3], t_o [3];
    int   ne, no;
    ev_valid = valid;
    ev_kind  = kind;
    ev_sa    = KW'(sa);
    idx[0] = sa - 1; idx[1] = sa; idx[2] = sa + 1;
    t_e = '{0, 1, 0};
    t_o = '{0, 1, 0};
    if (kind == EV_ACT) begin
      t_e[0] = (sa % SPB) != 0;
      t_o[2] = (sa % SPB) != SPB - 1;
    end
    for (int s = 0; s < 3; s++) begin
      exp_fire[s] = 0;
      if (valid && (t_e[s] || t_o[s])) begin
        ne = me[idx[s]] + t_e[s];
        no = mo[idx[s]] + t_o[s];
        if (ne >= NPR || no >= NPR) begin
          exp_fire[s] = 1;
          ne = 0;
          no = 0;
        end
        me[idx[s]] = ne;
        mo[idx[s]] = no;
      end
    end
    #1;
    for (int s = 0; s < 3; s++) begin
      checks++;
      if (fire[s] != exp_fire[s] || (exp_fire[s] && int'(fire_idx[s]) != idx[s])) begin
        failures++;
        $display("sa %0d kind %0d slot %0d: fire %0b idx %0d, expected %0b idx %0d",
                 sa, kind, s, fire[s], fire_idx[s], exp_fire[s], idx[s]);
      end
    end
    last_fire = {exp_fire[2], exp_fire[1], exp_fire[0]};
    if (exp_fire[0] + exp_fire[1] + exp_fire[2] > 1) n_multi++;
    if (exp_fire[0] || exp_fire[1] || exp_fire[2]) n_fire++;
    if (kind == EV_SELF && exp_fire[1]) n_self_fire++;
    if ((sa % SPB == 0 || sa % SPB == SPB - 1) && valid) n_edge++;
    @(negedge clk);
  endtask

  initial begin
    for (int i = 0; i < K; i++) begin me[i] = 0; mo[i] = 0; end
    ev_valid = 0; ev_kind = EV_ACT; ev_sa = '0;
    @(negedge clk);
    @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    // double counting: 4 + 4 activations around subarray 2, no firing of 2
    for (int n = 0; n < 4; n++) begin
      event_(EV_ACT, 1);
      checks++;
      if (last_fire[2]) begin failures++; $display("subarray 2 fired at odd count %0d", n + 1); end
      event_(EV_ACT, 3);
      checks++;
      if (last_fire[0]) begin failures++; $display("subarray 2 fired at even count %0d", n + 1); end
    end
    // the fifth ACT to 1 brings 0 (even side), 1 (both) and 2 (odd side) to N_PR
    ev_valid = 1; ev_kind = EV_ACT; ev_sa = KW'(1);
    #1;
    checks++;
    if (fire !== 3'b111 || fire_idx[0] != 0 || fire_idx[1] != 1 || fire_idx[2] != 2) begin
      failures++;
      $display("fifth ACT to 1: fire %b, expected 111", fire);
    end
    event_(EV_ACT, 1);

    // random traffic over a few hot subarrays, including bank edges 7/8
    for (int n = 0; n < 20000; n++) begin
      int sa;
      int r;
      r = $urandom_range(99);
      if (r < 60)      sa = 5 + $urandom_range(5);     // 5..10, crosses the bank edge
      else             sa = $urandom_range(K - 1);
      event_(($urandom_range(9) == 0) ? EV_SELF : EV_ACT, sa, $urandom_range(7) != 0);
    end

    checks++;
    if (n_fire < 100 || n_multi < 10 || n_edge < 100 || n_self_fire < 5) begin
      failures++;
      $display("coverage too low: fires %0d multi %0d edge %0d self %0d",
               n_fire, n_multi, n_edge, n_self_fire);
    end
    $display("fires=%0d multi=%0d edge=%0d self_fires=%0d", n_fire, n_multi, n_edge, n_self_fire);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
