// ckd_trigger: deterministic ColumnKeeper trigger (CK-D).
//
// Two counter tables with one entry per subarray, Counter Table-Even
// (CT-E) and Counter Table-Odd (CT-O), count the activations seen by the
// even and the odd bitlines of each subarray. In an open-bitline array an
// ACT to subarray k disturbs every column of k, but only the even columns
// of k-1 and only the odd columns of k+1, so an EV_ACT event increments
// CT-E[k], CT-O[k], CT-E[k-1] and CT-O[k+1]; the neighbour that would lie
// in another bank is skipped. For every entry touched, the larger of its
// two new counts is compared with the preventive refresh threshold N_PR;
// if it has reached N_PR the trigger fires for that subarray and both of
// its entries are reset to 0, otherwise they keep the new counts. Keeping
// the two counts apart avoids counting twice the activations of the two
// neighbours, which reach disjoint halves of the bitlines. All of this
// follows the paper (its Fig. 4, steps 1a to 7b).
//
// EV_SELF is this design's encoding of the paper's rule for activations
// whose subarray is unknown to the controller (RFM, extra REF, unmapped
// rows): the caller presents each subarray of the affected bank(s) once,
// and CT-E[k] and CT-O[k] are both incremented by one, neighbours
// untouched.
//
// Interface and timing: one event per cycle. fire/fire_idx are
// combinational from the event and the current table contents (slot 0 =
// k-1, slot 1 = k, slot 2 = k+1); the table update lands on the next
// rising edge. A counter never exceeds N_PR, so each entry is
// clog2(N_PR+1) bits wide (10 bits for N_PR = 1021). Synchronous reset clears both
// tables.
module ckd_trigger
  import ck_pkg::*;
#(
  parameter int unsigned K           = 2048,   // subarrays in the system
  parameter int unsigned SA_PER_BANK = 64,
  parameter int unsigned N_PR        = 1021,
  localparam int unsigned KW = (K > 1) ? $clog2(K) : 1,
  localparam int unsigned CW = $clog2(N_PR + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              ev_valid,
  input  ck_event_e         ev_kind,
  input  logic [KW-1:0]     ev_sa,
  output logic [2:0]        fire,
  output logic [2:0][KW-1:0] fire_idx
);

  logic [CW-1:0] ct_e [K];
  logic [CW-1:0] ct_o [K];

  logic          has_lo, has_hi;
  logic [2:0]    touch;           // entries k-1, k, k+1 updated by this event
  logic [2:0]    inc_e, inc_o;    // which counters of each entry are incremented
  logic [2:0][CW-1:0] new_e, new_o, max_eo;

  always_comb begin
    has_lo = (int'(ev_sa) % SA_PER_BANK) != 0;
    has_hi = (int'(ev_sa) % SA_PER_BANK) != SA_PER_BANK - 1;
    fire_idx[0] = ev_sa - 1'b1;
    fire_idx[1] = ev_sa;
    fire_idx[2] = ev_sa + 1'b1;
    // slot 1: the activated subarray, every column disturbed
    inc_e = 3'b010;
    inc_o = 3'b010;
    if (ev_kind == EV_ACT) begin
      inc_e[0] = has_lo;          // k-1 shares its even bitlines
      inc_o[2] = has_hi;          // k+1 shares its odd bitlines
    end
    touch = (inc_e | inc_o) & {3{ev_valid}};
    for (int s = 0; s < 3; s++) begin
      new_e[s]  = ct_e[fire_idx[s]] + CW'(inc_e[s]);
      new_o[s]  = ct_o[fire_idx[s]] + CW'(inc_o[s]);
      max_eo[s] = (new_e[s] > new_o[s]) ? new_e[s] : new_o[s];
      fire[s]   = touch[s] && (max_eo[s] >= CW'(N_PR));
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < K; i++) begin
        ct_e[i] <= '0;
        ct_o[i] <= '0;
      end
    end else begin
      for (int s = 0; s < 3; s++) begin
        if (touch[s]) begin
          ct_e[fire_idx[s]] <= fire[s] ? '0 : new_e[s];
          ct_o[fire_idx[s]] <= fire[s] ? '0 : new_o[s];
        end
      end
    end
  end

  initial begin
    assert (N_PR >= 1) else $error("N_PR must be at least 1");
    assert (K % SA_PER_BANK == 0) else $error("K must be a multiple of SA_PER_BANK");
  end

endmodule
