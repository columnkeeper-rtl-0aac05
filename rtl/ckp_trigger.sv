// ckp_trigger: probabilistic ColumnKeeper trigger (CK-P).
//
// CK-P keeps no activation counters. On every subarray event it "flips a
// coin" that comes up with probability P_PR; on a hit it fires for the
// activated subarray k and for both neighbours k-1 and k+1 (neighbours in
// another bank are skipped), so the RPT then hands out one row in each of
// up to three consecutive subarrays. The paper treats activations of
// unknown subarray by flipping the coin for every subarray, so EV_SELF
// and EV_ACT are handled alike here: the caller presents each subarray
// once and each gets its own coin.
//
// The coin is this design's choice, as the paper does not say how it is
// drawn: a 32-bit xorshift generator steps every clock cycle, and the
// coin is a hit when its low RAND_W bits are below PPR_TH, giving
// P_PR = PPR_TH / 2^RAND_W. The default PPR_TH = 1385 with RAND_W = 20
// rounds up the paper's P_PR = 1.32e-3 (N_CD = 1M, a 1e-12 chance of a
// successful attack per year). A pseudo-random generator is predictable;
// a deployment wants a true random source at the same port position.
//
// Interface and timing: one event per cycle; fire/fire_idx (slot 0 = k-1,
// 1 = k, 2 = k+1) are combinational from the event and the generator
// state of that cycle. Synchronous reset loads SEED (which must not be 0).
module ckp_trigger
  import ck_pkg::*;
#(
  parameter int unsigned K           = 2048,
  parameter int unsigned SA_PER_BANK = 64,
  parameter int unsigned RAND_W      = 20,
  parameter int unsigned PPR_TH      = 1385,
  parameter logic [31:0] SEED        = 32'h2545_F491,
  localparam int unsigned KW = (K > 1) ? $clog2(K) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              ev_valid,
  input  ck_event_e         ev_kind,
  input  logic [KW-1:0]     ev_sa,
  output logic [2:0]        fire,
  output logic [2:0][KW-1:0] fire_idx
);

  logic [31:0] rng, rng_a, rng_b, rng_next;
  logic        hit;
  logic        has_lo, has_hi;

  // xorshift32 (shifts 13, 17, 5)
  always_comb begin
    rng_a    = rng ^ (rng << 13);
    rng_b    = rng_a ^ (rng_a >> 17);
    rng_next = rng_b ^ (rng_b << 5);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) rng <= SEED;
    else        rng <= rng_next;
  end

  always_comb begin
    hit    = ev_valid && ({1'b0, rng[RAND_W-1:0]} < (RAND_W+1)'(PPR_TH));
    has_lo = (int'(ev_sa) % SA_PER_BANK) != 0;
    has_hi = (int'(ev_sa) % SA_PER_BANK) != SA_PER_BANK - 1;
    fire_idx[0] = ev_sa - 1'b1;
    fire_idx[1] = ev_sa;
    fire_idx[2] = ev_sa + 1'b1;
    fire = {hit && has_hi, hit, hit && has_lo};
  end

  // The event kind does not change CK-P's behaviour (see header).
  logic unused_kind;
  assign unused_kind = ev_kind == EV_SELF;

  initial begin
    assert (SEED != 0) else $error("xorshift seed must be non-zero");
    assert (RAND_W >= 1 && RAND_W <= 32) else $error("RAND_W out of range");
  end

endmodule
