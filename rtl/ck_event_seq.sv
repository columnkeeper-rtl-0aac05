// ck_event_seq: turns DRAM commands into per-subarray trigger events.
//
// The memory controller reports each activation it issues. An ACT names
// a rank, a bank and a row; with the subarray mapping exposed to the
// controller (assumed linear here: subarray = row / ROWS_PER_SA) it
// becomes one EV_ACT event for that subarray in the same cycle. Commands
// that may activate a row in any subarray (an RFM, an extra REF from a
// RowHammer mitigation, an ACT to a row of unknown subarray) must be
// charged to every subarray they may reach: a bank-wide command is swept
// over the SA_PER_BANK subarrays of its bank, a rank-wide one over all
// subarrays of the rank, one EV_SELF event per cycle. The paper gives the
// rule; sweeping one subarray per cycle is this design's choice.
//
// Global subarray index: ((rank * BANKS) + bank) * SA_PER_BANK + local.
//
// Handshake: cmd_ready is high only in the idle state and when the
// request queue has room for a full trigger (`room`). A command is taken
// when cmd_valid && cmd_ready. During a sweep cmd_ready is low and an
// event is issued in every cycle that `room` is high.
module ck_event_seq
  import ck_pkg::*;
#(
  parameter int unsigned RANKS       = 2,
  parameter int unsigned BANKS       = 16,
  parameter int unsigned SA_PER_BANK = 64,
  parameter int unsigned ROWS_PER_SA = 1024,
  localparam int unsigned K    = RANKS * BANKS * SA_PER_BANK,
  localparam int unsigned KW   = (K > 1) ? $clog2(K) : 1,
  localparam int unsigned RKW  = (RANKS > 1) ? $clog2(RANKS) : 1,
  localparam int unsigned BKW  = (BANKS > 1) ? $clog2(BANKS) : 1,
  localparam int unsigned ROWW = $clog2(SA_PER_BANK * ROWS_PER_SA)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            cmd_valid,
  output logic            cmd_ready,
  input  ck_cmd_e         cmd_kind,
  input  logic [RKW-1:0]  cmd_rank,
  input  logic [BKW-1:0]  cmd_bank,
  input  logic [ROWW-1:0] cmd_row,
  input  logic            room,
  output logic            ev_valid,
  output ck_event_e       ev_kind,
  output logic [KW-1:0]   ev_sa,
  output logic            busy
);

  typedef enum logic {S_IDLE, S_SWEEP} state_e;
  state_e        state;
  logic [KW-1:0] cur, last;
  logic [KW-1:0] act_sa, bank_base, rank_base;

  always_comb begin
    act_sa    = KW'((int'(cmd_rank) * BANKS + int'(cmd_bank)) * SA_PER_BANK
                    + int'(cmd_row) / ROWS_PER_SA);
    bank_base = KW'((int'(cmd_rank) * BANKS + int'(cmd_bank)) * SA_PER_BANK);
    rank_base = KW'(int'(cmd_rank) * BANKS * SA_PER_BANK);
  end

  assign busy      = state == S_SWEEP;
  assign cmd_ready = (state == S_IDLE) && room;

  always_comb begin
    if (state == S_SWEEP) begin
      ev_valid = room;
      ev_kind  = EV_SELF;
      ev_sa    = cur;
    end else begin
      ev_valid = cmd_valid && cmd_ready && cmd_kind == CMD_ACT;
      ev_kind  = EV_ACT;
      ev_sa    = act_sa;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_IDLE;
      cur   <= '0;
      last  <= '0;
    end else begin
      case (state)
        S_IDLE: begin
          if (cmd_valid && cmd_ready) begin
            if (cmd_kind == CMD_BANK_WIDE) begin
              state <= S_SWEEP;
              cur   <= bank_base;
              last  <= bank_base + KW'(SA_PER_BANK - 1);
            end else if (cmd_kind == CMD_RANK_WIDE) begin
              state <= S_SWEEP;
              cur   <= rank_base;
              last  <= rank_base + KW'(BANKS * SA_PER_BANK - 1);
            end
          end
        end
        S_SWEEP: begin
          if (room) begin
            if (cur == last) state <= S_IDLE;
            else             cur   <= cur + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk)
    if (rst_n && cmd_valid)
      a_kind_legal: assert (cmd_kind inside {CMD_ACT, CMD_BANK_WIDE, CMD_RANK_WIDE})
        else $error("illegal command kind");

endmodule
