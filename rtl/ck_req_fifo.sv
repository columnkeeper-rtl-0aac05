// ck_req_fifo: queue of preventive-refresh requests between ColumnKeeper
// and the memory request scheduler.
//
// A trigger can fire for up to three subarrays in one cycle (k-1, k, k+1),
// while the scheduler takes at most one ACT+PRE per cycle and usually far
// fewer. This circular buffer accepts up to three entries per cycle,
// written in slot order, and hands them out one at a time through a
// valid/ready port. The queue and its depth are this design's choice; the
// paper only says the requests go to the scheduler.
//
// Interface and timing: entries pushed in a cycle are visible at the
// output from the next cycle. The producer must not push more entries
// than `free` reports (an assertion checks it); ColumnKeeper stalls its
// command input while fewer than three places are free. Reset empties
// the queue.
module ck_req_fifo #(
  parameter int unsigned W     = 20,
  parameter int unsigned DEPTH = 16,
  localparam int unsigned AW = $clog2(DEPTH),
  localparam int unsigned CNTW = $clog2(DEPTH + 1)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [2:0]           push_valid,
  input  logic [2:0][W-1:0]    push_data,
  output logic [CNTW-1:0]      free,
  output logic                 out_valid,
  input  logic                 out_ready,
  output logic [W-1:0]         out_data
);

  logic [W-1:0]    mem [DEPTH];
  logic [AW-1:0]   rd_ptr, wr_ptr;
  logic [CNTW-1:0] count;
  logic [1:0]      n_push;
  logic            pop;

  assign free      = CNTW'(DEPTH) - count;
  assign out_valid = count != 0;
  assign out_data  = mem[rd_ptr];
  assign pop       = out_valid && out_ready;
  assign n_push    = 2'(push_valid[0]) + 2'(push_valid[1]) + 2'(push_valid[2]);

  function automatic logic [AW-1:0] wrap_add(logic [AW-1:0] p, logic [1:0] n);
    logic [AW:0] sum;
    sum = {1'b0, p} + (AW+1)'(n);
    if (sum >= (AW+1)'(DEPTH)) sum = sum - (AW+1)'(DEPTH);
    return sum[AW-1:0];
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      logic [1:0] off;
      off = '0;
      for (int s = 0; s < 3; s++) begin
        if (push_valid[s]) begin
          mem[wrap_add(wr_ptr, off)] <= push_data[s];
          off = off + 1'b1;
        end
      end
      wr_ptr <= wrap_add(wr_ptr, n_push);
      if (pop) rd_ptr <= wrap_add(rd_ptr, 2'd1);
      count <= count + CNTW'(n_push) - CNTW'(pop);
    end
  end

  always_ff @(posedge clk)
    if (rst_n)
      a_no_overflow: assert (CNTW'(n_push) <= free)
        else $error("request queue overflow");

  initial assert (DEPTH >= 3) else $error("DEPTH must hold one full trigger (3 entries)");

endmodule
