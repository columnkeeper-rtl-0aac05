// tb_columnkeeper: end-to-end testbench for the ColumnKeeper top.
//
// Two tops run at a reduced geometry (2 ranks x 2 banks x 4 subarrays x
// 4 rows, K = 16) with a 4-entry request queue so that back-pressure
// occurs: one with the CK-D trigger (N_PR = 3), one with CK-P
// (P_PR = 1/8). Each has its own memory-scheduler model: it takes
// preventive-refresh requests when its random ready is high and issues
// each one back as an ordinary ACT, ahead of the random traffic (ACTs,
// bank-wide and rank-wide commands).
//
// CK-D is checked transaction by transaction: a reference model of the
// two counter tables and the row pointers processes every accepted
// command (a sweep in subarray order) and predicts the exact sequence of
// (rank, bank, row) requests. CK-P is checked for row-pointer
// consistency: every request must name the next row of its subarray in
// round-robin order. Each mechanism must be seen at least once: own and
// neighbour-only CK-D firing, bank-edge activations, a row-pointer wrap,
// bank- and rank-wide sweeps, queue back-pressure, refresh ACTs fed back,
// and CK-P hits.
module tb_columnkeeper;
  import ck_pkg::*;
  localparam int unsigned RANKS = 2, BANKS = 2, SPB = 4, S = 4;
  localparam int unsigned K = RANKS * BANKS * SPB;
  localparam int unsigned NPR = 3;
  localparam int unsigned ROWW = 4;
  localparam int unsigned NCMD = 6000;

  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  // ---------------------------------------------------------------- CK-D
  logic            d_cmd_valid, d_cmd_ready, d_busy;
  ck_cmd_e         d_cmd_kind;
  logic            d_cmd_rank, d_cmd_bank;
  logic [ROWW-1:0] d_cmd_row;
  logic            d_pr_valid, d_pr_ready;
  logic            d_pr_rank, d_pr_bank;
  logic [ROWW-1:0] d_pr_row;

  columnkeeper #(.VARIANT(CK_D), .RANKS(RANKS), .BANKS(BANKS), .SA_PER_BANK(SPB),
                 .ROWS_PER_SA(S), .N_PR(NPR), .FIFO_DEPTH(4)) u_d (
    .clk, .rst_n,
    .cmd_valid(d_cmd_valid), .cmd_ready(d_cmd_ready), .cmd_kind(d_cmd_kind),
    .cmd_rank(d_cmd_rank), .cmd_bank(d_cmd_bank), .cmd_row(d_cmd_row), .cmd_busy(d_busy),
    .pr_valid(d_pr_valid), .pr_ready(d_pr_ready), .pr_rank(d_pr_rank), .pr_bank(d_pr_bank),
    .pr_row(d_pr_row)
  );

  // ---------------------------------------------------------------- CK-P
  logic            p_cmd_valid, p_cmd_ready, p_busy;
  ck_cmd_e         p_cmd_kind;
  logic            p_cmd_rank, p_cmd_bank;
  logic [ROWW-1:0] p_cmd_row;
  logic            p_pr_valid, p_pr_ready;
  logic            p_pr_rank, p_pr_bank;
  logic [ROWW-1:0] p_pr_row;

  columnkeeper #(.VARIANT(CK_P), .RANKS(RANKS), .BANKS(BANKS), .SA_PER_BANK(SPB),
                 .ROWS_PER_SA(S), .RAND_W(8), .PPR_TH(32), .FIFO_DEPTH(4)) u_p (
    .clk, .rst_n,
    .cmd_valid(p_cmd_valid), .cmd_ready(p_cmd_ready), .cmd_kind(p_cmd_kind),
    .cmd_rank(p_cmd_rank), .cmd_bank(p_cmd_bank), .cmd_row(p_cmd_row), .cmd_busy(p_busy),
    .pr_valid(p_pr_valid), .pr_ready(p_pr_ready), .pr_rank(p_pr_rank), .pr_bank(p_pr_bank),
    .pr_row(p_pr_row)
  );

  // ------------------------------------------------------- reference model
  int me [K], mo [K], mr [K];     // CK-D counts and row pointers
  int pr_ptr [K];                 // CK-P row pointers
  int exp_q [$];                  // expected CK-D requests: global subarray * S + row
  int d_fb [$], p_fb [$];         // refresh ACTs waiting to be fed back (rank,bank,row)
  int n_own = 0, n_nbr_only = 0, n_edge = 0, n_wrap = 0, n_bank_sweep = 0;
  int n_rank_sweep = 0, n_backpressure = 0, n_feedback = 0, n_p_hits = 0, n_d_req = 0;
  bit drv_done = 0;

  // one subarray event into the CK-D model
  function automatic void model_event(int sa, bit self_only);
    bit ti_e [3], ti_o [3];
    bit f [3];
    int idx [3];
    idx = '{sa - 1, sa, sa + 1};
    ti_e = '{0, 1, 0};
    ti_o = '{0, 1, 0};
    if (!self_only) begin
      ti_e[0] = (sa % SPB) != 0;
      ti_o[2] = (sa % SPB) != SPB - 1;
      if ((sa % SPB) == 0 || (sa % SPB) == SPB - 1) n_edge++;
    end
    for (int s = 0; s < 3; s++) begin
      f[s] = 0;
      if (ti_e[s] || ti_o[s]) begin
        me[idx[s]] += ti_e[s];
        mo[idx[s]] += ti_o[s];
        if (me[idx[s]] >= NPR || mo[idx[s]] >= NPR) begin
          f[s] = 1;
          me[idx[s]] = 0;
          mo[idx[s]] = 0;
          exp_q.push_back(idx[s] * S + mr[idx[s]]);
          mr[idx[s]] = (mr[idx[s]] + 1) % S;
        end
      end
    end
    if (f[1]) n_own++;
    if ((f[0] || f[2]) && !f[1]) n_nbr_only++;
  endfunction

  function automatic void model_cmd(ck_cmd_e kind, int rank, int bank, int row);
    int base;
    case (kind)
      CMD_ACT: model_event((rank * BANKS + bank) * SPB + row / S, 0);
      CMD_BANK_WIDE: begin
        base = (rank * BANKS + bank) * SPB;
        for (int i = 0; i < SPB; i++) model_event(base + i, 1);
      end
      default: begin
        base = rank * BANKS * SPB;
        for (int i = 0; i < BANKS * SPB; i++) model_event(base + i, 1);
      end
    endcase
  endfunction

  // ------------------------------------------------------------ watchdog
  initial begin
    repeat (NCMD * 40) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------- CK-D scheduler and checker
  always @(posedge clk) begin
    if (rst_n && d_pr_valid && d_pr_ready) begin
      int got, sa;
      sa  = (int'(d_pr_rank) * BANKS + int'(d_pr_bank)) * SPB + int'(d_pr_row) / S;
      got = sa * S + int'(d_pr_row) % S;
      checks++;
      n_d_req++;
      if (exp_q.size() == 0) begin
        failures++;
        $display("CK-D: unexpected request rank %0d bank %0d row %0d", d_pr_rank, d_pr_bank,
                 d_pr_row);
      end else begin
        int e;
        e = exp_q.pop_front();
        if (e != got) begin
          failures++;
          $display("CK-D: request sa %0d row %0d, expected sa %0d row %0d", got / S, got % S,
                   e / S, e % S);
        end
      end
      if (int'(d_pr_row) % S == S - 1) n_wrap++;
      d_fb.push_back((int'(d_pr_rank) * 2 + int'(d_pr_bank)) * 256 + int'(d_pr_row));
    end
    if (rst_n && d_cmd_valid && !d_cmd_ready && !d_busy) n_backpressure++;
    if (rst_n && d_cmd_valid && d_cmd_ready) begin
      model_cmd(d_cmd_kind, int'(d_cmd_rank), int'(d_cmd_bank), int'(d_cmd_row));
      if (d_cmd_kind == CMD_BANK_WIDE) n_bank_sweep++;
      if (d_cmd_kind == CMD_RANK_WIDE) n_rank_sweep++;
    end
  end

  // ------------------------------------------- CK-P scheduler and checker
  always @(posedge clk) begin
    if (rst_n && p_pr_valid && p_pr_ready) begin
      int sa;
      sa = (int'(p_pr_rank) * BANKS + int'(p_pr_bank)) * SPB + int'(p_pr_row) / S;
      checks++;
      n_p_hits++;
      if (int'(p_pr_row) % S != pr_ptr[sa]) begin
        failures++;
        $display("CK-P: sa %0d row %0d, expected row %0d", sa, int'(p_pr_row) % S, pr_ptr[sa]);
      end
      pr_ptr[sa] = (pr_ptr[sa] + 1) % S;
      p_fb.push_back((int'(p_pr_rank) * 2 + int'(p_pr_bank)) * 256 + int'(p_pr_row));
    end
  end

  // ------------------------------------------------------------ drivers
  task automatic pick(ref int fb [$], output ck_cmd_e kind, output int rank, output int bank,
                      output int row, output bit is_fb);
    int r;
    is_fb = 0;
    if (fb.size() != 0 && $urandom_range(1) == 0) begin
      int v;
      v = fb.pop_front();
      kind = CMD_ACT; rank = v / 512; bank = (v / 256) % 2; row = v % 256;
      is_fb = 1;
      return;
    end
    r = $urandom_range(99);
    rank = $urandom_range(RANKS - 1);
    bank = $urandom_range(BANKS - 1);
    row  = $urandom_range(SPB * S - 1);
    if (r < 2)      kind = CMD_RANK_WIDE;
    else if (r < 6) kind = CMD_BANK_WIDE;
    else            kind = CMD_ACT;
  endtask

  initial begin : drive_d
    ck_cmd_e kind;
    int rank, bank, row;
    bit fb;
    for (int i = 0; i < K; i++) begin me[i] = 0; mo[i] = 0; mr[i] = 0; end
    d_cmd_valid = 0; d_cmd_kind = CMD_ACT; d_cmd_rank = 0; d_cmd_bank = 0; d_cmd_row = 0;
    d_pr_ready = 0;
    wait (rst_n);
    @(negedge clk);
    for (int n = 0; n < NCMD; n++) begin
      pick(d_fb, kind, rank, bank, row, fb);
      if (fb) n_feedback++;
      d_cmd_valid = 1; d_cmd_kind = kind;
      d_cmd_rank = 1'(rank); d_cmd_bank = 1'(bank); d_cmd_row = ROWW'(row);
      // hold until accepted
      while (1) begin
        d_pr_ready = $urandom_range(3) == 0;
        @(negedge clk);
        if (d_cmd_ready_q) break;
      end
      d_cmd_valid = 0;
    end
    d_pr_ready = 1;
    repeat (200) @(negedge clk);
    drv_done = 1;
  end

  // acceptance seen at the last rising edge (valid && ready)
  logic d_cmd_ready_q, p_cmd_ready_q;
  always @(posedge clk) begin
    d_cmd_ready_q <= d_cmd_valid && d_cmd_ready;
    p_cmd_ready_q <= p_cmd_valid && p_cmd_ready;
  end

  initial begin : drive_p
    ck_cmd_e kind;
    int rank, bank, row;
    bit fb;
    for (int i = 0; i < K; i++) pr_ptr[i] = 0;
    p_cmd_valid = 0; p_cmd_kind = CMD_ACT; p_cmd_rank = 0; p_cmd_bank = 0; p_cmd_row = 0;
    p_pr_ready = 0;
    wait (rst_n);
    @(negedge clk);
    for (int n = 0; n < NCMD; n++) begin
      pick(p_fb, kind, rank, bank, row, fb);
      p_cmd_valid = 1; p_cmd_kind = kind;
      p_cmd_rank = 1'(rank); p_cmd_bank = 1'(bank); p_cmd_row = ROWW'(row);
      while (1) begin
        p_pr_ready = $urandom_range(3) == 0;
        @(negedge clk);
        if (p_cmd_ready_q) break;
      end
      p_cmd_valid = 0;
    end
    p_pr_ready = 1;
    repeat (200) @(negedge clk);
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    wait (drv_done);
    repeat (210) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) begin
      failures++;
      $display("CK-D: %0d expected requests never came out", exp_q.size());
    end
    $display("CK-D requests %0d: own %0d, neighbour-only %0d, bank-edge ACTs %0d, wraps %0d",
             n_d_req, n_own, n_nbr_only, n_edge, n_wrap);
    $display("sweeps bank %0d rank %0d, back-pressure cycles %0d, fed-back ACTs %0d, CK-P requests %0d",
             n_bank_sweep, n_rank_sweep, n_backpressure, n_feedback, n_p_hits);
    checks += 9;
    if (n_own == 0)          begin failures++; $display("no own-subarray firing"); end
    if (n_nbr_only == 0)     begin failures++; $display("no neighbour-only firing"); end
    if (n_edge == 0)         begin failures++; $display("no bank-edge ACT"); end
    if (n_wrap == 0)         begin failures++; $display("no row-pointer wrap"); end
    if (n_bank_sweep == 0)   begin failures++; $display("no bank-wide sweep"); end
    if (n_rank_sweep == 0)   begin failures++; $display("no rank-wide sweep"); end
    if (n_backpressure == 0) begin failures++; $display("no back-pressure"); end
    if (n_feedback == 0)     begin failures++; $display("no refresh ACT fed back"); end
    if (n_p_hits == 0)       begin failures++; $display("no CK-P hit"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
