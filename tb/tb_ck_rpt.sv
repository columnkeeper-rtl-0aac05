// tb_ck_rpt: self-checking testbench for the Row Pointer Table.
//
// A small table (8 subarrays of 5 rows, so the wrap from the last row to
// row 0 is not a power-of-two rollover) is probed through three ports
// with random, distinct subarray indices. A reference array of pointers
// predicts every returned row; the pointers must return to 0 after
// exactly S probes. A single directed pass first probes one subarray
// 2S times and checks the round-robin sequence 0,1,..,S-1,0,...
module tb_ck_rpt;
  localparam int unsigned K = 8, S = 5, KW = 3, RW = 3;

  logic clk = 0, rst_n = 0;
  logic [2:0]         probe_valid;
  logic [2:0][KW-1:0] probe_idx;
  logic [2:0][RW-1:0] probe_row;
  int checks = 0, failures = 0;
  int model [K];
  int wraps = 0;

  ck_rpt #(.K(K), .S(S), .NPROBE(3)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic step();
    #1;
    for (int p = 0; p < 3; p++) begin
      if (probe_valid[p]) begin
        checks++;
        if (int'(probe_row[p]) != model[probe_idx[p]]) begin
          failures++;
          $display("probe %0d sa %0d: row %0d, expected %0d", p, probe_idx[p], probe_row[p],
                   model[probe_idx[p]]);
        end
      end
    end
    for (int p = 0; p < 3; p++)
      if (probe_valid[p]) begin
        model[probe_idx[p]] = (model[probe_idx[p]] + 1) % S;
        if (model[probe_idx[p]] == 0) wraps++;
      end
    @(negedge clk);
  endtask

  initial begin
    for (int i = 0; i < K; i++) model[i] = 0;
    probe_valid = '0;
    probe_idx   = '0;
    @(negedge clk);
    @(negedge clk);
    rst_n = 1;
    // directed: round robin of one subarray, twice around
    for (int n = 0; n < 2 * S; n++) begin
      probe_valid = 3'b010;
      probe_idx[1] = KW'(6);
      probe_idx[0] = KW'(5);
      probe_idx[2] = KW'(7);
      #1;
      checks++;
      if (int'(probe_row[1]) != n % S) begin
        failures++;
        $display("directed probe %0d returned %0d", n, probe_row[1]);
      end
      @(negedge clk);
    end
    model[6] = 0;
    // random: up to three distinct subarrays per cycle
    for (int n = 0; n < 3000; n++) begin
      int a, b, c;
      a = $urandom_range(K - 1);
      b = (a + 1 + $urandom_range(K - 2)) % K;
      do c = $urandom_range(K - 1); while (c == a || c == b);
      probe_idx[0] = KW'(a);
      probe_idx[1] = KW'(b);
      probe_idx[2] = KW'(c);
      probe_valid  = 3'($urandom_range(7));
      step();
    end
    // idle cycles must not move any pointer
    probe_valid = '0;
    repeat (3) @(negedge clk);
    probe_valid = 3'b111;
    probe_idx[0] = 0; probe_idx[1] = 3; probe_idx[2] = 7;
    step();
    // reset clears every pointer
    rst_n = 0;
    probe_valid = '0;
    @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < K; i++) model[i] = 0;
    probe_valid = 3'b001;
    for (int i = 0; i < K; i++) begin
      probe_idx[0] = KW'(i);
      step();
    end
    checks++;
    if (wraps < 100) begin
      failures++;
      $display("too few wraps exercised: %0d", wraps);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
