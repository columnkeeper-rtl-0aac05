// ck_rpt: Row Pointer Table, the countermeasure shared by CK-D and CK-P.
//
// One entry per subarray of the system (K entries). Each entry is a
// round-robin pointer to the next row of that subarray to refresh
// preventively. When a trigger fires for subarray k, the table is
// probed: it returns the entry's current value R_k and advances the
// entry by one; probing the last row (S-1) wraps the entry to 0. Because
// the pointer only moves on a preventive refresh, it always points at the
// row refreshed least recently by ColumnKeeper. This behaviour is the
// paper's; the port shape is this design's choice.
//
// Interface: up to three probes per cycle (slot 0 = k-1, 1 = k, 2 = k+1),
// which must name distinct entries. probe_row is combinational from the
// current table contents (the value before the increment); the increments
// take effect at the next rising clock edge. Reset clears every pointer
// to row 0.
module ck_rpt #(
  parameter int unsigned K = 2048,          // subarrays in the system
  parameter int unsigned S = 1024,          // rows per subarray
  parameter int unsigned NPROBE = 3,
  localparam int unsigned KW = (K > 1) ? $clog2(K) : 1,
  localparam int unsigned RW = (S > 1) ? $clog2(S) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [NPROBE-1:0]   probe_valid,
  input  logic [NPROBE-1:0][KW-1:0] probe_idx,
  output logic [NPROBE-1:0][RW-1:0] probe_row
);

  logic [RW-1:0] ptr [K];

  always_comb begin
    for (int p = 0; p < NPROBE; p++) probe_row[p] = ptr[probe_idx[p]];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < K; i++) ptr[i] <= '0;
    end else begin
      for (int p = 0; p < NPROBE; p++) begin
        if (probe_valid[p]) begin
          if (ptr[probe_idx[p]] == RW'(S - 1)) ptr[probe_idx[p]] <= '0;
          else                                 ptr[probe_idx[p]] <= ptr[probe_idx[p]] + 1'b1;
        end
      end
    end
  end

  // Simultaneous probes must target different subarrays.
  for (genvar a = 0; a < NPROBE; a++) begin : g_chk_a
    for (genvar b = a + 1; b < NPROBE; b++) begin : g_chk_b
      always_ff @(posedge clk)
        if (rst_n)
          a_distinct: assert (!(probe_valid[a] && probe_valid[b] && probe_idx[a] == probe_idx[b]))
            else $error("two RPT probes to the same subarray in one cycle");
    end
  end

endmodule
