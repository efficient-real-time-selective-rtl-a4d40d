// core_sdtw: the PE chain that evaluates the subsequence-DTW cost matrix one
// oblique column per cycle.
//
// PE k (0-based) owns query row i = k+1. The reference stream enters PE 0 and
// moves one PE per cycle, so in cycle t PE k works on column j = t-k+1 and the
// M PEs together compute an anti-diagonal band of the matrix. Only two older
// columns are kept, in two register arrays:
//   L1[k] = cost PE k produced last cycle      (C[k+1, j-1] for PE k)
//   L2[k] = cost PE k produced two cycles ago  (C[k+1, j-2])
// so PE k reads n = L1[k-1], nw = L2[k-1] and w = L1[k]; PE 0 reads n = nw = 0,
// the matrix's zero top row (gamma(0,j) = 0). Every cycle the PE outputs
// (the "Cost" array) move into L1 and L1 moves into L2. L2[M-1] is never read
// and is not built, which matches the paper's drawing of L2 one entry shorter.
// With N reference samples the last PE's cost for column N appears N+M-1
// cycles after the first sample entered PE 0.
//
// The PE chain, the L1/L2 arrays and the shift between them follow the paper.
// The valid bit riding with y and the clear input (set L1 and L2 to COST_INF
// and empty the chain before a search) are this design's own.
//
// Interface: y_in/y_vld_in is one reference sample per cycle; x holds the M
// query samples (x[0] = first event); last_cost/last_vld is the combinational
// result of the last PE, i.e. one last-row cell C[M, j] per valid cycle.
module core_sdtw
  import haru_pkg::*;
#(
  parameter int unsigned M = QUERY_LEN
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    clear,
  input  sample_t y_in,
  input  logic    y_vld_in,
  input  sample_t x [M],
  output cost_t   last_cost,
  output logic    last_vld
);

  cost_t   cost [M];        // current PE outputs ("Cost")
  cost_t   l1   [M];        // previous cost array ("Prev Cost L1")
  cost_t   l2   [M-1];      // second previous cost array ("Prev Cost L2")
  sample_t y    [M+1];      // reference sample entering each PE
  logic    yv   [M+1];

  assign y[0]  = y_in;
  assign yv[0] = y_vld_in;

  for (genvar k = 0; k < M; k++) begin : g_pe
    cost_t n_k, nw_k;
    if (k == 0) begin : g_first
      assign n_k  = '0;
      assign nw_k = '0;
    end else begin : g_rest
      assign n_k  = l1[k-1];
      assign nw_k = l2[k-1];
    end

    sdtw_pe u_pe (
      .clk      (clk),
      .rst_n    (rst_n),
      .clear    (clear),
      .y_in     (y[k]),
      .y_vld_in (yv[k]),
      .x        (x[k]),
      .n        (n_k),
      .nw       (nw_k),
      .w        (l1[k]),
      .cost     (cost[k]),
      .y_out    (y[k+1]),
      .y_vld_out(yv[k+1])
    );
  end

  always_ff @(posedge clk) begin
    if (!rst_n || clear) begin
      for (int k = 0; k < M; k++) l1[k] <= COST_INF;
      for (int k = 0; k < M-1; k++) l2[k] <= COST_INF;
    end else begin
      for (int k = 0; k < M; k++) l1[k] <= cost[k];
      for (int k = 0; k < M-1; k++) l2[k] <= l1[k];
    end
  end

  assign last_cost = cost[M-1];
  assign last_vld  = yv[M-1];

endmodule
