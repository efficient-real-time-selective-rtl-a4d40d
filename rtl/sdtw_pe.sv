// sdtw_pe: one processing element of the sDTW PE chain.
//
// Each cycle the PE computes one cell of the subsequence-DTW cost matrix,
//     cost = |x - y| + min(n, nw, w),
// where x is the query sample of the PE's row, y the reference sample passing
// through it, and n, nw, w the costs of the cell above, above-left and to the
// left. The subtract/absolute/min3/add path is combinational so that a cell is
// produced every cycle (initiation interval 1). The reference sample is also
// registered ("Previous y") and handed to the next PE one cycle later, which
// skews the chain into the oblique wavefront of the pipelined algorithm.
//
// Structure (subtractor, Absolute, Min3, adder, Previous y register) follows
// the paper's PE drawing. Design choices: a valid bit travels with y, and a
// PE with no valid sample outputs COST_INF, which gives the matrix its
// "infinite" left border (gamma(i,0) = inf) without any special case. The add
// wraps at 32 bits as a plain adder would; the paper observes such overflow
// only for scaling factors above 2^7.
//
// Interface: y_in/y_vld_in from the previous PE (or the reference memory for
// PE 0), y_out/y_vld_out to the next PE one cycle later; cost is combinational.
// clear drops the registered valid bit at the start of a search.
module sdtw_pe
  import haru_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    clear,
  input  sample_t y_in,
  input  logic    y_vld_in,
  input  sample_t x,
  input  cost_t   n,
  input  cost_t   nw,
  input  cost_t   w,
  output cost_t   cost,
  output sample_t y_out,
  output logic    y_vld_out
);

  logic signed [SAMPLE_W:0] diff;
  logic        [SAMPLE_W:0] absd;
  cost_t                    min_nw_w;
  cost_t                    min3;

  always_comb begin
    diff     = (SAMPLE_W+1)'(x) - (SAMPLE_W+1)'(y_in);
    absd     = diff[SAMPLE_W] ? (SAMPLE_W+1)'(-diff) : (SAMPLE_W+1)'(diff);
    min_nw_w = (nw < w) ? nw : w;
    min3     = (n < min_nw_w) ? n : min_nw_w;
    cost     = y_vld_in ? (min3 + COST_W'(absd)) : COST_INF;
  end

  always_ff @(posedge clk) begin
    if (!rst_n || clear) begin
      y_out     <= '0;
      y_vld_out <= 1'b0;
    end else begin
      y_out     <= y_in;
      y_vld_out <= y_vld_in;
    end
  end

endmodule
