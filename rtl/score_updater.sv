// score_updater: keeps the best end position of the alignment.
//
// Each valid cycle the last PE delivers one last-row cell C[M, j]. A counter
// numbers these cells (the reference position j, counted from 0 for the first
// reference sample), a comparator tests the new cost against the best score
// so far, and on a strictly smaller cost the score and position registers take
// the new cost and the counter value. So ties keep the earliest position, as
// in the paper's "if C[M] < score" test. clear, given at the start of a
// search, sets score to COST_INF and position to all ones (-1), the paper's
// initial values.
//
// Cycle counter, comparator and the two registers follow the paper; counting
// positions from 0 rather than 1 is this design's choice. Timing: the outputs
// reflect a cell one cycle after it is presented.
module score_updater
  import haru_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        clear,
  input  cost_t       cost_in,
  input  logic        vld_in,
  output cost_t       score,
  output logic [31:0] position
);

  logic [31:0] cycle_cnt;

  always_ff @(posedge clk) begin
    if (!rst_n || clear) begin
      cycle_cnt <= '0;
      score     <= COST_INF;
      position  <= '1;
    end else if (vld_in) begin
      cycle_cnt <= cycle_cnt + 32'd1;
      if (cost_in < score) begin
        score    <= cost_in;
        position <= cycle_cnt;
      end
    end
  end

endmodule
