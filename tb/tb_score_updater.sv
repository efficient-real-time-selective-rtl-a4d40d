// tb_score_updater: self-checking test of the score updater.
//
// Feeds streams of random last-row costs (with gaps in the valid signal and
// many repeated values, so ties occur) and checks after each cell that score
// is the minimum so far and position the 0-based index of its first
// occurrence. Checks the initial values (COST_INF, -1) after clear and that a
// second search after clear starts afresh.
module tb_score_updater;
  import haru_pkg::*;

  logic        clk = 1'b0;
  logic        rst_n, clear, vld_in;
  cost_t       cost_in, score;
  logic [31:0] position;
  int          checks = 0, failures = 0;

  score_updater dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(int n, int maxv);
    longint best = longint'(COST_INF);
    int     best_pos = -1;
    int     idx = 0;
    @(negedge clk); clear = 1'b1;
    @(negedge clk); clear = 1'b0;
    checks++;
    if (score != COST_INF || position != 32'hffff_ffff) begin
      failures++; $display("initial values wrong");
    end
    while (idx < n) begin
      if ($urandom_range(0, 3) == 0) begin
        vld_in = 1'b0; cost_in = cost_t'($urandom_range(0, 3));  // must be ignored
      end else begin
        vld_in = 1'b1; cost_in = cost_t'($urandom_range(0, maxv));
        if (longint'(cost_in) < best) begin best = longint'(cost_in); best_pos = idx; end
        idx++;
      end
      @(negedge clk);
      checks++;
      if (longint'(score) != best || int'(position) != best_pos) begin
        failures++;
        $display("after %0d cells: score %0d pos %0d, expected %0d %0d", idx, score, position, best, best_pos);
      end
    end
    vld_in = 1'b0;
  endtask

  initial begin
    rst_n = 1'b0; clear = 1'b0; vld_in = 1'b0; cost_in = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    run(200, 20);
    run(500, 100000);
    run(50, 3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
