// tb_core_sdtw: self-checking test of the PE chain.
//
// For several random queries and references (M = 12 PEs, N up to 60 samples)
// it clears the core, streams the reference one sample per cycle into PE 0
// and collects every valid last-PE output. Each must equal the last-row cost
// C[M][j] of the software model, in order. It also checks the paper's
// latency: the last cell appears N+M-1 cycles after the first sample entered
// the chain, and exactly N cells come out. One search uses a reference that
// embeds the query exactly, whose best cost must then be 0.
module tb_core_sdtw;
  import haru_pkg::*;
  import sdtw_model_pkg::*;

  localparam int unsigned M = 12;

  logic    clk = 1'b0;
  logic    rst_n, clear;
  sample_t y_in;
  logic    y_vld_in;
  sample_t x [M];
  cost_t   last_cost;
  logic    last_vld;
  int      checks = 0, failures = 0;

  core_sdtw #(.M(M)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(int n, int range, bit embed);
    int     xq[], yr[];
    longint exp_last[];
    int     got, first_cycle, last_cycle, cyc;
    xq = new[M]; yr = new[n];
    foreach (xq[i]) xq[i] = $urandom_range(0, 2*range) - range;
    foreach (yr[j]) yr[j] = $urandom_range(0, 2*range) - range;
    if (embed) for (int i = 0; i < M; i++) yr[n/2 + i] = xq[i];
    sdtw_last_row(xq, yr, exp_last);
    for (int i = 0; i < M; i++) x[i] = sample_t'(xq[i]);
    @(negedge clk); clear = 1'b1;
    @(negedge clk); clear = 1'b0;
    got = 0; cyc = 0; first_cycle = -1; last_cycle = -1;
    while (got < n && cyc < n + 4*M) begin
      if (cyc < n) begin y_in = sample_t'(yr[cyc]); y_vld_in = 1'b1; end
      else begin y_in = '0; y_vld_in = 1'b0; end
      if (cyc == 0) first_cycle = cyc;
      #1;
      if (last_vld) begin
        checks++;
        if (longint'(last_cost) != exp_last[got]) begin
          failures++;
          $display("n=%0d j=%0d: got %0d expected %0d", n, got, last_cost, exp_last[got]);
        end
        got++;
        last_cycle = cyc;
      end
      @(negedge clk);
      cyc++;
    end
    y_vld_in = 1'b0;
    checks++;
    if (got != n) begin failures++; $display("got %0d cells, expected %0d", got, n); end
    checks++;
    if (last_cycle - first_cycle + 1 != n + M - 1) begin
      failures++;
      $display("latency %0d cycles, expected N+M-1 = %0d", last_cycle - first_cycle + 1, n + M - 1);
    end
    if (embed) begin
      longint best = MODEL_INF;
      foreach (exp_last[j]) if (exp_last[j] < best) best = exp_last[j];
      checks++;
      if (best != 0) begin failures++; $display("embedded query not found by model"); end
    end
    repeat (M + 2) @(negedge clk);
  endtask

  initial begin
    rst_n = 1'b0; clear = 1'b0; y_in = '0; y_vld_in = 1'b0;
    for (int i = 0; i < M; i++) x[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    run(40, 200, 1'b0);
    run(60, 3000, 1'b1);
    run(M, 100, 1'b0);
    run(1, 100, 1'b0);
    run(25, 30000, 1'b0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
