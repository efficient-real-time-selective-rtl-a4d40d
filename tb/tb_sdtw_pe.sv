// tb_sdtw_pe: self-checking test of one processing element.
//
// Applies random query/reference samples (full 16-bit signed range) and random
// neighbour costs, and compares the combinational cost with
// |x - y| + min(n, nw, w) computed in the testbench (COST_INF when the sample
// is not valid). Also checks that y and its valid bit reach y_out one cycle
// later and that clear empties the register. Directed cases cover ties of
// the three neighbours and the extremes of the sample range.
module tb_sdtw_pe;
  import haru_pkg::*;

  logic    clk = 1'b0;
  logic    rst_n, clear;
  sample_t y_in, x, y_out;
  logic    y_vld_in, y_vld_out;
  cost_t   n, nw, w, cost;
  int      checks = 0, failures = 0;

  sdtw_pe dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint expect_cost(int xs, int ys, longint a, longint b, longint c, bit v);
    longint d, m;
    if (!v) return longint'(COST_INF);
    d = (xs > ys) ? longint'(xs - ys) : longint'(ys - xs);
    m = a; if (b < m) m = b; if (c < m) m = c;
    return d + m;
  endfunction

  task automatic apply(int xs, int ys, longint a, longint b, longint c, bit v);
    sample_t py;
    logic    pv;
    x = sample_t'(xs); y_in = sample_t'(ys);
    n = cost_t'(a); nw = cost_t'(b); w = cost_t'(c); y_vld_in = v;
    #1;
    checks++;
    if (longint'(cost) != expect_cost(xs, ys, a, b, c, v)) begin
      failures++;
      $display("cost mismatch x=%0d y=%0d n=%0d nw=%0d w=%0d v=%0b got %0d", xs, ys, a, b, c, v, cost);
    end
    py = y_in; pv = v;
    @(posedge clk); #1;
    checks++;
    if (y_out !== py || y_vld_out !== pv) begin
      failures++;
      $display("y pipeline mismatch");
    end
  endtask

  initial begin
    rst_n = 1'b0; clear = 1'b0; y_vld_in = 1'b0;
    x = '0; y_in = '0; n = '0; nw = '0; w = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    // directed
    apply(5, 3, 10, 10, 10, 1);
    apply(3, 5, 7, 2, 9, 1);
    apply(-32768, 32767, 0, 1, 2, 1);
    apply(32767, -32768, 100, 50, 50, 1);
    apply(0, 0, 0, 0, 0, 1);
    apply(12, -7, 4, 9, 1, 0);
    apply(-100, -100, longint'(COST_INF), longint'(COST_INF), 3, 1);
    // random
    for (int k = 0; k < 2000; k++) begin
      apply(int'($signed(16'($urandom))), int'($signed(16'($urandom))),
            longint'($urandom_range(0, 32'h3fff_ffff)),
            longint'($urandom_range(0, 32'h3fff_ffff)),
            longint'($urandom_range(0, 32'h3fff_ffff)),
            1'($urandom_range(0, 7) != 0));
    end
    // clear drops the registered sample
    y_vld_in = 1'b1; @(posedge clk); #1;
    clear = 1'b1; @(posedge clk); #1; clear = 1'b0;
    checks++;
    if (y_vld_out !== 1'b0) begin failures++; $display("clear did not drop y_vld_out"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
