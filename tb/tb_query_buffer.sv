// tb_query_buffer: self-checking test of the query buffer (M = 8).
//
// Loads a packet of exactly M samples and checks x[0..M-1] against them in
// order, count = M and full; loads a short packet (count restarts, not full);
// loads a packet longer than M (the last M samples remain, count saturates);
// and checks that idle cycles leave the contents unchanged.
module tb_query_buffer;
  import haru_pkg::*;

  localparam int unsigned M = 8;

  logic          clk = 1'b0;
  logic          rst_n, wr_en, wr_last, full;
  sample_t       wr_data;
  sample_t       x [M];
  logic [3:0]    count;
  int            checks = 0, failures = 0;
  int            pkt[$];

  query_buffer #(.M(M)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send(int len, bit gaps);
    pkt.delete();
    for (int k = 0; k < len; k++) begin
      int v;
      v = $urandom_range(0, 65535) - 32768;
      pkt.push_back(v);
      @(negedge clk);
      wr_en = 1'b1; wr_data = sample_t'(v); wr_last = (k == len - 1);
      @(negedge clk);
      wr_en = 1'b0; wr_last = 1'b0;
      if (gaps) repeat ($urandom_range(0, 2)) @(negedge clk);
    end
  endtask

  task automatic check(int exp_count);
    int base = (pkt.size() > M) ? pkt.size() - M : 0;
    checks++;
    if (int'(count) != exp_count || full != (exp_count == M)) begin
      failures++;
      $display("count %0d full %0b, expected %0d", count, full, exp_count);
    end
    if (exp_count == M) begin
      for (int i = 0; i < M; i++) begin
        checks++;
        if (int'(x[i]) != pkt[base + i]) begin
          failures++;
          $display("x[%0d] = %0d expected %0d", i, x[i], pkt[base + i]);
        end
      end
    end
  endtask

  initial begin
    rst_n = 1'b0; wr_en = 1'b0; wr_last = 1'b0; wr_data = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    checks++; if (count != 0 || full) begin failures++; $display("not empty after reset"); end
    send(M, 1'b0);     check(M);
    repeat (5) @(negedge clk); check(M);
    send(3, 1'b1);     check(3);
    send(M + 5, 1'b1); check(M);
    send(M, 1'b1);     check(M);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
