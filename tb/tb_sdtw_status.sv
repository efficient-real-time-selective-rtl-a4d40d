// tb_sdtw_status: self-checking test of the status registers (M = 7).
//
// Drives random values on the status inputs and reads every address through
// the combinational read mux, comparing with the expected register contents:
// the STATUS bit fields, REF_LEN, QCOUNT, CONFIG = M, CTRL readback of
// REF_MODE, and 0 for unused addresses. Checks that done is sticky until the
// next start and that POSITION/SCORE keep the values captured at done while
// the live inputs change.
module tb_sdtw_status;
  import haru_pkg::*;

  localparam int unsigned M = 7;

  logic        clk = 1'b0;
  logic        rst_n, busy, start, done, ref_mode, query_full, ref_overflow, fifo_full, fifo_empty;
  logic [31:0] query_count, ref_len, position, rd_data;
  cost_t       score;
  reg_addr_t   rd_addr;
  int          checks = 0, failures = 0;
  logic        exp_done;
  logic [31:0] exp_pos, exp_score;

  sdtw_status #(.M(M)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic read_check(reg_addr_t a, logic [31:0] want);
    rd_addr = a; #1;
    checks++;
    if (rd_data !== want) begin failures++; $display("addr %0h: %0h expected %0h", a, rd_data, want); end
  endtask

  initial begin
    rst_n = 1'b0; busy = 0; start = 0; done = 0; ref_mode = 0; query_full = 0; ref_overflow = 0;
    fifo_full = 0; fifo_empty = 1; query_count = 0; ref_len = 0; position = 0; score = 0; rd_addr = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    exp_done = 0; exp_pos = 32'hffff_ffff; exp_score = 32'hffff_ffff;
    for (int k = 0; k < 500; k++) begin
      @(negedge clk);
      busy = 1'($urandom); ref_mode = 1'($urandom); query_full = 1'($urandom);
      ref_overflow = 1'($urandom); fifo_full = 1'($urandom); fifo_empty = 1'($urandom);
      query_count = $urandom_range(0, M); ref_len = $urandom; position = $urandom; score = $urandom;
      start = ($urandom_range(0, 9) == 0);
      done  = !start && ($urandom_range(0, 9) == 0);
      // registers before this edge
      read_check(REG_STATUS, {26'd0, fifo_full, fifo_empty, ref_overflow, query_full, exp_done, busy});
      read_check(REG_REF_LEN, ref_len);
      read_check(REG_POSITION, exp_pos);
      read_check(REG_SCORE, exp_score);
      read_check(REG_QCOUNT, query_count);
      read_check(REG_CONFIG, 32'(M));
      read_check(REG_CTRL, {30'd0, ref_mode, 1'b0});
      read_check(reg_addr_t'(6'h3c), 32'd0);
      if (start) exp_done = 1'b0;
      if (done) begin exp_done = 1'b1; exp_pos = position; exp_score = 32'(score); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
