// tb_sdtw_control: self-checking test of the control register and the search
// sequencer (M = 5).
//
// Writes REF_MODE and checks it; starts searches with N = 9 and N = 0 and
// checks: busy, one clear pulse, read addresses 0..N-1 on consecutive cycles,
// y_vld equal to the read enable delayed by one cycle, the result pushes
// (position first, then score), and done exactly N+M+3 cycles after the START
// write. It then holds the FIFO full so that the pushes stall, checks that
// nothing is pushed while full, and that a START given while busy is ignored.
module tb_sdtw_control;
  import haru_pkg::*;

  localparam int unsigned M  = 5;
  localparam int unsigned AW = 6;

  logic          clk = 1'b0;
  logic          rst_n;
  logic          reg_wr_en;
  reg_addr_t     reg_wr_addr;
  logic [31:0]   reg_wr_data;
  logic [3:0]    reg_wr_strb;
  logic [31:0]   ref_len, position;
  cost_t         score;
  logic          fifo_full, fifo_push;
  logic [31:0]   fifo_wdata;
  logic          ref_mode, busy, clear, ref_re, y_vld, start, done, stall;
  logic [AW-1:0] ref_raddr;
  int            checks = 0, failures = 0;

  sdtw_control #(.M(M), .AW(AW)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_eq(string what, longint got, longint want);
    checks++;
    if (got != want) begin failures++; $display("%s = %0d, expected %0d", what, got, want); end
  endtask

  task automatic write_ctrl(logic [31:0] d);
    @(negedge clk);
    reg_wr_en = 1'b1; reg_wr_addr = REG_CTRL; reg_wr_data = d; reg_wr_strb = 4'hf;
    @(negedge clk);
    reg_wr_en = 1'b0;
  endtask

  // one search; returns the cycle count from the START write to done
  task automatic search(int n, int hold_full, output int latency);
    int cyc, reads, clears, pushes, prev_re, stalls;
    logic [31:0] pushed [2];
    ref_len = n; position = 32'd1234 + n; score = cost_t'(777 + n);
    @(negedge clk);
    reg_wr_en = 1'b1; reg_wr_addr = REG_CTRL; reg_wr_data = 32'h1; reg_wr_strb = 4'h1;
    cyc = 0; reads = 0; clears = 0; pushes = 0; prev_re = 0; stalls = 0; latency = -1;
    fifo_full = (hold_full > 0);
    while (latency < 0 && cyc < 200) begin
      #1;
      if (cyc == 0) expect_eq("start pulse", start, 1);
      if (clear) clears++;
      if (ref_re) begin
        expect_eq("read address", ref_raddr, reads);
        reads++;
      end
      expect_eq("y_vld follows ref_re", y_vld, prev_re);
      if (fifo_push) begin
        expect_eq("push order", fifo_wdata, (pushes == 0) ? position : 32'(score));
        pushes++;
      end
      if (stall) begin
        stalls++;
        expect_eq("no push while full", fifo_push, 0);
      end
      if (done) latency = cyc;
      prev_re = ref_re;
      @(negedge clk);
      reg_wr_en = 1'b0;
      if (stalls >= hold_full) fifo_full = 1'b0;
      if (cyc == 3) begin  // START while busy must be ignored
        reg_wr_en = 1'b1; reg_wr_data = 32'h1; reg_wr_strb = 4'h1;
      end
      cyc++;
    end
    reg_wr_en = 1'b0; fifo_full = 1'b0;
    expect_eq("clear pulses", clears, 1);
    expect_eq("reads", reads, n);
    expect_eq("pushes", pushes, 2);
    if (hold_full > 0) expect_eq("stall cycles", stalls, hold_full);
    @(negedge clk);
    expect_eq("idle after done", busy, 0);
  endtask

  initial begin
    int lat;
    rst_n = 1'b0; reg_wr_en = 1'b0; reg_wr_addr = '0; reg_wr_data = '0; reg_wr_strb = '0;
    ref_len = '0; position = '0; score = '0; fifo_full = 1'b0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    expect_eq("busy after reset", busy, 0);
    write_ctrl(32'h2);
    expect_eq("ref_mode set", ref_mode, 1);
    expect_eq("not started by mode write", busy, 0);
    write_ctrl(32'h0);
    expect_eq("ref_mode cleared", ref_mode, 0);
    search(9, 0, lat);
    expect_eq("latency N=9", lat, 9 + M + 3);
    search(0, 0, lat);
    expect_eq("latency N=0", lat, 0 + M + 3);
    search(4, 6, lat);
    expect_eq("latency with 6 stall cycles", lat, 4 + M + 3 + 6);
    expect_eq("ref_mode kept by START", ref_mode, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
