// tb_axis_slave: self-checking test of the AXI4-Stream input (DEPTH = 16).
//
// A sender with random TVALID gaps streams: a 10-sample reference packet
// (every memory write checked for address and data, ref_len = 10); a query
// packet (q_we beats with data and TLAST checked, no memory writes); an
// over-long 20-sample reference packet (16 writes, ref_len = 16,
// ref_overflow set) followed by a short one that clears the flag. With enable
// low, TREADY must be low and no beat may be taken.
module tb_axis_slave;
  import haru_pkg::*;

  localparam int unsigned DEPTH = 16;
  localparam int unsigned AW    = $clog2(DEPTH);

  logic          clk = 1'b0;
  logic          rst_n;
  logic [31:0]   s_axis_tdata;
  logic          s_axis_tvalid, s_axis_tlast, s_axis_tready;
  logic          enable, ref_mode;
  logic          ref_we, q_we, q_last;
  logic [AW-1:0] ref_waddr;
  sample_t       ref_wdata, q_wdata;
  logic [31:0]   ref_len;
  logic          ref_overflow;
  int            checks = 0, failures = 0;
  int            sent[$];
  int            ref_writes, q_writes, wrong;

  axis_slave #(.TDATA_W(32), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // monitor: compare every write with what the sender sent
  always @(posedge clk) begin
    if (rst_n && ref_we) begin
      if (ref_writes >= sent.size() || int'(ref_wdata) != sent[ref_writes] || int'(ref_waddr) != ref_writes) wrong++;
      ref_writes++;
    end
    if (rst_n && q_we) begin
      if (q_writes >= sent.size() || int'(q_wdata) != sent[q_writes] || q_last != (q_writes == sent.size() - 1)) wrong++;
      q_writes++;
    end
  end

  task automatic send(int len);
    sent.delete();
    for (int k = 0; k < len; k++) sent.push_back($urandom_range(0, 65535) - 32768);
    ref_writes = 0; q_writes = 0; wrong = 0;
    for (int k = 0; k < len; k++) begin
      while ($urandom_range(0, 2) == 0) @(negedge clk);
      s_axis_tvalid = 1'b1;
      s_axis_tdata  = {$urandom_range(0, 65535), 16'(sent[k])};
      s_axis_tlast  = (k == len - 1);
      @(posedge clk);
      while (!s_axis_tready) @(posedge clk);
      @(negedge clk);
      s_axis_tvalid = 1'b0; s_axis_tlast = 1'b0;
    end
    repeat (2) @(negedge clk);
  endtask

  task automatic expect_eq(string what, int got, int want);
    checks++;
    if (got != want) begin failures++; $display("%s = %0d, expected %0d", what, got, want); end
  endtask

  initial begin
    rst_n = 1'b0; s_axis_tvalid = 1'b0; s_axis_tlast = 1'b0; s_axis_tdata = '0;
    enable = 1'b1; ref_mode = 1'b1;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    send(10);
    expect_eq("ref writes", ref_writes, 10);
    expect_eq("wrong ref writes", wrong, 0);
    expect_eq("ref_len", int'(ref_len), 10);
    expect_eq("ref_overflow", int'(ref_overflow), 0);
    ref_mode = 1'b0; @(negedge clk);
    send(7);
    expect_eq("query writes", q_writes, 7);
    expect_eq("ref writes in query mode", ref_writes, 0);
    expect_eq("wrong query writes", wrong, 0);
    expect_eq("ref_len kept", int'(ref_len), 10);
    ref_mode = 1'b1; @(negedge clk);
    send(20);
    expect_eq("ref writes of long packet", ref_writes, DEPTH);
    expect_eq("wrong ref writes", wrong, 0);
    expect_eq("ref_len clipped", int'(ref_len), DEPTH);
    expect_eq("ref_overflow", int'(ref_overflow), 1);
    send(5);
    expect_eq("ref_len", int'(ref_len), 5);
    expect_eq("ref_overflow cleared", int'(ref_overflow), 0);
    expect_eq("wrong ref writes", wrong, 0);
    // held off while disabled
    enable = 1'b0; s_axis_tvalid = 1'b1; s_axis_tdata = 32'h1234; ref_writes = 0;
    repeat (5) begin
      @(negedge clk);
      expect_eq("tready while disabled", int'(s_axis_tready), 0);
    end
    expect_eq("writes while disabled", ref_writes, 0);
    s_axis_tvalid = 1'b0; enable = 1'b1;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
