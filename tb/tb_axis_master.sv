// tb_axis_master: self-checking test of the AXI4-Stream output stage.
//
// A queue in the testbench plays the FIFO (first-word fall-through, empty
// flag, pop). Result pairs are added at random times and the receiver drives
// TREADY randomly. Every accepted word must come out in order, TLAST must be
// set on every second word and only there, and TVALID/TDATA must hold while
// TREADY is low (also asserted inside the block). With TREADY held high and
// words waiting, one word must leave per cycle.
module tb_axis_master;

  logic        clk = 1'b0;
  logic        rst_n;
  logic [31:0] fifo_rdata, m_axis_tdata;
  logic        fifo_empty, fifo_pop;
  logic        m_axis_tvalid, m_axis_tlast, m_axis_tready;
  int          checks = 0, failures = 0;
  int          q[$], expect_q[$];
  int          received = 0, busy_cycles = 0;

  axis_master #(.TDATA_W(32)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  assign fifo_empty = (q.size() == 0);
  assign fifo_rdata = (q.size() > 0) ? q[0] : 32'd0;

  always @(posedge clk) begin
    if (rst_n) begin
      if (m_axis_tvalid && m_axis_tready) begin
        checks++;
        if (expect_q.size() == 0 || int'(m_axis_tdata) != expect_q[0] || m_axis_tlast != (received % 2 == 1)) begin
          failures++;
          $display("word %0d: %0h last %0b", received, m_axis_tdata, m_axis_tlast);
        end
        if (expect_q.size() > 0) void'(expect_q.pop_front());
        received++;
      end
    end
  end

  // the model FIFO pops after the block has sampled its output word
  always @(posedge clk) begin
    logic p;
    p = rst_n && fifo_pop;
    #1;
    if (p && q.size() > 0) void'(q.pop_front());
  end

  task automatic add_pair();
    int a, b;
    a = $urandom; b = $urandom;
    q.push_back(a); q.push_back(b);
    expect_q.push_back(a); expect_q.push_back(b);
  endtask

  initial begin
    int sent, start_rx;
    rst_n = 1'b0; m_axis_tready = 1'b0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    sent = 0;
    for (int k = 0; k < 2000; k++) begin
      @(negedge clk);
      if ($urandom_range(0, 5) == 0) begin add_pair(); sent += 2; end
      m_axis_tready = ($urandom_range(0, 2) != 0);
    end
    // throughput: 8 pairs waiting, TREADY high
    m_axis_tready = 1'b0;
    repeat (10) @(negedge clk);
    for (int k = 0; k < 8; k++) begin add_pair(); sent += 2; end
    start_rx = received;
    @(negedge clk); m_axis_tready = 1'b1;
    repeat (16) @(negedge clk);
    checks++;
    if (received - start_rx < 15) begin failures++; $display("only %0d words in 16 cycles", received - start_rx); end
    repeat (20) @(negedge clk);
    checks++;
    if (received != sent) begin failures++; $display("received %0d of %0d words", received, sent); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
