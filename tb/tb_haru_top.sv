// tb_haru_top: end-to-end test of the accelerator at reduced size
// (M = 8 PEs, 64-sample reference memory, 4-word result FIFO).
//
// Through the same AXI4-Lite and AXI4-Stream ports a host would use, it loads
// references and queries, starts searches and compares every result (both
// the stream packet and the POSITION/SCORE registers) with the software model
// of subsequence DTW. It checks the latency of each search: N+M-1 cycles
// from the first reference sample entering the PE chain to the last cell of
// the last row, and N+M+3 cycles from START to done. It makes each mechanism
// of the design happen and counts it, failing if one never happened:
//   mode switch       reference and query packets through the one input
//   back-pressure     a query sent during a search is held off (TREADY low)
//   FIFO stall        results pushed while the output stream is blocked
//   overflow          a reference longer than the memory is clipped
//   ignored START     a START during a search starts nothing
//   exact match       a query cut from the reference scores 0 at its end
module tb_haru_top;
  import haru_pkg::*;
  import sdtw_model_pkg::*;

  localparam int unsigned M     = 8;
  localparam int unsigned DEPTH = 64;
  localparam int unsigned FW    = 4;

  logic        clk = 1'b0;
  logic        rst_n;
  reg_addr_t   s_axil_awaddr, s_axil_araddr;
  logic        s_axil_awvalid, s_axil_awready, s_axil_wvalid, s_axil_wready;
  logic [31:0] s_axil_wdata, s_axil_rdata;
  logic [3:0]  s_axil_wstrb;
  logic [1:0]  s_axil_bresp, s_axil_rresp;
  logic        s_axil_bvalid, s_axil_bready, s_axil_arvalid, s_axil_arready;
  logic        s_axil_rvalid, s_axil_rready;
  logic [31:0] s_axis_tdata, m_axis_tdata;
  logic        s_axis_tvalid, s_axis_tlast, s_axis_tready;
  logic        m_axis_tvalid, m_axis_tlast, m_axis_tready;

  int checks = 0, failures = 0;
  int n_mode_switch = 0, n_backpressure = 0, n_stall = 0, n_overflow = 0;
  int n_ignored_start = 0, n_exact = 0;

  haru_top #(.M(M), .DEPTH(DEPTH), .FIFO_WORDS(FW)) dut (.*);
  haru_host_bfm host (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // latency monitors
  int cyc = 0, t_start, t_done, t_first_y, t_last_cell, n_starts = 0, n_dones = 0, stall_cycles = 0;
  always @(posedge clk) begin
    cyc++;
    if (rst_n) begin
      if (dut.u_ctrl.start) begin t_start = cyc; t_first_y = -1; n_starts++; end
      if (dut.y_vld && t_first_y < 0) t_first_y = cyc;
      if (dut.last_vld) t_last_cell = cyc;
      if (dut.u_ctrl.done) begin t_done = cyc; n_dones++; end
      if (dut.u_ctrl.stall) stall_cycles++;
    end
  end

  task automatic expect_eq(string what, longint got, longint want);
    checks++;
    if (got != want) begin failures++; $display("%s = %0d, expected %0d", what, got, want); end
  endtask

  int cur_ref[];
  int cur_query[];

  task automatic load_ref(int n, bit gaps);
    logic [31:0] r;
    cur_ref = new[n];
    foreach (cur_ref[j]) cur_ref[j] = $urandom_range(0, 400) - 200;
    host.axil_write(REG_CTRL, 32'h2);
    n_mode_switch++;
    host.stream_send(cur_ref, gaps);
    host.axil_read(REG_REF_LEN, r);
    expect_eq("REF_LEN", r, (n > DEPTH) ? DEPTH : n);
    host.axil_read(REG_STATUS, r);
    expect_eq("STATUS.ref_overflow", r[3], n > DEPTH);
    if (n > DEPTH) begin n_overflow++; cur_ref = new[DEPTH](cur_ref); end
  endtask

  task automatic make_query(bit embed);
    cur_query = new[M];
    if (embed) begin
      int off;
      off = $urandom_range(0, cur_ref.size() - M);
      foreach (cur_query[i]) cur_query[i] = cur_ref[off + i];
    end else begin
      foreach (cur_query[i]) cur_query[i] = $urandom_range(0, 400) - 200;
    end
  endtask

  task automatic load_query();
    logic [31:0] r;
    host.axil_write(REG_CTRL, 32'h0);
    n_mode_switch++;
    host.stream_send(cur_query, 1'b1);
    host.axil_read(REG_QCOUNT, r);
    expect_eq("QCOUNT", r, M);
    host.axil_read(REG_STATUS, r);
    expect_eq("STATUS.query_full", r[2], 1);
  endtask

  task automatic wait_done();
    logic [31:0] r;
    do host.axil_read(REG_STATUS, r); while (!r[1]);
    expect_eq("busy after done", r[0], 0);
  endtask

  task automatic check_result(longint score, int pos, bit from_regs);
    logic [31:0] r;
    if (from_regs) begin
      host.axil_read(REG_POSITION, r);
      expect_eq("POSITION register", r, pos);
      host.axil_read(REG_SCORE, r);
      expect_eq("SCORE register", r, score);
    end
  endtask

  task automatic check_stream(longint score, int pos);
    int w;
    w = 0;
    while (host.rx_words.size() < 2 && w < 1000) begin @(posedge clk); w++; end
    expect_eq("stream words present", host.rx_words.size() >= 2, 1);
    if (host.rx_words.size() >= 2) begin
      expect_eq("stream position", host.rx_words[0], pos);
      expect_eq("stream position TLAST", host.rx_last_flags[0], 0);
      expect_eq("stream score", host.rx_words[1], score);
      expect_eq("stream score TLAST", host.rx_last_flags[1], 1);
      void'(host.rx_words.pop_front()); void'(host.rx_words.pop_front());
      void'(host.rx_last_flags.pop_front()); void'(host.rx_last_flags.pop_front());
    end
  endtask

  task automatic one_search(bit embed, bit preload_next);
    longint score; int pos;
    int starts0;
    make_query(embed);
    load_query();
    sdtw_search(cur_query, cur_ref, score, pos);
    if (embed) begin expect_eq("model score of embedded query", score, 0); n_exact++; end
    starts0 = n_starts;
    host.axil_write(REG_CTRL, 32'h1);
    // START again while busy: must be ignored
    host.axil_write(REG_CTRL, 32'h1);
    n_ignored_start++;
    if (preload_next) begin
      // next query offered during the search: held off until the search ends
      int held0;
      int nxt[];
      held0 = host.held_cycles;
      nxt = new[M];
      foreach (nxt[i]) nxt[i] = cur_query[M-1-i];
      fork host.stream_send(nxt, 1'b0); join_none
      wait_done();
      wait fork;
      checks++;
      if (host.held_cycles == held0) begin failures++; $display("query not held off during search"); end
      else n_backpressure++;
    end else begin
      wait_done();
    end
    expect_eq("one search per START", n_starts - starts0, 1);
    expect_eq("PE-chain cycles N+M-1", t_last_cell - t_first_y + 1, cur_ref.size() + M - 1);
    expect_eq("START-to-done cycles N+M+3", t_done - t_start, cur_ref.size() + M + 3);
    check_result(score, pos, 1'b1);
    check_stream(score, pos);
  endtask

  initial begin
    logic [31:0] r;
    rst_n = 1'b0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    host.axil_read(REG_CONFIG, r);
    expect_eq("CONFIG", r, M);
    load_ref(50, 1'b1);
    one_search(1'b0, 1'b0);
    one_search(1'b1, 1'b0);
    one_search(1'b0, 1'b1);
    load_ref(M, 1'b0);
    one_search(1'b1, 1'b0);
    load_ref(DEPTH + 6, 1'b1);   // overflow: only DEPTH samples kept
    one_search(1'b0, 1'b0);
    one_search(1'b1, 1'b0);

    // FIFO stall: block the output stream, run three searches (6 words > 4)
    begin
      longint sc[3]; int ps[3];
      int stall0;
      stall0 = stall_cycles;
      host.rx_ready_prob = 0;
      load_ref(30, 1'b0);
      for (int s = 0; s < 3; s++) begin
        make_query(s == 1);
        load_query();
        sdtw_search(cur_query, cur_ref, sc[s], ps[s]);
        host.axil_write(REG_CTRL, 32'h1);
        if (s < 2) wait_done();
      end
      repeat (200) @(negedge clk);
      host.axil_read(REG_STATUS, r);
      expect_eq("busy while stalled", r[0], 1);
      expect_eq("FIFO full while stalled", r[5], 1);
      checks++;
      if (stall_cycles == stall0) begin failures++; $display("no stall"); end
      else n_stall++;
      host.rx_ready_prob = 50;
      wait_done();
      for (int s = 0; s < 3; s++) check_stream(sc[s], ps[s]);
      host.rx_ready_prob = 100;
    end

    expect_eq("AXI-Lite error responses", host.resp_errors, 0);
    expect_eq("spare stream words", host.rx_words.size(), 0);
    $display("mechanisms: mode_switch=%0d backpressure=%0d fifo_stall=%0d overflow=%0d ignored_start=%0d exact_match=%0d",
             n_mode_switch, n_backpressure, n_stall, n_overflow, n_ignored_start, n_exact);
    checks++; if (n_mode_switch == 0)   begin failures++; $display("mode switch never happened"); end
    checks++; if (n_backpressure == 0)  begin failures++; $display("back-pressure never happened"); end
    checks++; if (n_stall == 0)         begin failures++; $display("FIFO stall never happened"); end
    checks++; if (n_overflow == 0)      begin failures++; $display("overflow never happened"); end
    checks++; if (n_ignored_start == 0) begin failures++; $display("ignored START never happened"); end
    checks++; if (n_exact == 0)         begin failures++; $display("exact match never happened"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
