// tb_haru_full: the accelerator at its default size (250 PEs, 295,000-sample
// reference memory) running one complete search for each of the two
// reference sizes evaluated for this design: a SARS-CoV-2 genome (29,903
// bases, so 59,806 reference samples for both strands) and the RFC1 region of
// the human genome (128,915 bases, 257,830 samples).
//
// The reference signals are synthetic: independent samples spread over
// +-3 standard deviations at the 2^5 scale (+-96). Each query is 250 events
// cut from the reference at a random place, with small noise (+-3) and a few
// repeated and skipped events, as event detection produces. For each search
// the testbench loads the reference and the query over AXI4-Stream, writes
// START, waits for done and checks: position and score against the software
// model (stream packet and registers), the model's position against the
// planted end of the query, and the latency (N+M-1 cycles in the PE chain,
// N+M+3 from START to done). Each reference is loaded once and searched with
// three reads, as in a batch: two cut from it and one unrelated read, whose
// score must come out more than twice as high, the separation a selection
// rule relies on.
module tb_haru_full;
  import haru_pkg::*;
  import sdtw_model_pkg::*;

  localparam int unsigned M = QUERY_LEN;

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

  haru_top dut (.*);
  haru_host_bfm host (.*);

  always #5 clk = ~clk;  // 100 MHz, as evaluated

  initial begin
    repeat (4000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int cyc = 0, t_start, t_done, t_first_y, t_last_cell;
  always @(posedge clk) begin
    cyc++;
    if (rst_n) begin
      if (dut.u_ctrl.start) begin t_start = cyc; t_first_y = -1; end
      if (dut.y_vld && t_first_y < 0) t_first_y = cyc;
      if (dut.last_vld) t_last_cell = cyc;
      if (dut.u_ctrl.done) t_done = cyc;
    end
  end

  task automatic expect_eq(string what, longint got, longint want);
    checks++;
    if (got != want) begin failures++; $display("%s = %0d, expected %0d", what, got, want); end
  endtask

  int ref_sig[];

  task automatic load_reference(string name, int n);
    logic [31:0] r;
    ref_sig = new[n];
    foreach (ref_sig[j]) ref_sig[j] = $urandom_range(0, 192) - 96;
    host.axil_write(REG_CTRL, 32'h2);
    host.stream_send(ref_sig, 1'b0);
    host.axil_read(REG_REF_LEN, r);
    expect_eq({name, " REF_LEN"}, r, n);
  endtask

  // One read against the loaded reference. on_target: the query is cut from
  // the reference; otherwise it is unrelated random data. Returns the score.
  task automatic one_read(string name, bit on_target, output longint score);
    int query[];
    int off, src, planted_end;
    int pos;
    int n;
    logic [31:0] r;
    int w;
    n = ref_sig.size();
    query = new[M];
    off = $urandom_range(1000, n - 2 * M);
    src = off;
    foreach (query[i]) begin
      int u;
      u = $urandom_range(0, 19);
      if (u == 0 && i > 0) src = src;            // repeated event
      else if (u == 1) src = src + 2;            // skipped event
      else if (i > 0) src = src + 1;
      query[i] = on_target ? ref_sig[src] + $urandom_range(0, 6) - 3 : $urandom_range(0, 192) - 96;
    end
    planted_end = src;
    sdtw_search(query, ref_sig, score, pos);
    if (on_target) begin
      $display("%s: N=%0d, query planted at %0d..%0d, model: position %0d score %0d", name, n, off, planted_end, pos, score);
      checks++;
      if (pos < planted_end - 2 || pos > planted_end + 2) begin
        failures++; $display("model did not find the planted query");
      end
    end else begin
      $display("%s: N=%0d, unrelated query, model: position %0d score %0d", name, n, pos, score);
    end

    host.axil_write(REG_CTRL, 32'h0);
    host.stream_send(query, 1'b0);
    host.axil_read(REG_QCOUNT, r);
    expect_eq("QCOUNT", r, M);
    host.axil_write(REG_CTRL, 32'h1);
    do host.axil_read(REG_STATUS, r); while (!r[1]);
    host.axil_read(REG_POSITION, r);
    expect_eq("POSITION", r, pos);
    host.axil_read(REG_SCORE, r);
    expect_eq("SCORE", r, score);
    w = 0;
    while (host.rx_words.size() < 2 && w < 1000) begin @(posedge clk); w++; end
    expect_eq("stream words", host.rx_words.size(), 2);
    if (host.rx_words.size() == 2) begin
      expect_eq("stream position", host.rx_words[0], pos);
      expect_eq("stream score", host.rx_words[1], score);
      expect_eq("stream TLAST", host.rx_last_flags[1], 1);
    end
    host.rx_words.delete(); host.rx_last_flags.delete();
    expect_eq("PE-chain cycles N+M-1", t_last_cell - t_first_y + 1, n + M - 1);
    expect_eq("START-to-done cycles N+M+3", t_done - t_start, n + M + 3);
    $display("%s: %0d cycles from START to done (%0.1f us at 100 MHz)", name, t_done - t_start,
             real'(t_done - t_start) / 100.0);
  endtask

  // A reference and a batch of reads: two from the target, one unrelated,
  // whose score must be clearly worse (here: more than twice) than both.
  task automatic workload(string name, int n);
    longint s_on1, s_on2, s_off;
    load_reference(name, n);
    one_read(name, 1'b1, s_on1);
    one_read(name, 1'b0, s_off);
    one_read(name, 1'b1, s_on2);
    checks++;
    if (!(s_off > 2 * s_on1 && s_off > 2 * s_on2)) begin
      failures++; $display("%s: unrelated read scored %0d, on-target %0d and %0d", name, s_off, s_on1, s_on2);
    end
  endtask

  initial begin
    rst_n = 1'b0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    workload("SARS-CoV-2", 59806);
    workload("RFC1", 257830);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
