// haru_host_bfm: testbench model of the host side of the accelerator: the
// processor's AXI4-Lite accesses and the DMA's two AXI4-Stream channels.
//
// Tasks: axil_write / axil_read for register accesses (one at a time, as a
// driver would issue them), stream_send for one TDATA packet of 16-bit
// samples (TLAST on the last beat, optional random TVALID gaps, TVALID held
// until TREADY as the protocol requires). The output stream is collected into
// the queue rx_words, with rx_last_flags beside it; rx_ready_prob sets how
// often TREADY is high (100 = always, 0 = never). held_cycles counts cycles in
// which a beat was offered but TREADY was low.
module haru_host_bfm
  import haru_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  output reg_addr_t   s_axil_awaddr,
  output logic        s_axil_awvalid,
  input  logic        s_axil_awready,
  output logic [31:0] s_axil_wdata,
  output logic [3:0]  s_axil_wstrb,
  output logic        s_axil_wvalid,
  input  logic        s_axil_wready,
  input  logic [1:0]  s_axil_bresp,
  input  logic        s_axil_bvalid,
  output logic        s_axil_bready,
  output reg_addr_t   s_axil_araddr,
  output logic        s_axil_arvalid,
  input  logic        s_axil_arready,
  input  logic [31:0] s_axil_rdata,
  input  logic [1:0]  s_axil_rresp,
  input  logic        s_axil_rvalid,
  output logic        s_axil_rready,
  output logic [31:0] s_axis_tdata,
  output logic        s_axis_tvalid,
  output logic        s_axis_tlast,
  input  logic        s_axis_tready,
  input  logic [31:0] m_axis_tdata,
  input  logic        m_axis_tvalid,
  input  logic        m_axis_tlast,
  output logic        m_axis_tready
);

  logic [31:0] rx_words[$];
  logic        rx_last_flags[$];
  int          rx_ready_prob = 100;
  int          held_cycles = 0;
  int          resp_errors = 0;

  initial begin
    s_axil_awaddr = '0; s_axil_awvalid = 1'b0; s_axil_wdata = '0; s_axil_wstrb = '0;
    s_axil_wvalid = 1'b0; s_axil_bready = 1'b0; s_axil_araddr = '0; s_axil_arvalid = 1'b0;
    s_axil_rready = 1'b0; s_axis_tdata = '0; s_axis_tvalid = 1'b0; s_axis_tlast = 1'b0;
    m_axis_tready = 1'b0;
  end

  always @(negedge clk) m_axis_tready <= ($urandom_range(1, 100) <= rx_ready_prob);

  always @(posedge clk) begin
    if (rst_n && m_axis_tvalid && m_axis_tready) begin
      rx_words.push_back(m_axis_tdata);
      rx_last_flags.push_back(m_axis_tlast);
    end
    if (rst_n && s_axis_tvalid && !s_axis_tready) held_cycles++;
  end

  task automatic axil_write(reg_addr_t addr, logic [31:0] data);
    @(negedge clk);
    s_axil_awaddr = addr; s_axil_awvalid = 1'b1;
    s_axil_wdata = data; s_axil_wstrb = 4'hf; s_axil_wvalid = 1'b1;
    s_axil_bready = 1'b1;
    @(posedge clk);
    while (!(s_axil_awready && s_axil_wready)) @(posedge clk);
    @(negedge clk);
    s_axil_awvalid = 1'b0; s_axil_wvalid = 1'b0;
    @(posedge clk);
    while (!s_axil_bvalid) @(posedge clk);
    if (s_axil_bresp != 2'b00) resp_errors++;
    @(negedge clk);
    s_axil_bready = 1'b0;
  endtask

  task automatic axil_read(reg_addr_t addr, output logic [31:0] data);
    @(negedge clk);
    s_axil_araddr = addr; s_axil_arvalid = 1'b1; s_axil_rready = 1'b1;
    @(posedge clk);
    while (!s_axil_arready) @(posedge clk);
    @(negedge clk);
    s_axil_arvalid = 1'b0;
    @(posedge clk);
    while (!s_axil_rvalid) @(posedge clk);
    data = s_axil_rdata;
    if (s_axil_rresp != 2'b00) resp_errors++;
    @(negedge clk);
    s_axil_rready = 1'b0;
  endtask

  task automatic stream_send(input int samples[], input bit gaps);
    foreach (samples[k]) begin
      if (gaps) while ($urandom_range(0, 3) == 0) @(negedge clk);
      s_axis_tdata  = {16'h0, 16'(samples[k])};
      s_axis_tlast  = (k == samples.size() - 1);
      s_axis_tvalid = 1'b1;
      @(posedge clk);
      while (!s_axis_tready) @(posedge clk);
      @(negedge clk);
      s_axis_tvalid = 1'b0;
      s_axis_tlast  = 1'b0;
    end
  endtask

endmodule
