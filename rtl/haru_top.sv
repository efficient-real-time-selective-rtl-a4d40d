// haru_top: the sDTW accelerator for selective nanopore sequencing, with one
// query processor.
//
// The host loads a reference signal (REF_MODE = 1) and a query of M events
// (REF_MODE = 0) through the AXI4-Stream input, then writes START over
// AXI4-Lite. The sequencer streams the N reference samples from on-chip
// memory into a chain of M processing elements, which evaluate the
// subsequence-DTW cost matrix one anti-diagonal per cycle while keeping only
// two previous cost columns (L1, L2). The score updater follows the last row
// and keeps the smallest cost and its reference position. After N+M-1 cycles
// of computation the position and the score go, as one two-word packet
// (position, then score with TLAST), through the result FIFO to the
// AXI4-Stream output; they can also be read from the status registers.
//
// Blocks and connections follow the paper's accelerator drawing: AXI-Stream
// slave -> reference/query samples -> core sDTW (query buffer, PE chain,
// Cost/L1/L2) -> score updater -> data sink FIFO -> AXI-Stream master, with
// control and status registers behind an AXI4-Lite slave. The DMA engine and
// the processor are outside; their buses are this module's ports. Widths,
// register map and handshakes are this design's own (see each block).
//
// Timing: one sample per cycle on each stream; a search takes N+M+3 cycles
// from the START write to done, N+M-1 of them in the PE chain.
module haru_top
  import haru_pkg::*;
#(
  parameter int unsigned M          = QUERY_LEN,
  parameter int unsigned DEPTH      = REF_DEPTH,
  parameter int unsigned FIFO_WORDS = FIFO_DEPTH
) (
  input  logic        clk,
  input  logic        rst_n,
  // AXI4-Lite control and status
  input  reg_addr_t   s_axil_awaddr,
  input  logic        s_axil_awvalid,
  output logic        s_axil_awready,
  input  logic [31:0] s_axil_wdata,
  input  logic [3:0]  s_axil_wstrb,
  input  logic        s_axil_wvalid,
  output logic        s_axil_wready,
  output logic [1:0]  s_axil_bresp,
  output logic        s_axil_bvalid,
  input  logic        s_axil_bready,
  input  reg_addr_t   s_axil_araddr,
  input  logic        s_axil_arvalid,
  output logic        s_axil_arready,
  output logic [31:0] s_axil_rdata,
  output logic [1:0]  s_axil_rresp,
  output logic        s_axil_rvalid,
  input  logic        s_axil_rready,
  // AXI4-Stream input: reference and query samples
  input  logic [31:0] s_axis_tdata,
  input  logic        s_axis_tvalid,
  input  logic        s_axis_tlast,
  output logic        s_axis_tready,
  // AXI4-Stream output: position and score
  output logic [31:0] m_axis_tdata,
  output logic        m_axis_tvalid,
  output logic        m_axis_tlast,
  input  logic        m_axis_tready
);

  localparam int unsigned AW = $clog2(DEPTH);
  localparam int unsigned QW = $clog2(M+1);

  // register interface
  logic        reg_wr_en;
  reg_addr_t   reg_wr_addr, reg_rd_addr;
  logic [31:0] reg_wr_data, reg_rd_data;
  logic [3:0]  reg_wr_strb;

  // control
  logic ref_mode, busy, clear, start, done, stall;

  // input side
  logic          ref_we, ref_re, q_we, q_last;
  logic [AW-1:0] ref_waddr, ref_raddr;
  sample_t       ref_wdata, ref_rdata, q_wdata;
  logic [31:0]   ref_len;
  logic          ref_overflow;

  // core and score
  sample_t       x [M];
  logic [QW-1:0] q_count;
  logic          q_full;
  logic          y_vld;
  cost_t         last_cost, score;
  logic          last_vld;
  logic [31:0]   position;

  // result path
  logic          fifo_push, fifo_pop, fifo_full, fifo_empty;
  logic [31:0]   fifo_wdata, fifo_rdata;
  logic [$clog2(FIFO_WORDS+1)-1:0] fifo_count;

  axil_slave u_axil (
    .clk, .rst_n,
    .s_axil_awaddr, .s_axil_awvalid, .s_axil_awready,
    .s_axil_wdata, .s_axil_wstrb, .s_axil_wvalid, .s_axil_wready,
    .s_axil_bresp, .s_axil_bvalid, .s_axil_bready,
    .s_axil_araddr, .s_axil_arvalid, .s_axil_arready,
    .s_axil_rdata, .s_axil_rresp, .s_axil_rvalid, .s_axil_rready,
    .reg_wr_en, .reg_wr_addr, .reg_wr_data, .reg_wr_strb,
    .reg_rd_addr, .reg_rd_data
  );

  sdtw_control #(.M(M), .AW(AW)) u_ctrl (
    .clk, .rst_n,
    .reg_wr_en, .reg_wr_addr, .reg_wr_data, .reg_wr_strb,
    .ref_len, .score, .position,
    .fifo_full, .fifo_push, .fifo_wdata,
    .ref_mode, .busy, .clear, .ref_re, .ref_raddr, .y_vld,
    .start, .done, .stall
  );

  sdtw_status #(.M(M)) u_status (
    .clk, .rst_n,
    .busy, .start, .done, .ref_mode,
    .query_full (q_full),
    .query_count(32'(q_count)),
    .ref_overflow, .fifo_full, .fifo_empty,
    .ref_len, .position, .score,
    .rd_addr(reg_rd_addr),
    .rd_data(reg_rd_data)
  );

  axis_slave #(.TDATA_W(32), .DEPTH(DEPTH), .AW(AW)) u_axis_in (
    .clk, .rst_n,
    .s_axis_tdata, .s_axis_tvalid, .s_axis_tlast, .s_axis_tready,
    .enable(!busy), .ref_mode,
    .ref_we, .ref_waddr, .ref_wdata,
    .q_we, .q_wdata, .q_last,
    .ref_len, .ref_overflow
  );

  ref_mem #(.DEPTH(DEPTH), .AW(AW)) u_ref (
    .clk,
    .we(ref_we), .waddr(ref_waddr), .wdata(ref_wdata),
    .re(ref_re), .raddr(ref_raddr), .rdata(ref_rdata)
  );

  query_buffer #(.M(M)) u_query (
    .clk, .rst_n,
    .wr_en(q_we), .wr_data(q_wdata), .wr_last(q_last),
    .x, .count(q_count), .full(q_full)
  );

  core_sdtw #(.M(M)) u_core (
    .clk, .rst_n, .clear,
    .y_in(ref_rdata), .y_vld_in(y_vld),
    .x,
    .last_cost, .last_vld
  );

  score_updater u_score (
    .clk, .rst_n, .clear,
    .cost_in(last_cost), .vld_in(last_vld),
    .score, .position
  );

  data_sink_fifo #(.WIDTH(32), .DEPTH(FIFO_WORDS)) u_fifo (
    .clk, .rst_n,
    .push(fifo_push), .wdata(fifo_wdata),
    .pop(fifo_pop), .rdata(fifo_rdata),
    .full(fifo_full), .empty(fifo_empty), .count(fifo_count)
  );

  axis_master #(.TDATA_W(32)) u_axis_out (
    .clk, .rst_n,
    .fifo_rdata, .fifo_empty, .fifo_pop,
    .m_axis_tdata, .m_axis_tvalid, .m_axis_tlast, .m_axis_tready
  );

endmodule
