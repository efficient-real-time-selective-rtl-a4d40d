// axis_slave: AXI4-Stream input of the accelerator.
//
// The host's DMA streams either a reference signal or a query through this
// port; the REF_MODE control bit says which. One 16-bit sample travels in the
// low half of each TDATA beat, and TLAST closes a packet.
//   REF_MODE = 1: beat k of the packet is written to reference memory address
//                 k. On TLAST the number of samples written becomes ref_len
//                 (N). Samples past the memory's depth are dropped and raise
//                 ref_overflow until the next reference packet starts.
//   REF_MODE = 0: each beat is shifted into the query buffer (q_we/q_wdata,
//                 q_last = TLAST).
// TREADY equals enable, which the sequencer drops while a search runs, so new
// data cannot disturb a search: the stream is held off instead. A change of
// REF_MODE restarts the reference address at 0.
//
// The AXI4-Stream input and its two destinations follow the paper; the beat
// format, the mode bit and the length capture are this design's own.
module axis_slave
  import haru_pkg::*;
#(
  parameter int unsigned TDATA_W   = 32,
  parameter int unsigned DEPTH     = REF_DEPTH,
  parameter int unsigned AW        = $clog2(DEPTH)
) (
  input  logic               clk,
  input  logic               rst_n,
  // AXI4-Stream slave
  input  logic [TDATA_W-1:0] s_axis_tdata,
  input  logic               s_axis_tvalid,
  input  logic               s_axis_tlast,
  output logic               s_axis_tready,
  // control
  input  logic               enable,
  input  logic               ref_mode,
  // reference memory write port
  output logic               ref_we,
  output logic [AW-1:0]      ref_waddr,
  output sample_t            ref_wdata,
  // query buffer write port
  output logic               q_we,
  output sample_t            q_wdata,
  output logic               q_last,
  // reference length and error flag
  output logic [31:0]        ref_len,
  output logic               ref_overflow
);

  logic        beat;
  logic [31:0] wcnt;       // samples of the current reference packet so far
  logic        mode_q;
  logic        in_range;

  assign s_axis_tready = enable;
  assign beat          = s_axis_tvalid && s_axis_tready;
  assign in_range      = (wcnt < 32'(DEPTH));

  assign ref_we    = beat && ref_mode && in_range;
  assign ref_waddr = AW'(wcnt);
  assign ref_wdata = sample_t'(s_axis_tdata[SAMPLE_W-1:0]);

  assign q_we      = beat && !ref_mode;
  assign q_wdata   = sample_t'(s_axis_tdata[SAMPLE_W-1:0]);
  assign q_last    = s_axis_tlast;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wcnt         <= '0;
      mode_q       <= 1'b0;
      ref_len      <= '0;
      ref_overflow <= 1'b0;
    end else begin
      mode_q <= ref_mode;
      if (ref_mode != mode_q) begin
        wcnt <= '0;
      end else if (beat && ref_mode) begin
        if (wcnt == 0) ref_overflow <= 1'b0;
        if (!in_range) ref_overflow <= 1'b1;
        if (s_axis_tlast) begin
          wcnt    <= '0;
          ref_len <= in_range ? wcnt + 32'd1 : 32'(DEPTH);
        end else begin
          wcnt <= wcnt + 32'd1;
        end
      end
    end
  end

  // AXI4-Stream rule for the sender: once TVALID is high it stays high, with
  // the same TDATA and TLAST, until TREADY takes the beat.
  a_tvalid_hold : assert property (@(posedge clk) disable iff (!rst_n)
      s_axis_tvalid && !s_axis_tready |=> s_axis_tvalid && $stable(s_axis_tdata) && $stable(s_axis_tlast))
    else $error("axis_slave: TVALID dropped or TDATA changed before TREADY");

endmodule
