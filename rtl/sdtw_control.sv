// sdtw_control: control register and search sequencer.
//
// Writing the CTRL register sets REF_MODE (bit 1), which steers the input
// stream to the reference memory or the query buffer, and, with bit 0 set,
// starts a search. A START while a search runs is ignored. A search goes
//   IDLE -> CLEAR -> RUN -> PUSH_POS -> PUSH_SCORE -> IDLE
//   CLEAR       one cycle: empty the PE chain, set L1/L2 to infinity and reset
//               the score updater (clear = 1). N is taken from ref_len.
//   RUN         N+M cycles: in cycle c < N the reference memory is read at
//               address c; the sample reaches PE 0 one cycle later
//               (y_vld = registered read enable), and the last PE's cell for
//               column N appears in cycle N+M-1, N+M-1 cycles after the first
//               sample entered the chain, as the paper states.
//   PUSH_POS    push the position into the result FIFO,
//   PUSH_SCORE  then the score; done pulses with the second push.
// Either push waits while the FIFO is full (stall), so no result is lost when
// the host does not drain the output stream.
// From the cycle the START write is presented, done is high N+M+3 cycles
// later, when the FIFO has room.
//
// The paper shows a Control block that configures and starts the core; the
// register layout, the states and the FIFO handshake are this design's own.
module sdtw_control
  import haru_pkg::*;
#(
  parameter int unsigned M  = QUERY_LEN,
  parameter int unsigned AW = $clog2(REF_DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  // register write port from the AXI4-Lite slave
  input  logic          reg_wr_en,
  input  reg_addr_t     reg_wr_addr,
  input  logic [31:0]   reg_wr_data,
  input  logic [3:0]    reg_wr_strb,
  // reference length and results
  input  logic [31:0]   ref_len,
  input  cost_t         score,
  input  logic [31:0]   position,
  // result FIFO
  input  logic          fifo_full,
  output logic          fifo_push,
  output logic [31:0]   fifo_wdata,
  // to the datapath
  output logic          ref_mode,
  output logic          busy,
  output logic          clear,
  output logic          ref_re,
  output logic [AW-1:0] ref_raddr,
  output logic          y_vld,
  output logic          start,
  output logic          done,
  output logic          stall
);

  ctrl_state_t state;
  logic [31:0] cnt;
  logic [31:0] n_len;
  logic        ctrl_wr;

  assign ctrl_wr = reg_wr_en && (reg_wr_addr == REG_CTRL) && reg_wr_strb[0];
  assign start   = ctrl_wr && reg_wr_data[CTRL_START] && (state == ST_IDLE);

  assign busy      = (state != ST_IDLE);
  assign clear     = (state == ST_CLEAR);
  assign ref_re    = (state == ST_RUN) && (cnt < n_len);
  assign ref_raddr = AW'(cnt);
  assign stall     = (state == ST_PUSH_POS || state == ST_PUSH_SCORE) && fifo_full;
  assign fifo_push = (state == ST_PUSH_POS || state == ST_PUSH_SCORE) && !fifo_full;
  assign fifo_wdata = (state == ST_PUSH_POS) ? position : 32'(score);
  assign done      = (state == ST_PUSH_SCORE) && !fifo_full;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ref_mode <= 1'b0;
    end else if (ctrl_wr) begin
      ref_mode <= reg_wr_data[CTRL_REF_MODE];
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= ST_IDLE;
      cnt   <= '0;
      n_len <= '0;
      y_vld <= 1'b0;
    end else begin
      y_vld <= ref_re;
      unique case (state)
        ST_IDLE: begin
          if (start) begin
            state <= ST_CLEAR;
            n_len <= ref_len;
          end
        end
        ST_CLEAR: begin
          cnt   <= '0;
          y_vld <= 1'b0;
          state <= ST_RUN;
        end
        ST_RUN: begin
          cnt <= cnt + 32'd1;
          if (cnt == n_len + 32'(M) - 32'd1) state <= ST_PUSH_POS;
        end
        ST_PUSH_POS:   if (!fifo_full) state <= ST_PUSH_SCORE;
        ST_PUSH_SCORE: if (!fifo_full) state <= ST_IDLE;
        default:       state <= ST_IDLE;
      endcase
    end
  end

endmodule
