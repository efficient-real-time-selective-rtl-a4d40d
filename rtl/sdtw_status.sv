// sdtw_status: status registers and the read side of the register map.
//
// Collects the state of the core and the score updater for the host: busy,
// a sticky done flag (set when a search finishes, cleared by the next START),
// the query-loaded and reference-overflow flags, the FIFO flags, the loaded
// reference length, and the position and score of the last finished search.
// The result registers are captured when done pulses, so they stay readable
// while the next search runs. rd_data is the combinational read mux for the
// AXI4-Lite slave, which registers it.
//
// The paper shows a Status block fed by the core and the score updater and
// read over AXI4-Lite; the fields and addresses are this design's own.
module sdtw_status
  import haru_pkg::*;
#(
  parameter int unsigned M = QUERY_LEN
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        busy,
  input  logic        start,
  input  logic        done,
  input  logic        ref_mode,
  input  logic        query_full,
  input  logic [31:0] query_count,
  input  logic        ref_overflow,
  input  logic        fifo_full,
  input  logic        fifo_empty,
  input  logic [31:0] ref_len,
  input  logic [31:0] position,
  input  cost_t       score,
  input  reg_addr_t   rd_addr,
  output logic [31:0] rd_data
);

  logic        done_q;
  logic [31:0] pos_q;
  cost_t       score_q;
  status_t     st;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      done_q  <= 1'b0;
      pos_q   <= '1;
      score_q <= COST_INF;
    end else begin
      if (start) done_q <= 1'b0;
      if (done) begin
        done_q  <= 1'b1;
        pos_q   <= position;
        score_q <= score;
      end
    end
  end

  always_comb begin
    st              = '0;
    st.busy         = busy;
    st.done         = done_q;
    st.query_full   = query_full;
    st.ref_overflow = ref_overflow;
    st.fifo_empty   = fifo_empty;
    st.fifo_full    = fifo_full;
    unique case (rd_addr)
      REG_CTRL:     rd_data = {30'd0, ref_mode, 1'b0};
      REG_STATUS:   rd_data = st;
      REG_REF_LEN:  rd_data = ref_len;
      REG_POSITION: rd_data = pos_q;
      REG_SCORE:    rd_data = 32'(score_q);
      REG_QCOUNT:   rd_data = query_count;
      REG_CONFIG:   rd_data = 32'(M);
      default:      rd_data = '0;
    endcase
  end

endmodule
