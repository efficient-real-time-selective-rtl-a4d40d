// axis_master: AXI4-Stream output of the search results.
//
// Words leave the data sink FIFO through a one-word output register. A word
// is taken from the FIFO whenever the register is empty or its word is being
// accepted (TREADY), so the stream can carry one word per cycle. Results are
// written to the FIFO in pairs, position first and score second; the second
// word of each pair carries TLAST, so every search result is one two-beat
// packet.
//
// The paper shows an AXI4-Stream master fed by the FIFO; the two-word packet
// and the TLAST rule are this design's own.
module axis_master #(
  parameter int unsigned TDATA_W = 32
) (
  input  logic               clk,
  input  logic               rst_n,
  // FIFO read side
  input  logic [TDATA_W-1:0] fifo_rdata,
  input  logic               fifo_empty,
  output logic               fifo_pop,
  // AXI4-Stream master
  output logic [TDATA_W-1:0] m_axis_tdata,
  output logic               m_axis_tvalid,
  output logic               m_axis_tlast,
  input  logic               m_axis_tready
);

  logic second;  // next word loaded is the second of its pair

  assign fifo_pop = !fifo_empty && (!m_axis_tvalid || m_axis_tready);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      m_axis_tdata  <= '0;
      m_axis_tvalid <= 1'b0;
      m_axis_tlast  <= 1'b0;
      second        <= 1'b0;
    end else if (fifo_pop) begin
      m_axis_tdata  <= fifo_rdata;
      m_axis_tvalid <= 1'b1;
      m_axis_tlast  <= second;
      second        <= !second;
    end else if (m_axis_tready) begin
      m_axis_tvalid <= 1'b0;
    end
  end

  a_hold : assert property (@(posedge clk) disable iff (!rst_n)
      m_axis_tvalid && !m_axis_tready |=> m_axis_tvalid && $stable(m_axis_tdata) && $stable(m_axis_tlast))
    else $error("axis_master: output word changed before it was accepted");

endmodule
