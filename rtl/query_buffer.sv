// query_buffer: holds the M query events x[1..M] that stay fixed in the PE
// chain for a whole search.
//
// Samples arrive one per write strobe and are shifted in from the top, so
// after M writes x[0] holds the first sample of the packet and x[M-1] the
// last, one per PE. A write that carries the stream's last flag ends the
// packet; the next write starts a new query and restarts the count. count
// saturates at M and full says the buffer holds a complete query. If a packet
// is longer than M, the last M samples remain.
//
// The paper names the buffer and feeds one entry to each PE; loading it by
// shifting, the packet framing and the count are this design's choices.
// Timing: a write is visible on x and count the next cycle.
module query_buffer
  import haru_pkg::*;
#(
  parameter int unsigned M = QUERY_LEN
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 wr_en,
  input  sample_t              wr_data,
  input  logic                 wr_last,
  output sample_t              x [M],
  output logic [$clog2(M+1)-1:0] count,
  output logic                 full
);

  localparam int unsigned CW = $clog2(M+1);
  logic sop;  // next write starts a new packet

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int k = 0; k < M; k++) x[k] <= '0;
      count <= '0;
      sop   <= 1'b1;
    end else if (wr_en) begin
      for (int k = 0; k < M-1; k++) x[k] <= x[k+1];
      x[M-1] <= wr_data;
      if (sop)                count <= CW'(1);
      else if (count != CW'(M)) count <= count + CW'(1);
      sop <= wr_last;
    end
  end

  assign full = (count == CW'(M));

endmodule
