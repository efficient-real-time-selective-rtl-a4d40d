// ref_mem: on-chip memory for the reference signal (block RAM on the FPGA).
//
// The host loads the synthetic reference signal (forward and reverse strands,
// z-score normalised and scaled) once; every search then streams it from here
// into the first PE, one sample per cycle. One write port is driven by the
// input stream, one read port by the search sequencer. The read is
// synchronous: rdata holds mem[raddr] one cycle after re.
//
// That the reference lives in on-chip block RAM and is read into the PE chain
// follows the paper. Its depth of 295,000 16-bit samples is derived from the
// paper's limit of "295 kilobases" for the 5.1 Mb of block RAM (295,000 x 16
// bits = 4.7 Mb); the simple dual-port organisation is this design's own.
module ref_mem
  import haru_pkg::*;
#(
  parameter int unsigned DEPTH = REF_DEPTH,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  sample_t       wdata,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output sample_t       rdata
);

  sample_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  always_ff @(posedge clk) begin
    if (re) rdata <= mem[raddr];
  end

endmodule
