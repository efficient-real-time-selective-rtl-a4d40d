// data_sink_fifo: synchronous FIFO that holds result words until the output
// stream accepts them.
//
// A circular buffer of DEPTH words with read and write pointers one bit wider
// than the address, so full and empty are told apart by the extra bit. push
// is ignored when full and pop when empty. rdata shows the oldest word
// combinationally (first-word fall-through). count gives the fill level.
//
// The paper names a "Data Sink FIFO" between the score updater and the output
// stream; its depth, width and fall-through behaviour are this design's own.
module data_sink_fifo #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     push,
  input  logic [WIDTH-1:0]         wdata,
  input  logic                     pop,
  output logic [WIDTH-1:0]         rdata,
  output logic                     full,
  output logic                     empty,
  output logic [$clog2(DEPTH+1)-1:0] count
);

  localparam int unsigned AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0]      wptr, rptr;
  logic             do_push, do_pop;

  assign full    = (wptr[AW] != rptr[AW]) && (wptr[AW-1:0] == rptr[AW-1:0]);
  assign empty   = (wptr == rptr);
  assign do_push = push && !full;
  assign do_pop  = pop && !empty;
  assign rdata   = mem[rptr[AW-1:0]];
  assign count   = ($clog2(DEPTH+1))'(wptr - rptr);

  always_ff @(posedge clk) begin
    if (do_push) mem[wptr[AW-1:0]] <= wdata;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wptr <= '0;
      rptr <= '0;
    end else begin
      if (do_push) wptr <= wptr + 1'b1;
      if (do_pop)  rptr <= rptr + 1'b1;
    end
  end

  initial begin
    assert (DEPTH >= 2 && (DEPTH & (DEPTH - 1)) == 0)
      else $error("data_sink_fifo: DEPTH must be a power of two");
  end

endmodule
