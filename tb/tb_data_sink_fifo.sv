// tb_data_sink_fifo: self-checking test of the result FIFO (DEPTH = 4).
//
// Random pushes and pops, including pushes when full and pops when empty,
// against a queue model: rdata must show the oldest word, full/empty/count
// must match the model's fill level every cycle. The phases bias towards
// filling and draining so both flags are exercised.
module tb_data_sink_fifo;

  localparam int unsigned DEPTH = 4;

  logic        clk = 1'b0;
  logic        rst_n, push, pop, full, empty;
  logic [31:0] wdata, rdata;
  logic [2:0]  count;
  int          checks = 0, failures = 0;
  int          model[$];
  int          saw_full = 0, saw_empty = 0;

  data_sink_fifo #(.WIDTH(32), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 1'b0; push = 1'b0; pop = 1'b0; wdata = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < 3000; k++) begin
      int bias;
      bias = ((k / 200) % 2 == 0) ? 3 : 1;
      @(negedge clk);
      checks++;
      if (int'(count) != model.size() || full != (model.size() == DEPTH) || empty != (model.size() == 0)
          || (model.size() > 0 && int'(rdata) != model[0])) begin
        failures++;
        $display("cycle %0d: count %0d full %0b empty %0b rdata %0h, model size %0d", k, count, full, empty, rdata, model.size());
      end
      if (full) saw_full++;
      if (empty) saw_empty++;
      push  = ($urandom_range(0, 3) < bias);
      pop   = ($urandom_range(0, 3) >= bias);
      wdata = $urandom;
      #1;
      begin
        bit was_full;
        was_full = (model.size() == DEPTH);  // a push into a full FIFO is dropped, even with a pop
        if (pop && model.size() > 0) void'(model.pop_front());
        if (push && !was_full) model.push_back(int'(wdata));
      end
    end
    checks++;
    if (saw_full == 0 || saw_empty == 0) begin failures++; $display("full or empty never reached"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
