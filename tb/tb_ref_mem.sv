// tb_ref_mem: self-checking test of the reference memory (DEPTH = 100).
//
// Fills every address with a random sample, then reads all of them back in
// random order, checking each word one cycle after the read enable, and checks
// that rdata holds its value while re is low. Then overwrites some words while
// reading others in the same cycles.
module tb_ref_mem;
  import haru_pkg::*;

  localparam int unsigned DEPTH = 100;
  localparam int unsigned AW    = $clog2(DEPTH);

  logic          clk = 1'b0;
  logic          we, re;
  logic [AW-1:0] waddr, raddr;
  sample_t       wdata, rdata;
  int            model [DEPTH];
  int            checks = 0, failures = 0;

  ref_mem #(.DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic rd(int a);
    @(negedge clk); re = 1'b1; raddr = AW'(a);
    @(negedge clk); re = 1'b0;
    checks++;
    if (int'(rdata) != model[a]) begin
      failures++; $display("addr %0d: %0d expected %0d", a, rdata, model[a]);
    end
  endtask

  initial begin
    int last;
    we = 1'b0; re = 1'b0; waddr = '0; raddr = '0; wdata = '0;
    for (int a = 0; a < DEPTH; a++) begin
      model[a] = $urandom_range(0, 65535) - 32768;
      @(negedge clk); we = 1'b1; waddr = AW'(a); wdata = sample_t'(model[a]);
    end
    @(negedge clk); we = 1'b0;
    for (int k = 0; k < 300; k++) rd($urandom_range(0, DEPTH - 1));
    last = int'(rdata);
    repeat (4) @(negedge clk);
    checks++; if (int'(rdata) != last) begin failures++; $display("rdata changed without re"); end
    for (int k = 0; k < 100; k++) begin
      int wa, ra, v;
      wa = $urandom_range(0, DEPTH - 1);
      ra = $urandom_range(0, DEPTH - 1);
      v  = $urandom_range(0, 65535) - 32768;
      if (wa == ra) continue;
      @(negedge clk); we = 1'b1; waddr = AW'(wa); wdata = sample_t'(v);
      re = 1'b1; raddr = AW'(ra);
      @(negedge clk); we = 1'b0; re = 1'b0;
      model[wa] = v;
      checks++;
      if (int'(rdata) != model[ra]) begin failures++; $display("read during write wrong"); end
    end
    for (int a = 0; a < DEPTH; a++) rd(a);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
