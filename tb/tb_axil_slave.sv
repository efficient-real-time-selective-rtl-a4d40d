// tb_axil_slave: self-checking test of the AXI4-Lite slave.
//
// A testbench register file (8 words, written through reg_wr_*, read through
// reg_rd_addr/reg_rd_data) sits behind the slave. Writes are issued with the
// address first, the data first, or both together, with random BREADY delay;
// each must produce exactly one reg_wr_en pulse with the right address, data
// and strobes, and one OKAY response. Reads with random RREADY delay must
// return the register file's contents. The slave's own assertions check that
// BVALID and RVALID are held until taken.
module tb_axil_slave;
  import haru_pkg::*;

  logic        clk = 1'b0;
  logic        rst_n;
  reg_addr_t   s_axil_awaddr, s_axil_araddr, reg_wr_addr, reg_rd_addr;
  logic        s_axil_awvalid, s_axil_awready, s_axil_wvalid, s_axil_wready;
  logic [31:0] s_axil_wdata, s_axil_rdata, reg_wr_data, reg_rd_data;
  logic [3:0]  s_axil_wstrb, reg_wr_strb;
  logic [1:0]  s_axil_bresp, s_axil_rresp;
  logic        s_axil_bvalid, s_axil_bready, s_axil_arvalid, s_axil_arready;
  logic        s_axil_rvalid, s_axil_rready, reg_wr_en;
  int          checks = 0, failures = 0;
  logic [31:0] regs [8];
  logic [31:0] model [8];
  int          wr_pulses = 0;

  axil_slave dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  assign reg_rd_data = regs[reg_rd_addr[4:2]];
  always @(posedge clk) begin
    if (rst_n && reg_wr_en) begin
      for (int b = 0; b < 4; b++)
        if (reg_wr_strb[b]) regs[reg_wr_addr[4:2]][8*b +: 8] <= reg_wr_data[8*b +: 8];
      wr_pulses++;
    end
  end

  task automatic axil_write(int idx, logic [31:0] d, logic [3:0] strb, int order);
    int pulses0 = wr_pulses;
    @(negedge clk);
    if (order != 1) begin s_axil_awvalid = 1'b1; s_axil_awaddr = reg_addr_t'(idx * 4); end
    if (order != 0) begin s_axil_wvalid = 1'b1; s_axil_wdata = d; s_axil_wstrb = strb; end
    if (order != 2) begin
      @(posedge clk); while (!(order == 0 ? s_axil_awready : s_axil_wready)) @(posedge clk);
      @(negedge clk);
      if (order == 0) begin s_axil_awvalid = 1'b0; s_axil_wvalid = 1'b1; s_axil_wdata = d; s_axil_wstrb = strb; end
      else begin s_axil_wvalid = 1'b0; s_axil_awvalid = 1'b1; s_axil_awaddr = reg_addr_t'(idx * 4); end
    end
    @(posedge clk); while (!(s_axil_awvalid ? s_axil_awready : s_axil_wready)) @(posedge clk);
    @(negedge clk);
    s_axil_awvalid = 1'b0; s_axil_wvalid = 1'b0;
    repeat ($urandom_range(0, 3)) @(negedge clk);
    s_axil_bready = 1'b1;
    @(posedge clk); while (!s_axil_bvalid) @(posedge clk);
    checks++;
    if (s_axil_bresp != 2'b00) begin failures++; $display("BRESP not OKAY"); end
    @(negedge clk);
    s_axil_bready = 1'b0;
    for (int b = 0; b < 4; b++) if (strb[b]) model[idx][8*b +: 8] = d[8*b +: 8];
    checks++;
    if (wr_pulses != pulses0 + 1) begin failures++; $display("%0d write pulses", wr_pulses - pulses0); end
  endtask

  task automatic axil_read(int idx);
    @(negedge clk);
    s_axil_arvalid = 1'b1; s_axil_araddr = reg_addr_t'(idx * 4);
    @(posedge clk); while (!s_axil_arready) @(posedge clk);
    @(negedge clk);
    s_axil_arvalid = 1'b0;
    repeat ($urandom_range(0, 3)) @(negedge clk);
    s_axil_rready = 1'b1;
    @(posedge clk); while (!s_axil_rvalid) @(posedge clk);
    checks++;
    if (s_axil_rdata != model[idx] || s_axil_rresp != 2'b00) begin
      failures++; $display("read %0d: %0h expected %0h", idx, s_axil_rdata, model[idx]);
    end
    @(negedge clk);
    s_axil_rready = 1'b0;
  endtask

  initial begin
    rst_n = 1'b0;
    s_axil_awvalid = 0; s_axil_wvalid = 0; s_axil_bready = 0; s_axil_arvalid = 0; s_axil_rready = 0;
    s_axil_awaddr = '0; s_axil_araddr = '0; s_axil_wdata = '0; s_axil_wstrb = '0;
    for (int i = 0; i < 8; i++) begin regs[i] = 32'(i) * 32'h0101_0101; model[i] = regs[i]; end
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < 200; k++) begin
      int idx;
      idx = $urandom_range(0, 7);
      if ($urandom_range(0, 1) == 0)
        axil_write(idx, $urandom, ($urandom_range(0, 3) == 0) ? 4'($urandom) : 4'hf, $urandom_range(0, 2));
      else
        axil_read(idx);
    end
    for (int i = 0; i < 8; i++) axil_read(i);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
