// axil_slave: AXI4-Lite slave for the accelerator's registers.
//
// Write: the address (AW) and data (W) channels are accepted independently;
// once both are held, one reg_wr_en pulse presents address, data and strobes
// to the register logic, and a write response (OKAY) is raised on B. A new
// write is accepted after B has been taken. Read: an AR handshake registers
// reg_rd_data (the combinational read mux, addressed by reg_rd_addr) into
// RDATA and raises RVALID until R is taken. One transaction of each kind is
// outstanding at a time; every response is OKAY.
//
// The use of AXI4-Lite for control and status follows the paper; this
// single-outstanding slave is this design's own, the simplest that does it.
module axil_slave
  import haru_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // AXI4-Lite slave
  input  reg_addr_t   s_axil_awaddr,
  input  logic        s_axil_awvalid,
  output logic        s_axil_awready,
  input  logic [31:0] s_axil_wdata,
  input  logic [3:0]  s_axil_wstrb,
  input  logic        s_axil_wvalid,
  output logic        s_axil_wready,
  output logic [1:0]  s_axil_bresp,
  output logic        s_axil_bvalid,
  input  logic        s_axil_bready,
  input  reg_addr_t   s_axil_araddr,
  input  logic        s_axil_arvalid,
  output logic        s_axil_arready,
  output logic [31:0] s_axil_rdata,
  output logic [1:0]  s_axil_rresp,
  output logic        s_axil_rvalid,
  input  logic        s_axil_rready,
  // register interface
  output logic        reg_wr_en,
  output reg_addr_t   reg_wr_addr,
  output logic [31:0] reg_wr_data,
  output logic [3:0]  reg_wr_strb,
  output reg_addr_t   reg_rd_addr,
  input  logic [31:0] reg_rd_data
);

  logic aw_held, w_held;

  assign s_axil_awready = !aw_held && !s_axil_bvalid;
  assign s_axil_wready  = !w_held && !s_axil_bvalid;
  assign s_axil_bresp   = 2'b00;
  assign s_axil_rresp   = 2'b00;
  assign s_axil_arready = !s_axil_rvalid;
  assign reg_rd_addr    = s_axil_araddr;
  assign reg_wr_en      = aw_held && w_held;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      aw_held       <= 1'b0;
      w_held        <= 1'b0;
      reg_wr_addr   <= '0;
      reg_wr_data   <= '0;
      reg_wr_strb   <= '0;
      s_axil_bvalid <= 1'b0;
    end else begin
      if (s_axil_awvalid && s_axil_awready) begin
        aw_held     <= 1'b1;
        reg_wr_addr <= s_axil_awaddr;
      end
      if (s_axil_wvalid && s_axil_wready) begin
        w_held      <= 1'b1;
        reg_wr_data <= s_axil_wdata;
        reg_wr_strb <= s_axil_wstrb;
      end
      if (reg_wr_en) begin
        aw_held       <= 1'b0;
        w_held        <= 1'b0;
        s_axil_bvalid <= 1'b1;
      end else if (s_axil_bvalid && s_axil_bready) begin
        s_axil_bvalid <= 1'b0;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      s_axil_rvalid <= 1'b0;
      s_axil_rdata  <= '0;
    end else if (s_axil_arvalid && s_axil_arready) begin
      s_axil_rvalid <= 1'b1;
      s_axil_rdata  <= reg_rd_data;
    end else if (s_axil_rvalid && s_axil_rready) begin
      s_axil_rvalid <= 1'b0;
    end
  end

  a_bvalid_hold : assert property (@(posedge clk) disable iff (!rst_n)
      s_axil_bvalid && !s_axil_bready |=> s_axil_bvalid)
    else $error("axil_slave: BVALID dropped before BREADY");
  a_rvalid_hold : assert property (@(posedge clk) disable iff (!rst_n)
      s_axil_rvalid && !s_axil_rready |=> s_axil_rvalid && $stable(s_axil_rdata))
    else $error("axil_slave: RVALID dropped or RDATA changed before RREADY");

endmodule
