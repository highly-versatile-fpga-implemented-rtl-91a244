// fpga_top -- FPGA_TOP, the whole FPGA circuit of the cyber coherent Ising
// machine (Fig. 3(A), Table 2).
//
// The vendor blocks of IP_TOP (clock PLL, PCIe endpoint, AXI interconnect)
// are outside this RTL: their outputs are this module's ports. clk is the
// 30 MHz system clock and locked the PLL's lock flag; the host reaches the
// machine through the AXI4-Lite port the interconnect would drive, and the
// interrupt (INT) / acknowledge (ACK) pair goes to the PCIe block. Inside:
// the internal reset (from I_RESET and Locked), AXI_SLV_IF, INT_AXI_IF and
// CIM_TOP. O_LED[2:0] shows {irq, done, busy}. The pins the paper ties high
// or low (unused DDR4 interface) are not modelled.
module fpga_top
  import cim_pkg::*;
#(
  parameter int NMAX = 4096
) (
  input  logic        clk,
  input  logic        locked,
  input  logic        i_reset,
  input  logic [31:0] s_axi_awaddr,
  input  logic        s_axi_awvalid,
  output logic        s_axi_awready,
  input  logic [31:0] s_axi_wdata,
  input  logic [3:0]  s_axi_wstrb,
  input  logic        s_axi_wvalid,
  output logic        s_axi_wready,
  output logic [1:0]  s_axi_bresp,
  output logic        s_axi_bvalid,
  input  logic        s_axi_bready,
  input  logic [31:0] s_axi_araddr,
  input  logic        s_axi_arvalid,
  output logic        s_axi_arready,
  output logic [31:0] s_axi_rdata,
  output logic [1:0]  s_axi_rresp,
  output logic        s_axi_rvalid,
  input  logic        s_axi_rready,
  output logic        o_int,
  input  logic        i_ack,
  output logic [2:0]  o_led
);
  logic     rst;
  bus_req_t breq;
  bus_rsp_t brsp;

  logic        reg_req, reg_we, reg_ack, seq_we, mem_req, mem_we, mem_ack;
  logic [7:0]  reg_addr;
  logic [31:0] reg_wdata, reg_rdata, seq_wdata, mem_wdata, mem_rdata;
  logic [27:0] mem_addr;
  logic [$clog2(SEQ_DEPTH*INSTR_WORDS)-1:0] seq_waddr;

  rst_gen u_rst (.clk, .i_reset, .locked, .rst);

  axi_slv_if u_axi (
    .clk, .rst,
    .s_awaddr(s_axi_awaddr), .s_awvalid(s_axi_awvalid), .s_awready(s_axi_awready),
    .s_wdata(s_axi_wdata), .s_wstrb(s_axi_wstrb), .s_wvalid(s_axi_wvalid),
    .s_wready(s_axi_wready), .s_bresp(s_axi_bresp), .s_bvalid(s_axi_bvalid),
    .s_bready(s_axi_bready), .s_araddr(s_axi_araddr), .s_arvalid(s_axi_arvalid),
    .s_arready(s_axi_arready), .s_rdata(s_axi_rdata), .s_rresp(s_axi_rresp),
    .s_rvalid(s_axi_rvalid), .s_rready(s_axi_rready),
    .breq, .brsp);

  int_axi_if u_int (
    .clk, .rst, .breq, .brsp,
    .reg_req, .reg_we, .reg_addr, .reg_wdata, .reg_ack, .reg_rdata,
    .seq_we, .seq_waddr, .seq_wdata,
    .mem_req, .mem_we, .mem_addr, .mem_wdata, .mem_ack, .mem_rdata);

  cim_top #(.NMAX(NMAX)) u_cim (
    .clk, .rst,
    .reg_req, .reg_we, .reg_addr, .reg_wdata, .reg_ack, .reg_rdata,
    .seq_we, .seq_waddr, .seq_wdata,
    .mem_req, .mem_we, .mem_addr, .mem_wdata, .mem_ack, .mem_rdata,
    .irq(o_int), .irq_ack(i_ack), .led(o_led));
endmodule
