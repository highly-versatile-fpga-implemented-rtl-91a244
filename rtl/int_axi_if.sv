// int_axi_if -- INT_AXI_IF, the internal bus interface (Fig. 3(A),
// Table 2): routes each host access from the AXI slave to its target in
// the CIM core and returns the response.
//
// The region field of the word address (bits 27:24, see cim_pkg) picks the
// target: the register set, the sequence-control memory (write only,
// acknowledged here the next cycle) or the data memories. Accesses to an
// unused region are acknowledged the next cycle with read data 0. One
// access is in flight at a time (the AXI slave waits for ack). The paper
// shows INT_AXI_IF between the AXI slave and REG_TOP/MEM; the address map
// and the handshake are this design's choices.
module int_axi_if
  import cim_pkg::*;
(
  input  logic          clk,
  input  logic          rst,
  input  bus_req_t      breq,
  output bus_rsp_t      brsp,
  // register set
  output logic          reg_req,
  output logic          reg_we,
  output logic [7:0]    reg_addr,
  output logic [31:0]   reg_wdata,
  input  logic          reg_ack,
  input  logic [31:0]   reg_rdata,
  // control code
  output logic          seq_we,
  output logic [$clog2(SEQ_DEPTH*INSTR_WORDS)-1:0] seq_waddr,
  output logic [31:0]   seq_wdata,
  // memories
  output logic          mem_req,
  output logic          mem_we,
  output logic [27:0]   mem_addr,
  output logic [31:0]   mem_wdata,
  input  logic          mem_ack,
  input  logic [31:0]   mem_rdata
);
  region_e rg;
  logic    local_ack;
  assign rg = region_e'(breq.addr[27:24]);

  always_comb begin
    reg_req   = breq.req && rg == RG_REG;
    reg_we    = breq.we;
    reg_addr  = breq.addr[7:0];
    reg_wdata = breq.wdata;
    seq_we    = breq.req && breq.we && rg == RG_SEQ;
    seq_waddr = $clog2(SEQ_DEPTH*INSTR_WORDS)'(breq.addr);
    seq_wdata = breq.wdata;
    mem_req   = breq.req && rg != RG_REG && rg != RG_SEQ && int'(rg) <= int'(RG_JMEM);
    mem_we    = breq.we;
    mem_addr  = breq.addr;
    mem_wdata = breq.wdata;
  end

  always_ff @(posedge clk) begin
    if (rst) local_ack <= 1'b0;
    else local_ack <= breq.req && (rg == RG_SEQ || int'(rg) > int'(RG_JMEM));
  end

  always_comb begin
    brsp.ack   = reg_ack | mem_ack | local_ack;
    brsp.rdata = reg_ack ? reg_rdata : (mem_ack ? mem_rdata : 32'd0);
  end
endmodule
