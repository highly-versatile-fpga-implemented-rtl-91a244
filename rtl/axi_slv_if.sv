// axi_slv_if -- AXI_SLV_IF, the AXI slave interface (Fig. 3(A), Table 2).
//
// An AXI4-Lite slave with 32-bit data that turns each read or write into
// one request on the internal bus (bus_req_t) and waits for its ack. Write
// address and write data are taken together; a write wins over a read
// offered in the same cycle. The byte address is divided by four into the
// 28-bit word address of the internal bus; WSTRB is ignored (whole words
// only) and every response is OKAY. The paper says only that the AXI slave
// interface is written in RTL; the AXI4-Lite subset and the single
// outstanding transaction are this design's choices.
module axi_slv_if
  import cim_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  // AXI4-Lite slave
  input  logic [31:0] s_awaddr,
  input  logic        s_awvalid,
  output logic        s_awready,
  input  logic [31:0] s_wdata,
  input  logic [3:0]  s_wstrb,
  input  logic        s_wvalid,
  output logic        s_wready,
  output logic [1:0]  s_bresp,
  output logic        s_bvalid,
  input  logic        s_bready,
  input  logic [31:0] s_araddr,
  input  logic        s_arvalid,
  output logic        s_arready,
  output logic [31:0] s_rdata,
  output logic [1:0]  s_rresp,
  output logic        s_rvalid,
  input  logic        s_rready,
  // internal bus
  output bus_req_t    breq,
  input  bus_rsp_t    brsp
);
  typedef enum logic [2:0] {A_IDLE, A_WWAIT, A_BRESP, A_RWAIT, A_RRESP} ast_e;
  ast_e st;

  logic unused_strb;
  assign unused_strb = ^s_wstrb;

  // nothing is accepted while the internal reset holds
  assign s_awready = !rst && (st == A_IDLE) && s_awvalid && s_wvalid;
  assign s_wready  = !rst && (st == A_IDLE) && s_awvalid && s_wvalid;
  assign s_arready = !rst && (st == A_IDLE) && !(s_awvalid && s_wvalid) && s_arvalid;
  assign s_bvalid  = (st == A_BRESP);
  assign s_rvalid  = (st == A_RRESP);
  assign s_bresp   = 2'b00;
  assign s_rresp   = 2'b00;

  always_ff @(posedge clk) begin
    if (rst) begin
      st      <= A_IDLE;
      breq    <= '0;
      s_rdata <= '0;
    end else begin
      breq.req <= 1'b0;
      case (st)
        A_IDLE:
          if (s_awvalid && s_wvalid) begin
            breq <= '{req: 1'b1, we: 1'b1, addr: s_awaddr[29:2], wdata: s_wdata};
            st   <= A_WWAIT;
          end else if (s_arvalid) begin
            breq <= '{req: 1'b1, we: 1'b0, addr: s_araddr[29:2], wdata: 32'd0};
            st   <= A_RWAIT;
          end
        A_WWAIT: if (brsp.ack) st <= A_BRESP;
        A_BRESP: if (s_bready) st <= A_IDLE;
        A_RWAIT:
          if (brsp.ack) begin
            s_rdata <= brsp.rdata;
            st      <= A_RRESP;
          end
        A_RRESP: if (s_rready) st <= A_IDLE;
        default: st <= A_IDLE;
      endcase
    end
  end

  // AXI rule: once valid is raised it stays until the handshake
  assert property (@(posedge clk) disable iff (rst) s_bvalid && !s_bready |=> s_bvalid);
  assert property (@(posedge clk) disable iff (rst) s_rvalid && !s_rready |=> s_rvalid && $stable(s_rdata));
endmodule
