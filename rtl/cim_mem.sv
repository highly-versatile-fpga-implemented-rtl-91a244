// cim_mem -- MEM, the memory group of the CIM core (Table 2):
// JMEM (J, folded upper triangle), HMEM (local field h), HEMEM (Zeeman
// terms g), CMEM (c), SMEM (s or e), RMEM (r), ADMEM (d = 1/J_ii) and PMEM
// (pump-rate sequence p, one entry per step).
//
// The vector memories are 64 lanes wide (vec_mem); the calculation
// modules use whole rows. The host reaches single elements through a
// word-addressed port (region codes in cim_pkg): element i of a vector is
// lane i % 64 of row i / 64; J[a][b] is written at offset a * NMAX + b;
// PMEM entry l at offset l. Host accesses are meant for the idle machine:
// while a run is active the calculation owns the read ports and its writes
// win. A host access is acknowledged two cycles after the request; JMEM is
// write-only from the host (reads return 0). The list of memories and their
// contents are the paper's; widths of the ports, the address map and the
// access rules are this design's.
module cim_mem
  import cim_pkg::*;
#(
  parameter int NMAX = 4096,
  parameter int PR   = 64,
  parameter int JAW  = $clog2((NMAX / PR) * (NMAX / PR) / 2),
  parameter int VAW  = $clog2(NMAX / PR),
  parameter int PAW  = $clog2(PMEM_DEPTH)
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic [$clog2(NMAX):0]    nsize,
  input  logic                     busy,
  // host port
  input  logic                     req,
  input  logic                     we,
  input  logic [27:0]              addr,
  input  logic [31:0]              wdata,
  output logic                     ack,
  output logic [31:0]              rdata,
  // JMEM
  input  logic [JAW-1:0]           jmem_raddr,
  input  logic                     jmem_clr,
  input  logic [JAW-1:0]           jmem_clr_addr,
  output logic [PR*PR-1:0][31:0]   jdata,
  // vector reads
  input  logic [VAW-1:0]           vraddr,
  input  logic [VAW-1:0]           hemem_raddr,
  output logic [PR-1:0][31:0]      c_row,
  output logic [PR-1:0][31:0]      s_row,
  output logic [PR-1:0][31:0]      h_row,
  output logic [PR-1:0][31:0]      r_row,
  output logic [PR-1:0][31:0]      d_row,
  output logic [PR-1:0][31:0]      g_row,
  // time-evolution writes
  input  logic                     c_we,
  input  logic                     s_we,
  input  logic                     r_we,
  input  logic [VAW-1:0]           te_waddr,
  input  logic [PR-1:0][31:0]      c_wrow,
  input  logic [PR-1:0][31:0]      s_wrow,
  input  logic [PR-1:0][31:0]      r_wrow,
  // local-field writes
  input  logic                     hmem_we,
  input  logic [VAW-1:0]           hmem_waddr,
  input  logic [PR-1:0][31:0]      h_wrow,
  // pump rate
  input  logic [PAW-1:0]           pmem_raddr,
  output logic [31:0]              pump
);
  localparam int LW = $clog2(PR);
  localparam int IW = $clog2(NMAX);

  region_e           rg;
  logic [23:0]       off;
  logic [VAW-1:0]    hrow;
  logic [LW-1:0]     hlane;
  logic              hw, hr;
  logic [PR-1:0]     hmask;
  logic [PR-1:0][31:0] hwrow;

  assign rg    = region_e'(addr[27:24]);
  assign off   = addr[23:0];
  assign hrow  = VAW'(off / PR);
  assign hlane = LW'(off % PR);
  assign hw    = req && we;
  assign hr    = req && !we && !busy;
  always_comb begin
    hmask = '0;
    hmask[hlane] = 1'b1;
    for (int l = 0; l < PR; l++) hwrow[l] = wdata;
  end

  // JMEM
  jmem #(.NMAX(NMAX), .BK(PR)) u_jmem (
    .clk, .n(nsize), .raddr(jmem_raddr), .rdata(jdata),
    .we(hw && rg == RG_JMEM), .wa(IW'(off / NMAX)), .wb(IW'(off % NMAX)),
    .wdata, .clr(jmem_clr), .clr_addr(jmem_clr_addr));

  // vector memories
  logic [VAW-1:0] ra_v, ra_g;
  assign ra_v = hr ? hrow : vraddr;
  assign ra_g = hr ? hrow : hemem_raddr;

  vec_mem #(.LANES(PR), .DEPTH(NMAX / PR)) u_cmem (
    .clk, .raddr(ra_v), .rdata(c_row),
    .we(c_we || (hw && rg == RG_CMEM)), .waddr(c_we ? te_waddr : hrow),
    .wmask(c_we ? '1 : hmask), .wdata(c_we ? c_wrow : hwrow));
  vec_mem #(.LANES(PR), .DEPTH(NMAX / PR)) u_smem (
    .clk, .raddr(ra_v), .rdata(s_row),
    .we(s_we || (hw && rg == RG_SMEM)), .waddr(s_we ? te_waddr : hrow),
    .wmask(s_we ? '1 : hmask), .wdata(s_we ? s_wrow : hwrow));
  vec_mem #(.LANES(PR), .DEPTH(NMAX / PR)) u_rmem (
    .clk, .raddr(ra_v), .rdata(r_row),
    .we(r_we || (hw && rg == RG_RMEM)), .waddr(r_we ? te_waddr : hrow),
    .wmask(r_we ? '1 : hmask), .wdata(r_we ? r_wrow : hwrow));
  vec_mem #(.LANES(PR), .DEPTH(NMAX / PR)) u_hmem (
    .clk, .raddr(ra_v), .rdata(h_row),
    .we(hmem_we || (hw && rg == RG_HMEM)), .waddr(hmem_we ? hmem_waddr : hrow),
    .wmask(hmem_we ? '1 : hmask), .wdata(hmem_we ? h_wrow : hwrow));
  vec_mem #(.LANES(PR), .DEPTH(NMAX / PR)) u_admem (
    .clk, .raddr(ra_v), .rdata(d_row),
    .we(hw && rg == RG_ADMEM), .waddr(hrow), .wmask(hmask), .wdata(hwrow));
  vec_mem #(.LANES(PR), .DEPTH(NMAX / PR)) u_hemem (
    .clk, .raddr(ra_g), .rdata(g_row),
    .we(hw && rg == RG_HEMEM), .waddr(hrow), .wmask(hmask), .wdata(hwrow));

  // PMEM
  logic [31:0]    pmem [PMEM_DEPTH];
  logic [PAW-1:0] pra;
  logic [31:0]    pmem_q;
  assign pra = hr ? PAW'(off) : pmem_raddr;
  always_ff @(posedge clk) begin
    if (hw && rg == RG_PMEM) pmem[PAW'(off)] <= wdata;
    pmem_q <= pmem[pra];
  end
  assign pump = pmem_q;

  // host response: two cycles after the request
  logic          p1, p1_rd;
  region_e       p1_rg;
  logic [LW-1:0] p1_lane;
  always_ff @(posedge clk) begin
    if (rst) begin
      p1    <= 1'b0;
      p1_rd <= 1'b0;
      ack   <= 1'b0;
      rdata <= '0;
      p1_rg <= RG_REG;
      p1_lane <= '0;
    end else begin
      p1      <= req;
      p1_rd   <= hr;
      p1_rg   <= rg;
      p1_lane <= hlane;
      ack     <= p1;
      if (p1 && p1_rd) begin
        case (p1_rg)
          RG_CMEM:  rdata <= c_row[p1_lane];
          RG_SMEM:  rdata <= s_row[p1_lane];
          RG_RMEM:  rdata <= r_row[p1_lane];
          RG_HMEM:  rdata <= h_row[p1_lane];
          RG_ADMEM: rdata <= d_row[p1_lane];
          RG_HEMEM: rdata <= g_row[p1_lane];
          RG_PMEM:  rdata <= pmem_q;
          default:  rdata <= 32'd0;
        endcase
      end else if (p1) rdata <= 32'd0;
    end
  end
endmodule
