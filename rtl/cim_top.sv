// cim_top -- CIM_TOP, the cyber coherent Ising machine core (Fig. 3(A),
// Table 2): REG_TOP, CTL_TOP, MEM, RND_GEN, 64 CAL_CSR lanes, CAL_H (64
// 32-input FP32 MACs) and J_MUX.
//
// A run repeats NSTEP steps. In each step CAL_H computes the local fields
// h = g + J (mu o sigma) for all N spins, 64 rows at a time, reading a
// 64 x 32 block of J per cycle from JMEM through J_MUX; then the 64
// CAL_CSR lanes advance the spins' amplitudes by one time step, 64 spins
// per group, under the instruction stream from CTL_TOP. With the matching
// program the same hardware runs open-loop CIM, closed-loop CIM (CAC) or
// Jacobi SOR; the host alternates CIM and SOR runs for L0-regularised
// compressed sensing. A step takes N/64 * (N/32 + CE) + 4 cycles.
//
// Ports: the three host-side ports (registers, control-code memory, data
// memories) come from INT_AXI_IF; irq/irq_ack go to the PCIe block; led
// to O_LED. Structure and sizes follow the paper; see each module for the
// choices made where it is silent.
module cim_top
  import cim_pkg::*;
#(
  parameter int NMAX = 4096,
  parameter int PR   = 64,
  parameter int PC   = 32
) (
  input  logic          clk,
  input  logic          rst,
  // register port
  input  logic          reg_req,
  input  logic          reg_we,
  input  logic [7:0]    reg_addr,
  input  logic [31:0]   reg_wdata,
  output logic          reg_ack,
  output logic [31:0]   reg_rdata,
  // control-code port (write only)
  input  logic          seq_we,
  input  logic [$clog2(SEQ_DEPTH*INSTR_WORDS)-1:0] seq_waddr,
  input  logic [31:0]   seq_wdata,
  // memory port
  input  logic          mem_req,
  input  logic          mem_we,
  input  logic [27:0]   mem_addr,
  input  logic [31:0]   mem_wdata,
  output logic          mem_ack,
  output logic [31:0]   mem_rdata,
  // interrupt and status
  output logic          irq,
  input  logic          irq_ack,
  output logic [2:0]    led
);
  localparam int NB  = NMAX / PR;
  localparam int JAW = $clog2(NB * NB / 2);
  localparam int VAW = $clog2(NB);
  localparam int NBW = $clog2(NB) + 1;

  logic                   start, jclr, seed_load, qubo, chi_abs;
  logic [$clog2(NMAX):0]  nsize;
  logic [15:0]            nstep, step_cnt;
  logic [7:0]             ce, pcbase;
  logic [31:0]            seed, cycles;
  logic [NPREG-1:0][31:0] preg;
  logic                   busy, done, clearing;

  logic [JAW-1:0]         jmem_raddr, jmem_clr_addr;
  logic                   jmem_clr;
  logic [NBW-1:0]         mux_rb;
  logic [NBW:0]           mux_cb, nb;
  logic                   h_en1, h_half, h_en2, hext_sel, hmem_we;
  logic [VAW-1:0]         hemem_raddr, hmem_waddr, vraddr, te_waddr;
  logic                   te_active, c_we, s_we, r_we, rnd_next;
  instr_t                 instr;
  logic [$clog2(PMEM_DEPTH)-1:0] pmem_raddr;
  logic [31:0]            pump;

  logic [PR*PR-1:0][31:0]   jdata;
  logic [PR-1:0][PC-1:0][31:0] jblk;
  logic [PR-1:0][31:0]      c_row, s_row, h_row, r_row, d_row, g_row;
  logic [PR-1:0][31:0]      c_wrow, s_wrow, r_wrow, h_new, rnd;

  reg_top #(.NMAX(NMAX)) u_reg (
    .clk, .rst, .req(reg_req), .we(reg_we), .addr(reg_addr), .wdata(reg_wdata),
    .ack(reg_ack), .rdata(reg_rdata),
    .start, .jclr, .seed_load, .qubo, .chi_abs, .nsize, .nstep, .ce, .pcbase,
    .seed, .preg, .busy, .done, .clearing, .step_cnt, .cycles,
    .irq, .irq_ack, .led);

  ctl_top #(.NMAX(NMAX), .PR(PR), .PC(PC)) u_ctl (
    .clk, .rst, .start, .jclr, .nsize, .nstep, .ce, .pcbase,
    .seq_we, .seq_waddr, .seq_wdata,
    .busy, .done, .clearing, .step_cnt, .cycles,
    .jmem_raddr, .jmem_clr, .jmem_clr_addr,
    .mux_rb, .mux_cb, .nb, .h_en1, .h_half, .h_en2, .hext_sel,
    .hemem_raddr, .hmem_we, .hmem_waddr, .vraddr,
    .te_active, .instr, .c_we, .s_we, .r_we, .te_waddr, .rnd_next, .pmem_raddr);

  cim_mem #(.NMAX(NMAX), .PR(PR)) u_mem (
    .clk, .rst, .nsize, .busy,
    .req(mem_req), .we(mem_we), .addr(mem_addr), .wdata(mem_wdata),
    .ack(mem_ack), .rdata(mem_rdata),
    .jmem_raddr, .jmem_clr, .jmem_clr_addr, .jdata,
    .vraddr, .hemem_raddr, .c_row, .s_row, .h_row, .r_row, .d_row, .g_row,
    .c_we, .s_we, .r_we, .te_waddr, .c_wrow, .s_wrow, .r_wrow,
    .hmem_we, .hmem_waddr, .h_wrow(h_new), .pmem_raddr, .pump);

  j_mux #(.PR(PR), .PC(PC), .NBW(NBW)) u_jmux (
    .banks(jdata), .rb(mux_rb), .cb(mux_cb), .nb, .jblk);

  cal_h #(.PR(PR), .PC(PC)) u_calh (
    .clk, .en1(h_en1), .jblk, .cmem_row(c_row), .rmem_row(r_row),
    .half(h_half), .qubo, .en2(h_en2), .hext_sel, .g_row, .h(h_new));

  rnd_gen #(.LANES(PR)) u_rnd (
    .clk, .rst, .seed_load, .seed, .next(rnd_next), .rnd);

  for (genvar l = 0; l < PR; l++) begin : g_csr
    cal_csr u_csr (
      .clk, .active(te_active), .instr,
      .c_in(c_row[l]), .s_in(s_row[l]), .h_in(h_row[l]), .r_in(r_row[l]),
      .d_in(d_row[l]), .pump, .rnd(rnd[l]), .preg, .chi_abs,
      .c_wdata(c_wrow[l]), .s_wdata(s_wrow[l]), .r_wdata(r_wrow[l]));
  end
endmodule
