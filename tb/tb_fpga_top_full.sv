// tb_fpga_top_full -- full-size end-to-end check of FPGA_TOP with its default
// parameters (NMAX = 4096, 64 MAC rows of 32 inputs, 64 lanes), driven
// only through the top's pins, as the host would through PCIe and the AXI
// interconnect.
//
// Sequence: reset through I_RESET and the PLL lock flag (no AXI answer is
// expected while the internal reset holds); AXI writes and read-backs of
// the registers; a JMEM clear of all 2048 words; a sparse random J over
// all N = 4096 spins (entries in the folded half, in lower-triangle and
// diagonal tiles), g and c for every spin; a two-instruction program
// c <- c + P0 F_chi(h); one step at N = 4096, then one at N = 1024 on a
// re-loaded J. The local field of every spin is checked against a
// reference sum (values are short binary fractions, so the MAC sums are
// exact and the check is bit-exact), c against FP32 arithmetic done here,
// the cycle count against N/64 (N/32 + C_e) + 5, the interrupt on O_INT,
// its clearing by I_ACK and the LED pins.
module tb_fpga_top_full;
  import tb_fp_pkg::*;
  import cim_pkg::*;
  localparam int N = 4096;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic locked, i_reset;
  logic [31:0] s_axi_awaddr, s_axi_wdata, s_axi_araddr, s_axi_rdata;
  logic s_axi_awvalid, s_axi_awready, s_axi_wvalid, s_axi_wready, s_axi_bvalid, s_axi_bready;
  logic s_axi_arvalid, s_axi_arready, s_axi_rvalid, s_axi_rready;
  logic [3:0] s_axi_wstrb;
  logic [1:0] s_axi_bresp, s_axi_rresp;
  logic o_int, i_ack;
  logic [2:0] o_led;

  fpga_top dut (.*);

  int n_wr = 0, n_rd = 0, n_int = 0;
  logic int_d = 0;
  always @(posedge clk) begin
    int_d <= o_int;
    if (locked && !i_reset && o_int && !int_d) n_int++;
  end

  task automatic axi_wr(input logic [27:0] wa, input logic [31:0] d);
    @(negedge clk);
    s_axi_awaddr = {2'b00, wa, 2'b00}; s_axi_awvalid = 1;
    s_axi_wdata = d; s_axi_wvalid = 1; s_axi_wstrb = 4'hF;
    #1;                             // let the ready outputs settle
    while (!(s_axi_awready && s_axi_wready)) begin @(negedge clk); #1; end
    @(negedge clk);
    s_axi_awvalid = 0; s_axi_wvalid = 0; s_axi_bready = 1;
    while (!s_axi_bvalid) @(negedge clk);
    checks++;
    if (s_axi_bresp != 2'b00) failures++;
    @(negedge clk);
    s_axi_bready = 0;
    n_wr++;
  endtask

  task automatic axi_rd(input logic [27:0] wa, output logic [31:0] d);
    @(negedge clk);
    s_axi_araddr = {2'b00, wa, 2'b00}; s_axi_arvalid = 1;
    #1;
    while (!s_axi_arready) begin @(negedge clk); #1; end
    @(negedge clk);
    s_axi_arvalid = 0; s_axi_rready = 1;
    while (!s_axi_rvalid) @(negedge clk);
    d = s_axi_rdata;
    @(negedge clk);
    s_axi_rready = 0;
    n_rd++;
  endtask

  function automatic logic [27:0] A(input region_e rg, input int off);
    return {rg, 24'(off)};
  endfunction

  task automatic wait_idle();
    logic [31:0] st;
    do axi_rd(A(RG_REG, R_STATUS), st); while (st[0]);
  endtask

  // sparse J as a list of (a, b, value), a < b
  localparam int NJ = 3000;
  int ja [NJ], jb [NJ];
  real jv [NJ];
  real g [N], c [N];
  real P0;

  function automatic real rf(input real x);
    return r32(f32(x));
  endfunction

  task automatic load_and_run(input int n);
    logic [31:0] v;
    real h [N];
    // J: clear, then the entries with both indices below n
    axi_wr(A(RG_REG, R_NSIZE), n);
    axi_wr(A(RG_REG, R_CTRL), 32'h2);
    axi_rd(A(RG_REG, R_STATUS), v);
    checks++;
    if (!v[2]) begin failures++; $display("FAIL clear not reported"); end
    wait_idle();
    for (int i = 0; i < n; i++) h[i] = g[i];
    for (int e = 0; e < NJ; e++)
      if (ja[e] < n && jb[e] < n) begin
        axi_wr(A(RG_JMEM, ja[e] * N + jb[e]), f32(jv[e]));
        h[ja[e]] += jv[e] * c[jb[e]];
        h[jb[e]] += jv[e] * c[ja[e]];
      end
    for (int i = 0; i < n; i++) begin
      axi_wr(A(RG_HEMEM, i), f32(g[i]));
      axi_wr(A(RG_CMEM, i), f32(c[i]));
    end
    axi_wr(A(RG_REG, R_NSTEP), 1);
    axi_wr(A(RG_REG, R_CE), 2);
    axi_wr(A(RG_REG, R_MODE), 0);
    axi_wr(A(RG_REG, R_CTRL), 32'h1);
    axi_rd(A(RG_REG, R_STATUS), v);
    checks++;
    if (!v[0] || o_led[0] !== 1'b1) begin failures++; $display("FAIL not busy after start"); end
    wait_idle();
    axi_rd(A(RG_REG, R_CYCLES), v);
    checks++;
    if (v != 32'((n / 64) * (n / 32 + 2) + 5)) begin
      failures++; $display("FAIL cycles %0d exp %0d", v, (n / 64) * (n / 32 + 2) + 5);
    end
    checks++;
    if (!o_int || o_led !== 3'b110) begin failures++; $display("FAIL int %b led %b", o_int, o_led); end
    @(negedge clk); i_ack = 1; @(negedge clk); i_ack = 0;
    checks++;
    if (o_int) begin failures++; $display("FAIL int not cleared"); end
    for (int i = 0; i < n; i++) begin
      real cn;
      axi_rd(A(RG_HMEM, i), v);
      checks++;
      if (v !== f32(h[i]) && !(v[30:0] == 0 && h[i] == 0.0)) begin
        failures++;
        if (failures < 10) $display("FAIL n=%0d h[%0d] got %g exp %g", n, i, r32(v), h[i]);
      end
      axi_rd(A(RG_CMEM, i), v);
      cn = rf(c[i] + rf(r32(f32(h[i])) * P0));
      checks++;
      if (v !== f32(cn) && !(v[30:0] == 0 && cn == 0.0)) begin
        failures++;
        if (failures < 10) $display("FAIL n=%0d c[%0d] got %g exp %g", n, i, r32(v), cn);
      end
      c[i] = cn;
    end
  endtask

  logic [31:0] rv;
  int n_fold, n_lower, n_diag;
  bit used [int];

  initial begin
    locked = 0; i_reset = 1; i_ack = 0;
    s_axi_awaddr = 0; s_axi_awvalid = 0; s_axi_wdata = 0; s_axi_wstrb = 0; s_axi_wvalid = 0;
    s_axi_bready = 0; s_axi_araddr = 0; s_axi_arvalid = 0; s_axi_rready = 0;
    repeat (4) @(negedge clk);
    i_reset = 0;
    repeat (4) @(negedge clk);
    // still no clock lock: a read request must not be taken
    s_axi_arvalid = 1;
    repeat (3) @(negedge clk);
    #1;
    checks++;
    if (s_axi_arready) begin failures++; $display("FAIL AXI answered during reset"); end
    s_axi_arvalid = 0;
    locked = 1;
    repeat (40) @(negedge clk);
    // registers
    axi_wr(A(RG_REG, R_NSIZE), N);
    axi_rd(A(RG_REG, R_NSIZE), rv);
    checks++; if (rv != N) begin failures++; $display("FAIL nsize %0d", rv); end
    P0 = rf(0.375);
    axi_wr(A(RG_REG, R_PREG), f32(P0));
    axi_rd(A(RG_REG, R_PREG), rv);
    checks++; if (rv !== f32(P0)) begin failures++; $display("FAIL preg"); end
    // program: i0 FMUL0 = F_chi(h) * P0 ; i1 FADD0 = c + FMUL0, c <- FADD0
    begin
      instr_t ins [2];
      logic [INSTR_W-1:0] b;
      ins[0] = '0; ins[0].mul0_a = SRC_FCHI; ins[0].mul0_b = SRC_P0;
      ins[1] = '0; ins[1].add0_a = SRC_CMEM; ins[1].add0_b = SRC_FMUL0;
      ins[1].c_we = 1; ins[1].c_src = SRC_FADD0;
      for (int k = 0; k < 2; k++) begin
        b = ins[k];
        for (int w = 0; w < INSTR_WORDS; w++) axi_wr(A(RG_SEQ, k * INSTR_WORDS + w), b[32*w +: 32]);
      end
    end
    // data
    n_fold = 0; n_lower = 0; n_diag = 0;
    for (int e = 0; e < NJ; e++) begin
      int a, b;
      do begin
        a = $urandom % N; b = $urandom % N;
        // a third of the entries inside 1024 x 1024 for the second run
        if (e % 3 == 0) begin a = a % 1024; b = b % 1024; end
        if (a > b) begin int t; t = a; a = b; b = t; end
      end while (a == b || used.exists(a * N + b));   // each pair once
      used[a * N + b] = 1;
      ja[e] = a; jb[e] = b;
      jv[e] = real'(int'($urandom % 255) - 127) / 64.0;
      if (a >= N / 2) n_fold++;
      if (a / 64 == b / 64) n_diag++; else n_lower++;
    end
    for (int i = 0; i < N; i++) begin
      g[i] = real'(int'($urandom % 255) - 127) / 32.0;
      c[i] = real'(int'($urandom % 33) - 16) / 16.0;
    end
    load_and_run(N);
    load_and_run(1024);
    $display("AXI writes %0d reads %0d, interrupts %0d, J entries: folded %0d same-tile %0d other %0d",
             n_wr, n_rd, n_int, n_fold, n_diag, n_lower);
    checks++;
    if (n_int != 2 || n_fold == 0 || n_diag == 0) begin failures++; $display("FAIL mechanism count"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
