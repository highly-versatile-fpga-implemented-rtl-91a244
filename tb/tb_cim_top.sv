// tb_cim_top -- end-to-end check of the CIM core at NMAX = 256 (four row
// tiles, so the folded JMEM tiles, the diagonal tiles and the lower-
// triangle reads all occur).
//
// The testbench acts as the host: it clears JMEM, writes a random J, g, c,
// s, r, d, pump rates, parameters and two time-evolution programs, starts
// runs and reads every memory back. References are computed here:
//  * the local field h_i = g_i + sum_{j != i} J_ij v_j, v = c (Ising) or
//    r H(c) (QUBO), in double precision; the MAC's block floating point
//    truncates, so h is compared with a tolerance of 2^-16 of sum |J v|;
//  * the time evolution is recomputed from the h read back from HMEM with
//    one FP32 rounding per operation, so c, s and r must match exactly;
//    the lanes' random samples come from a reference xorshift128.
// Runs: (1) N = 256 Ising, F_chi = |h|, the 7-instruction CIM-style
// program; (2) N = 128 QUBO, F_chi = h, same program; (3) N = 256 QUBO,
// the 4-instruction Jacobi program (C_e = 4) that updates r; (4) three
// steps in a row with per-step pump rates. Cycle counts, step counts, the
// interrupt and its two clear paths are checked. Mechanism counters are
// printed and each must be non-zero.
module tb_cim_top;
  import tb_fp_pkg::*;
  import cim_pkg::*;
  localparam int NMAX = 256, PR = 64, PC = 32;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic rst;
  logic reg_req, reg_we, reg_ack;
  logic [7:0] reg_addr;
  logic [31:0] reg_wdata, reg_rdata;
  logic seq_we;
  logic [$clog2(SEQ_DEPTH*INSTR_WORDS)-1:0] seq_waddr;
  logic [31:0] seq_wdata;
  logic mem_req, mem_we, mem_ack;
  logic [27:0] mem_addr;
  logic [31:0] mem_wdata, mem_rdata;
  logic irq, irq_ack;
  logic [2:0] led;

  cim_top #(.NMAX(NMAX), .PR(PR), .PC(PC)) dut (.*);

  // mechanism counters
  int n_clr_cycles = 0, n_fold = 0, n_diag = 0, n_lower = 0, n_hext = 0;
  int n_hwrite = 0, n_rnd = 0, n_irq = 0, n_te = 0, n_qubo_mm = 0, n_ising_mm = 0;
  always @(posedge clk) if (!rst) begin
    if (dut.u_ctl.jmem_clr) n_clr_cycles++;
    if (dut.h_en1) begin
      int rb, jb, nb;
      rb = int'(dut.mux_rb); jb = int'(dut.mux_cb) / 2; nb = int'(dut.nb);
      if ((rb < jb ? rb : jb) >= nb / 2) n_fold++;
      if (rb == jb) n_diag++;
      if (jb < rb) n_lower++;
      if (dut.qubo) n_qubo_mm++; else n_ising_mm++;
    end
    if (dut.h_en2 && dut.hext_sel) n_hext++;
    if (dut.hmem_we) n_hwrite++;
    if (dut.rnd_next) n_rnd++;
    if (dut.te_active) n_te++;
  end
  logic irq_d = 0;
  always @(posedge clk) begin
    irq_d <= irq;
    if (!rst && irq && !irq_d) n_irq++;
  end

  // ---------------- host access ----------------
  task automatic reg_wr(input int a, input logic [31:0] d);
    @(negedge clk);
    reg_req = 1; reg_we = 1; reg_addr = 8'(a); reg_wdata = d;
    @(negedge clk);
    reg_req = 0; reg_we = 0;
    while (!reg_ack) @(negedge clk);
  endtask

  task automatic reg_rd(input int a, output logic [31:0] d);
    @(negedge clk);
    reg_req = 1; reg_we = 0; reg_addr = 8'(a);
    @(negedge clk);
    reg_req = 0;
    while (!reg_ack) @(negedge clk);
    d = reg_rdata;
  endtask

  task automatic mem_wr(input region_e rg, input int off, input logic [31:0] d);
    @(negedge clk);
    mem_req = 1; mem_we = 1; mem_addr = {rg, 24'(off)}; mem_wdata = d;
    @(negedge clk);
    mem_req = 0; mem_we = 0;
    while (!mem_ack) @(negedge clk);
  endtask

  task automatic mem_rd(input region_e rg, input int off, output logic [31:0] d);
    @(negedge clk);
    mem_req = 1; mem_we = 0; mem_addr = {rg, 24'(off)};
    @(negedge clk);
    mem_req = 0;
    while (!mem_ack) @(negedge clk);
    d = mem_rdata;
  endtask

  task automatic seq_wr(input int k, input instr_t ins);
    logic [INSTR_W-1:0] b;
    b = ins;
    for (int w = 0; w < INSTR_WORDS; w++) begin
      @(negedge clk);
      seq_we = 1; seq_waddr = $bits(seq_waddr)'(k * INSTR_WORDS + w); seq_wdata = b[32*w +: 32];
    end
    @(negedge clk);
    seq_we = 0;
  endtask

  task automatic wait_idle(input int limit);
    logic [31:0] st;
    int t = 0;
    do begin
      reg_rd(R_STATUS, st);
      t++;
    end while (st[0] && t < limit);
  endtask

  // ---------------- reference data ----------------
  real J [NMAX][NMAX];
  real g [NMAX], c [NMAX], s [NMAX], r [NMAX], d [NMAX], hw [NMAX];
  real pump [4];
  real P [NPREG];
  logic [31:0] rx [PR], ry [PR], rz [PR], rw [PR];

  function automatic real rf(input real x);
    return r32(f32(x));
  endfunction

  function automatic real qv(input int scale);    // value with few bits
    return real'(int'($urandom % 257) - 128) / real'(scale);
  endfunction

  task automatic rng_seed(input logic [31:0] sd);
    for (int l = 0; l < PR; l++) begin
      logic [31:0] lv;
      lv = 32'(l);
      rw[l] = sd ^ (lv * 32'h9E37_79B9) ^ 32'h1234_5678;
      rz[l] = 32'h3621_4069 ^ (lv << 8);
      ry[l] = 32'h5211_2629 ^ sd;
      rx[l] = 32'h0549_1333 ^ lv;
    end
  endtask

  task automatic rng_step();
    for (int l = 0; l < PR; l++) begin
      logic [31:0] t;
      t = rx[l] ^ (rx[l] << 11);
      rx[l] = ry[l]; ry[l] = rz[l]; rz[l] = rw[l];
      rw[l] = rw[l] ^ (rw[l] >> 19) ^ t ^ (t >> 8);
    end
  endtask

  function automatic real rng_val(input int l);
    logic [127:0] q;
    int sum;
    q = {rw[l], rz[l], ry[l], rx[l]};
    sum = 0;
    for (int k = 0; k < 12; k++) sum += int'(q[10*k +: 10]);
    return real'(sum - 6138) / 1024.0;
  endfunction

  task automatic load_j(input int n);
    reg_wr(R_NSIZE, n);
    reg_wr(R_CTRL, 32'h2);            // clear JMEM
    wait_idle(100000);
    for (int a = 0; a < n; a++)
      for (int b = a + 1; b < n; b++)
        if (J[a][b] != 0.0) mem_wr(RG_JMEM, a * NMAX + b, f32(J[a][b]));
  endtask

  task automatic load_vectors(input int n);
    for (int i = 0; i < n; i++) begin
      mem_wr(RG_HEMEM, i, f32(g[i]));
      mem_wr(RG_CMEM, i, f32(c[i]));
      mem_wr(RG_SMEM, i, f32(s[i]));
      mem_wr(RG_RMEM, i, f32(r[i]));
      mem_wr(RG_ADMEM, i, f32(d[i]));
    end
  endtask

  task automatic check_h(input int n, input bit qubo);
    logic [31:0] v;
    for (int i = 0; i < n; i++) begin
      real e, m, x;
      e = g[i]; m = fabs(g[i]);
      for (int j = 0; j < n; j++) if (j != i) begin
        x = qubo ? ((c[j] > 0.0) ? r[j] : 0.0) : c[j];
        e += J[i][j] * x;
        m += fabs(J[i][j] * x);
      end
      mem_rd(RG_HMEM, i, v);
      hw[i] = r32(v);
      checks++;
      if (fabs(hw[i] - e) > m / 65536.0 + 1e-30) begin
        failures++;
        if (failures < 10) $display("FAIL h[%0d] got %g exp %g", i, hw[i], e);
      end
    end
  endtask

  task automatic cmp(input region_e rg, input int i, input real e, input string what);
    logic [31:0] v;
    mem_rd(rg, i, v);
    checks++;
    if (v !== f32(e) && !(v[30:0] == 0 && f32(e) == 0)) begin
      failures++;
      if (failures < 10) $display("FAIL %s[%0d] got %h exp %h (%g)", what, i, v, f32(e), e);
    end
  endtask

  // program A (7 instructions, CIM-style step on c, s and r):
  //  q=c*c  a=p-P0  ff0=Fchi(h) | c3=q*c  m=a*c  ff1=sqrt(r) | d=m-c3  bh=ff0*P2
  //  e=d+bh  nz=rnd*P4 (advance rnd) | f=e+nz | g=f*P5 | c=c+g, s=ff1, r=ff0
  task automatic load_prog_a(input int base);
    instr_t i;
    i = '0; i.mul0_a = SRC_CMEM; i.mul0_b = SRC_CMEM; i.add0_a = SRC_PUMP; i.add0_b = SRC_P0;
    i.add0_neg = 1; i.ff_we[0] = 1; i.ff_src[0] = SRC_FCHI;
    seq_wr(base + 0, i);
    i = '0; i.mul1_a = SRC_FMUL0; i.mul1_b = SRC_CMEM; i.mul0_a = SRC_FADD0; i.mul0_b = SRC_CMEM;
    i.sqrt_a = SRC_RMEM; i.ff_we[1] = 1; i.ff_src[1] = SRC_FSQRT;
    seq_wr(base + 1, i);
    i = '0; i.add0_a = SRC_FMUL0; i.add0_b = SRC_FMUL1; i.add0_neg = 1; i.mul1_a = SRC_FF0; i.mul1_b = SRC_P2;
    seq_wr(base + 2, i);
    i = '0; i.add0_a = SRC_FADD0; i.add0_b = SRC_FMUL1; i.mul0_a = SRC_RND; i.mul0_b = SRC_P4; i.rnd_next = 1;
    seq_wr(base + 3, i);
    i = '0; i.add1_a = SRC_FADD0; i.add1_b = SRC_FMUL0;
    seq_wr(base + 4, i);
    i = '0; i.mul0_a = SRC_FADD1; i.mul0_b = SRC_P5;
    seq_wr(base + 5, i);
    i = '0; i.add0_a = SRC_CMEM; i.add0_b = SRC_FMUL0;
    i.c_we = 1; i.c_src = SRC_FADD0; i.s_we = 1; i.s_src = SRC_FF1; i.r_we = 1; i.r_src = SRC_FF0;
    seq_wr(base + 6, i);
  endtask

  // program B (Jacobi-style, 4 instructions): r = r + P0 * d * (P1 - h)
  task automatic load_prog_b(input int base);
    instr_t i;
    i = '0; i.add0_a = SRC_P1; i.add0_b = SRC_HMEM; i.add0_neg = 1;
    seq_wr(base + 0, i);
    i = '0; i.mul0_a = SRC_FADD0; i.mul0_b = SRC_ADMEM;
    seq_wr(base + 1, i);
    i = '0; i.mul1_a = SRC_FMUL0; i.mul1_b = SRC_P0;
    seq_wr(base + 2, i);
    i = '0; i.add1_a = SRC_RMEM; i.add1_b = SRC_FMUL1; i.r_we = 1; i.r_src = SRC_FADD1;
    seq_wr(base + 3, i);
  endtask

  task automatic run(input int n, input int nstep, input int ce, input int base,
                     input bit qubo, input bit chi_abs);
    logic [31:0] v;
    int nb, nc;
    nb = n / PR; nc = n / PC;
    reg_wr(R_NSIZE, n);
    reg_wr(R_NSTEP, nstep);
    reg_wr(R_CE, ce);
    reg_wr(R_PCBASE, base);
    reg_wr(R_MODE, {30'd0, chi_abs, qubo});
    reg_wr(R_CTRL, 32'h1);
    wait_idle(1000000);
    reg_rd(R_CYCLES, v);
    checks++;
    // paper: N/Pr (N/Pc + Ce) per step; this design adds 4 per step and 1 per run
    if (v != 32'(nstep * (nb * (nc + ce) + 4) + 1)) begin
      failures++; $display("FAIL cycles %0d exp %0d", v, nstep * (nb * (nc + ce) + 4) + 1);
    end
    reg_rd(R_STEP, v);
    checks++;
    if (v != 32'(nstep)) begin failures++; $display("FAIL step count %0d", v); end
    reg_rd(R_STATUS, v);
    checks++;
    if (v[3:0] != 4'b1010) begin failures++; $display("FAIL status %b", v[3:0]); end
  endtask

  task automatic ref_prog_a(input int n, input bit chi_abs, input int step);
    for (int i = 0; i < n; i++) begin
      real q, a, f0, c3, m, f1, dd, bh, e, nz, f, gg;
      int l, grp;
      l = i % PR; grp = i / PR;
      q = rf(c[i] * c[i]); a = rf(pump[step] - P[0]); f0 = chi_abs ? fabs(hw[i]) : hw[i];
      c3 = rf(q * c[i]); m = rf(a * c[i]); f1 = rf($sqrt(r[i]));
      dd = rf(m - c3); bh = rf(f0 * P[2]);
      e = rf(dd + bh);
      nz = rf(rng_val(l) * P[4]);
      f = rf(e + nz);
      gg = rf(f * P[5]);
      c[i] = rf(c[i] + gg); s[i] = f1; r[i] = f0;
      if (l == PR - 1) rng_step();    // one rnd_next per group
    end
  endtask

  task automatic check_vectors(input int n);
    for (int i = 0; i < n; i++) begin
      cmp(RG_CMEM, i, c[i], "c");
      cmp(RG_SMEM, i, s[i], "s");
      cmp(RG_RMEM, i, r[i], "r");
    end
  endtask

  task automatic new_data(input int n, input bit rpos);
    for (int i = 0; i < NMAX; i++)
      for (int j = i; j < NMAX; j++) begin
        J[i][j] = (i == j) ? 0.0 : (($urandom % 4 == 0) ? 0.0 : qv(512));
        J[j][i] = J[i][j];
      end
    for (int i = 0; i < NMAX; i++) begin
      g[i] = qv(256); c[i] = qv(128); s[i] = qv(128);
      r[i] = rpos ? fabs(qv(64)) + 0.5 : qv(64);
      d[i] = qv(64);
    end
  endtask

  logic [31:0] rv;

  initial begin
    rst = 1; reg_req = 0; reg_we = 0; reg_addr = 0; reg_wdata = 0;
    seq_we = 0; seq_waddr = 0; seq_wdata = 0;
    mem_req = 0; mem_we = 0; mem_addr = 0; mem_wdata = 0; irq_ack = 0;
    repeat (3) @(negedge clk);
    rst = 0;
    // parameters: P0 = 1 (threshold), P2 = beta, P4 = noise gain, P5 = dt
    P[0] = 1.0; P[1] = 0.75; P[2] = 0.3; P[3] = 0.0; P[4] = 0.01; P[5] = 0.05; P[6] = 0.0; P[7] = 0.0;
    for (int k = 0; k < NPREG; k++) P[k] = rf(P[k]);      // the values the hardware holds
    for (int k = 0; k < NPREG; k++) reg_wr(R_PREG + k, f32(P[k]));
    for (int k = 0; k < NPREG; k++) begin
      reg_rd(R_PREG + k, rv);
      checks++; if (rv !== f32(P[k])) begin failures++; $display("FAIL preg %0d", k); end
    end
    reg_wr(R_SEED, 32'h0BAD_5EED);
    reg_wr(R_CTRL, 32'h4);
    rng_seed(32'h0BAD_5EED);
    pump[0] = rf(0.9); pump[1] = rf(1.1); pump[2] = rf(1.3); pump[3] = rf(1.5);
    for (int k = 0; k < 4; k++) mem_wr(RG_PMEM, k, f32(pump[k]));
    mem_rd(RG_PMEM, 2, rv);
    checks++; if (rv !== f32(pump[2])) begin failures++; $display("FAIL pmem read"); end
    load_prog_a(0);
    load_prog_b(8);

    // ---- run 1: N = 256, Ising, F_chi = |h| ----
    new_data(256, 1);
    load_j(256);
    load_vectors(256);
    run(256, 1, 7, 0, 0, 1);
    check_h(256, 0);
    ref_prog_a(256, 1, 0);
    check_vectors(256);
    // interrupt: clear by the ACK pin
    checks++; if (!irq) begin failures++; $display("FAIL no irq"); end
    @(negedge clk); irq_ack = 1; @(negedge clk); irq_ack = 0;
    checks++; if (irq) begin failures++; $display("FAIL irq not cleared by ack"); end

    // ---- run 2: N = 128, QUBO, F_chi = h (r kept positive for sqrt) ----
    new_data(128, 1);
    load_j(128);
    load_vectors(128);
    run(128, 1, 7, 0, 1, 0);
    check_h(128, 1);
    ref_prog_a(128, 0, 0);
    for (int i = 0; i < 128; i++) begin
      cmp(RG_CMEM, i, c[i], "c");
      cmp(RG_SMEM, i, s[i], "s");
    end
    // interrupt: clear by writing IRQ
    reg_wr(R_IRQ, 1);
    checks++; if (irq) begin failures++; $display("FAIL irq not cleared by W1C"); end

    // ---- run 3: N = 256, QUBO, Jacobi program at base 8 ----
    new_data(256, 0);
    load_j(256);
    load_vectors(256);
    run(256, 1, 4, 8, 1, 0);
    check_h(256, 1);
    for (int i = 0; i < 256; i++) begin
      r[i] = rf(r[i] + rf(rf(rf(P[1] - hw[i]) * d[i]) * P[0]));
      cmp(RG_RMEM, i, r[i], "r(jacobi)");
      cmp(RG_CMEM, i, c[i], "c(unchanged)");
    end
    reg_wr(R_IRQ, 1);

    // ---- run 4: three steps, pump rates from PMEM ----
    for (int i = 0; i < 256; i++) begin
      mem_wr(RG_RMEM, i, f32(fabs(r[i]) + 0.25));
    end
    run(256, 3, 7, 0, 0, 1);
    for (int i = 0; i < 256; i += 17) begin
      mem_rd(RG_CMEM, i, rv);
      checks++;
      if (rv[30:23] == 8'hFF) begin failures++; $display("FAIL c[%0d] not finite", i); end
    end
    checks++;
    if (led[1] !== 1'b1 || led[0] !== 1'b0) begin failures++; $display("FAIL led %b", led); end

    $display("mechanisms: clr_cycles=%0d fold=%0d diag=%0d lower=%0d hext=%0d hwrite=%0d rnd=%0d irq=%0d te=%0d qubo_mm=%0d ising_mm=%0d",
             n_clr_cycles, n_fold, n_diag, n_lower, n_hext, n_hwrite, n_rnd, n_irq, n_te, n_qubo_mm, n_ising_mm);
    checks++;
    if (n_clr_cycles == 0 || n_fold == 0 || n_diag == 0 || n_lower == 0 || n_hext == 0 ||
        n_hwrite == 0 || n_rnd == 0 || n_irq != 4 || n_te == 0 || n_qubo_mm == 0 || n_ising_mm == 0) begin
      failures++; $display("FAIL a mechanism did not occur");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
