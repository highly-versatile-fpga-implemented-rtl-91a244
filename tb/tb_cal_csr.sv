// tb_cal_csr -- checks one CAL_CSR time-evolution lane.
//
// Part 1 runs random instructions against a reference model of the lane
// written here with double arithmetic: every unit result is the exact
// double result rounded once to FP32 (exact for products and, with the
// bounded values used, for sums; correctly rounded for square roots).
// Operands see the unit results registered in the previous active cycle,
// write-backs see this cycle's results, FFs change only when written, and
// nothing changes while active is low. The three write data outputs are
// compared every cycle; their sources are random, so FFs and units are
// observed too. Part 2 runs the four-instruction Jacobi update
// x <- x + w d (r - h) on fixed data and compares with a hand-computed value.
module tb_cal_csr;
  import tb_fp_pkg::*;
  import cim_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic active, chi_abs;
  instr_t instr;
  logic [31:0] c_in, s_in, h_in, r_in, d_in, pump, rnd;
  logic [NPREG-1:0][31:0] preg;
  logic [31:0] c_wdata, s_wdata, r_wdata;

  cal_csr dut (.*);

  // reference state
  real m_ff [NFF];
  logic [31:0] last_jacobi;
  real m_add0, m_add1, m_mul0, m_mul1, m_sqrt;
  real n_add0, n_add1, n_mul0, n_mul1, n_sqrt;

  function automatic real rnd_val();
    return real'(int'($urandom % 2001) - 1000) / 256.0;
  endfunction

  function automatic real mbus(input src_e s, input bit newres);
    case (s)
      SRC_CMEM:  return r32(c_in);
      SRC_SMEM:  return r32(s_in);
      SRC_HMEM:  return r32(h_in);
      SRC_RMEM:  return r32(r_in);
      SRC_ADMEM: return r32(d_in);
      SRC_PUMP:  return r32(pump);
      SRC_RND:   return r32(rnd);
      SRC_FCHI:  return chi_abs ? fabs(r32(h_in)) : r32(h_in);
      SRC_FF0, SRC_FF1, SRC_FF2, SRC_FF3, SRC_FF4, SRC_FF5:
        return m_ff[int'(s) - int'(SRC_FF0)];
      SRC_FADD0: return newres ? n_add0 : m_add0;
      SRC_FADD1: return newres ? n_add1 : m_add1;
      SRC_FMUL0: return newres ? n_mul0 : m_mul0;
      SRC_FMUL1: return newres ? n_mul1 : m_mul1;
      SRC_FSQRT: return newres ? n_sqrt : m_sqrt;
      SRC_P0, SRC_P1, SRC_P2, SRC_P3, SRC_P4, SRC_P5, SRC_P6, SRC_P7:
        return r32(preg[int'(s) - int'(SRC_P0)]);
      default:   return 0.0;
    endcase
  endfunction

  function automatic real rf(input real x);
    return r32(f32(x));
  endfunction

  function automatic src_e any_src();
    return src_e'($urandom % 28);
  endfunction

  // multiplier operand: a parameter register (|p| <= 1) or an input, so
  // that values stay bounded across long random programs
  function automatic src_e small_src();
    return src_e'(($urandom % 2) ? 20 + $urandom % 8 : 1 + $urandom % 8);
  endfunction

  task automatic check(input logic [31:0] got, input real exp, input string what);
    checks++;
    // +0 and -0 are the same number; the sign of a zero result is not specified here
    if (got !== f32(exp) && !(got[30:0] == 0 && f32(exp) == 0)) begin
      failures++;
      if (failures < 10) $display("FAIL %s got %h (%g) exp %h (%g)", what, got, r32(got), f32(exp), exp);
    end
  endtask

  task automatic random_cycle();
    instr = '0;
    instr.add0_a = any_src(); instr.add0_b = any_src();
    instr.add1_a = any_src(); instr.add1_b = any_src();
    instr.add0_neg = 1'($urandom); instr.add1_neg = 1'($urandom);
    instr.mul0_a = any_src(); instr.mul0_b = small_src();
    instr.mul1_a = small_src(); instr.mul1_b = any_src();
    instr.sqrt_a = src_e'(20 + $urandom % 8);    // P regs are positive here
    instr.ff_we = 6'($urandom);
    for (int f = 0; f < NFF; f++) instr.ff_src[f] = any_src();
    instr.c_src = any_src(); instr.s_src = any_src(); instr.r_src = any_src();
    instr.c_we = 1'($urandom); instr.s_we = 1'($urandom); instr.r_we = 1'($urandom);
    active = ($urandom % 8) != 0;
    chi_abs = 1'($urandom);
    c_in = f32(rnd_val()); s_in = f32(rnd_val()); h_in = f32(rnd_val());
    r_in = f32(rnd_val()); d_in = f32(rnd_val()); pump = f32(rnd_val());
    rnd = f32(rnd_val());
    #1;
    // reference results of this cycle
    n_add0 = rf(mbus(instr.add0_a, 0) + (instr.add0_neg ? -1.0 : 1.0) * mbus(instr.add0_b, 0));
    n_add1 = rf(mbus(instr.add1_a, 0) + (instr.add1_neg ? -1.0 : 1.0) * mbus(instr.add1_b, 0));
    n_mul0 = rf(mbus(instr.mul0_a, 0) * mbus(instr.mul0_b, 0));
    n_mul1 = rf(mbus(instr.mul1_a, 0) * mbus(instr.mul1_b, 0));
    n_sqrt = rf($sqrt(mbus(instr.sqrt_a, 0)));
    check(c_wdata, mbus(instr.c_src, 1), "c_wdata");
    check(s_wdata, mbus(instr.s_src, 1), "s_wdata");
    check(r_wdata, mbus(instr.r_src, 1), "r_wdata");
    @(posedge clk);
    if (active) begin
      real nf [NFF];
      for (int f = 0; f < NFF; f++) nf[f] = instr.ff_we[f] ? mbus(instr.ff_src[f], 1) : m_ff[f];
      m_ff = nf;
      m_add0 = n_add0; m_add1 = n_add1; m_mul0 = n_mul0; m_mul1 = n_mul1; m_sqrt = n_sqrt;
    end
    @(negedge clk);
  endtask

  task automatic init_state();
    // one active cycle that loads every FF and every unit from known values
    instr = '0;
    instr.ff_we = '1;
    for (int f = 0; f < NFF; f++) instr.ff_src[f] = SRC_ZERO;
    instr.add0_a = SRC_P0; instr.add1_a = SRC_P1; instr.mul0_a = SRC_P2; instr.mul0_b = SRC_P3;
    instr.mul1_a = SRC_P4; instr.mul1_b = SRC_P5; instr.sqrt_a = SRC_P6;
    active = 1;
    @(posedge clk);
    for (int f = 0; f < NFF; f++) m_ff[f] = 0.0;
    m_add0 = r32(preg[0]); m_add1 = r32(preg[1]); m_mul0 = rf(r32(preg[2]) * r32(preg[3]));
    m_mul1 = rf(r32(preg[4]) * r32(preg[5])); m_sqrt = rf($sqrt(r32(preg[6])));
    @(negedge clk);
  endtask

  // Jacobi SOR element update, four instructions (C_e = 4):
  //  0: FADD0 = r - h
  //  1: FMUL0 = FADD0 * d
  //  2: FMUL1 = FMUL0 * w (P0)
  //  3: FADD1 = x + FMUL1 ; write to SMEM
  task automatic jacobi(input real x, input real r, input real h, input real d,
                        input real w);
    real expv;
    preg[0] = f32(w);
    s_in = f32(x); r_in = f32(r); h_in = f32(h); d_in = f32(d);
    chi_abs = 0;
    active = 1;
    instr = '0; instr.add0_a = SRC_RMEM; instr.add0_b = SRC_HMEM; instr.add0_neg = 1;
    @(negedge clk);
    instr = '0; instr.mul0_a = SRC_FADD0; instr.mul0_b = SRC_ADMEM;
    @(negedge clk);
    instr = '0; instr.mul1_a = SRC_FMUL0; instr.mul1_b = SRC_P0;
    @(negedge clk);
    instr = '0; instr.add1_a = SRC_SMEM; instr.add1_b = SRC_FMUL1;
    instr.s_src = SRC_FADD1; instr.s_we = 1;
    #1;
    expv = rf(x + rf(rf(rf(r - h) * d) * w));
    check(s_wdata, expv, "jacobi");
    last_jacobi = s_wdata;
    @(negedge clk);
  endtask

  initial begin
    active = 0; chi_abs = 0; instr = '0;
    c_in = 0; s_in = 0; h_in = 0; r_in = 0; d_in = 0; pump = 0; rnd = 0;
    for (int p = 0; p < NPREG; p++) preg[p] = f32(real'(1 + $urandom % 255) / 256.0);
    @(negedge clk);
    for (int prog = 0; prog < 200; prog++) begin
      init_state();
      for (int t = 0; t < 40; t++) random_cycle();
    end
    jacobi(1.0, 2.0, 0.5, 0.25, 0.8);      // 1 + 0.8*0.25*1.5 = 1.3
    checks++;
    if (last_jacobi !== 32'h3FA6_6666) begin   // 1.3 in FP32 (RNE of 1.2999999523)
      failures++;
      $display("FAIL jacobi constant %h", last_jacobi);
    end
    for (int t = 0; t < 200; t++)
      jacobi(rnd_val(), rnd_val(), rnd_val(), rnd_val(), real'(1 + $urandom % 255) / 128.0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
