// cal_csr -- one CAL_CSR lane, the time-evolution (TE) calculator of one
// spin (Fig. 3(B), Sec. 4.2). The design has 64 lanes, one per MAC row.
//
// A lane holds two adders (FADD0/1), two multipliers (FMUL0/1), a square
// root (FSQRT), the F_chi unit and six flip-flops FF0..FF5, all FP32. Every
// operand of every unit is taken from a shared data bus through a selector
// (SEL). The bus carries c[i], s[i] (or e[i]), h[i], r[i], d[i] of this
// lane's spin, the pump rate of the step, the lane's normal random sample,
// F_chi(h[i]), the six FFs, the registered results of the five units and
// the parameter registers P0..P7. Which source feeds which input, and what
// is written back to the FFs and to CMEM/SMEM/RMEM, is set every cycle by
// the instruction the controller reads from the sequence-control memory;
// so the lane runs open-loop CIM, closed-loop CIM, Jacobi SOR or another
// scheme with no change to the hardware.
//
// Timing: each unit computes in one cycle and registers its result, which
// operand selectors see from the next cycle on. Write-back selectors see
// the result of the current cycle, so a value computed in cycle t can be
// stored in a memory at the end of t. F_chi(h) is h or |h| (chi_abs).
// The unit mix, the six FFs and the bus follow the paper; the one-cycle
// latency of the units, the subtract flags of the adders, the source codes
// and the write-back convention are this design's choices.
module cal_csr
  import cim_pkg::*;
  import fp32_pkg::*;
(
  input  logic                    clk,
  input  logic                    active,     // instr is valid this cycle
  input  instr_t                  instr,
  input  logic [31:0]             c_in,
  input  logic [31:0]             s_in,
  input  logic [31:0]             h_in,
  input  logic [31:0]             r_in,
  input  logic [31:0]             d_in,
  input  logic [31:0]             pump,
  input  logic [31:0]             rnd,
  input  logic [NPREG-1:0][31:0]  preg,
  input  logic                    chi_abs,
  output logic [31:0]             c_wdata,
  output logic [31:0]             s_wdata,
  output logic [31:0]             r_wdata
);
  logic [31:0] add0_q, add1_q, mul0_q, mul1_q, sqrt_q;
  logic [31:0] add0_d, add1_d, mul0_d, mul1_d, sqrt_d;
  logic [NFF-1:0][31:0] ff_q;
  logic [31:0] fchi;

  assign fchi = chi_abs ? fp_abs(h_in) : h_in;

  // Value of a bus source. new_res selects the unit results of this cycle
  // (write-back view) instead of the registered ones (operand view).
  function automatic logic [31:0] bus(input src_e sel, input logic new_res);
    case (sel)
      SRC_CMEM:  return c_in;
      SRC_SMEM:  return s_in;
      SRC_HMEM:  return h_in;
      SRC_RMEM:  return r_in;
      SRC_ADMEM: return d_in;
      SRC_PUMP:  return pump;
      SRC_RND:   return rnd;
      SRC_FCHI:  return fchi;
      SRC_FF0:   return ff_q[0];
      SRC_FF1:   return ff_q[1];
      SRC_FF2:   return ff_q[2];
      SRC_FF3:   return ff_q[3];
      SRC_FF4:   return ff_q[4];
      SRC_FF5:   return ff_q[5];
      SRC_FADD0: return new_res ? add0_d : add0_q;
      SRC_FADD1: return new_res ? add1_d : add1_q;
      SRC_FMUL0: return new_res ? mul0_d : mul0_q;
      SRC_FMUL1: return new_res ? mul1_d : mul1_q;
      SRC_FSQRT: return new_res ? sqrt_d : sqrt_q;
      SRC_P0:    return preg[0];
      SRC_P1:    return preg[1];
      SRC_P2:    return preg[2];
      SRC_P3:    return preg[3];
      SRC_P4:    return preg[4];
      SRC_P5:    return preg[5];
      SRC_P6:    return preg[6];
      SRC_P7:    return preg[7];
      default:   return 32'd0;
    endcase
  endfunction

  always_comb begin
    logic [31:0] b0, b1;
    b0     = bus(instr.add0_b, 1'b0);
    b1     = bus(instr.add1_b, 1'b0);
    add0_d = fp_add(bus(instr.add0_a, 1'b0), instr.add0_neg ? {~b0[31], b0[30:0]} : b0);
    add1_d = fp_add(bus(instr.add1_a, 1'b0), instr.add1_neg ? {~b1[31], b1[30:0]} : b1);
    mul0_d = fp_mul(bus(instr.mul0_a, 1'b0), bus(instr.mul0_b, 1'b0));
    mul1_d = fp_mul(bus(instr.mul1_a, 1'b0), bus(instr.mul1_b, 1'b0));
    sqrt_d = fp_sqrt(bus(instr.sqrt_a, 1'b0));
    c_wdata = bus(instr.c_src, 1'b1);
    s_wdata = bus(instr.s_src, 1'b1);
    r_wdata = bus(instr.r_src, 1'b1);
  end

  always_ff @(posedge clk) begin
    if (active) begin
      add0_q <= add0_d;
      add1_q <= add1_d;
      mul0_q <= mul0_d;
      mul1_q <= mul1_d;
      sqrt_q <= sqrt_d;
      for (int f = 0; f < NFF; f++)
        if (instr.ff_we[f]) ff_q[f] <= bus(instr.ff_src[f], 1'b1);
    end
  end
endmodule
