// cal_h_mac -- one of the 64 MAC modules of CAL_H (Fig. 3(C)): a 32-input
// FP32 multiply-accumulate that adds one 32-element slice of a row of J
// times mu*sigma to a running local field every cycle.
//
// Stage 1: 32 FMULs (IEEE products) into the FF row.
// Stage 2: F2COMP turns each product into a two's-complement significand
// with GUARD extra low bits; CSAPRE takes the 33 inputs (32 products plus
// either the Zeeman term g[i] or the running sum, chosen by HEXT_SEL),
// finds their largest exponent E, shifts every significand to E and
// compresses them in a carry-save tree to a carry and a sum word; CLA adds
// the two; ABS takes sign and magnitude; NORM finds the leading one; EADD
// corrects E by that shift; PACK builds the FP32 result, which the output
// FF holds and feeds back. Bits shifted out on alignment and normalisation
// are dropped, so, as the paper states, the result does not follow IEEE 754
// rounding. The pipeline order is the paper's (Fig. 3(C)); GUARD, the tree
// shape, flushing subnormals to zero and H(0) handling elsewhere are this
// design's choices. Infinities and NaNs are not propagated by stage 2.
//
// Timing: en1 loads the products of (jrow, v); en2 one cycle later adds
// them; acc is valid the cycle after en2. One new slice per cycle.
module cal_h_mac
  import fp32_pkg::*;
#(
  parameter int PC    = 32,
  parameter int GUARD = 3
) (
  input  logic                 clk,
  input  logic                 en1,        // stage-1 load
  input  logic [PC-1:0][31:0]  jrow,       // J[i][j0 .. j0+PC-1]
  input  logic [PC-1:0][31:0]  v,          // (mu*sigma)[j0 .. j0+PC-1]
  input  logic                 en2,        // stage-2 accumulate
  input  logic                 hext_sel,   // 1: 33rd input is g, 0: feedback
  input  logic [31:0]          g,          // Zeeman term from HEMEM
  output logic [31:0]          acc
);
  localparam int NIN = PC + 1;
  localparam int MW  = 24 + GUARD;          // aligned magnitude width
  localparam int W   = MW + 1 + $clog2(NIN);

  logic [PC-1:0][31:0] prod_q;

  function automatic logic [31:0] bfp_sum(input logic [NIN-1:0][31:0] x);
    logic signed [W-1:0] t  [NIN];
    logic        [W-1:0] cs [NIN];
    logic        [W-1:0] nx [NIN];
    logic        [W-1:0] a, b, c, sum, mag;
    int                  e_max, n, m, q, p, ex;
    logic                s;
    logic [23:0]         man;
    // exponent of the largest input
    e_max = 0;
    for (int k = 0; k < NIN; k++)
      if (int'(x[k][30:23]) > e_max) e_max = int'(x[k][30:23]);
    // F2COMP and alignment
    for (int k = 0; k < NIN; k++) begin
      logic signed [W-1:0] sm;
      if (x[k][30:23] == 8'd0) sm = '0;
      else sm = $signed({{(W-MW){1'b0}}, 1'b1, x[k][22:0], {GUARD{1'b0}}});
      if (x[k][31]) sm = -sm;
      t[k]  = sm >>> (e_max - int'(x[k][30:23]));
      cs[k] = t[k];
    end
    // carry-save tree: 3:2 compressors until two words remain
    n = NIN;
    for (int lvl = 0; lvl < 12; lvl++) begin
      if (n > 2) begin
        m = 0;
        q = n / 3;
        for (int gi = 0; gi < NIN / 3; gi++) begin
          if (gi < q) begin
            a = cs[3*gi];
            b = cs[3*gi+1];
            c = cs[3*gi+2];
            nx[m]   = a ^ b ^ c;
            nx[m+1] = ((a & b) | (a & c) | (b & c)) << 1;
            m = m + 2;
          end
        end
        for (int r = 0; r < 2; r++) begin
          if (r < n % 3) begin
            nx[m] = cs[3*q + r];
            m = m + 1;
          end
        end
        for (int k = 0; k < NIN; k++) cs[k] = (k < m) ? nx[k] : '0;
        n = m;
      end
    end
    // CLA, ABS
    sum = cs[0] + cs[1];
    s   = sum[W-1];
    mag = s ? -sum : sum;
    if (mag == '0) return 32'd0;
    // NORM
    p = 0;
    for (int k = 0; k < W; k++) if (mag[k]) p = k;
    if (p >= 23) man = 24'(mag >> (p - 23));
    else man = 24'(mag << (23 - p));
    // EADD, PACK
    ex = e_max + p - (23 + GUARD);
    if (ex <= 0) return {s, 31'd0};
    if (ex >= 255) return {s, 8'hFF, 23'd0};
    return {s, ex[7:0], man[22:0]};
  endfunction

  always_ff @(posedge clk) begin
    if (en1)
      for (int k = 0; k < PC; k++) prod_q[k] <= fp_mul(jrow[k], v[k]);
    if (en2)
      acc <= bfp_sum({hext_sel ? g : acc, prod_q});
  end
endmodule
