// fp32_pkg -- single-precision floating-point arithmetic used by the
// time-evolution lanes (FADD, FMUL, FSQRT) and by the local-field MACs (FMUL).
//
// All three operators are combinational functions; the modules that call
// them place a register after each, so every unit has a latency of one
// clock. Results are rounded to nearest, ties to even, as IEEE 754 asks.
// Subnormal inputs and results are flushed to (signed) zero, an infinity
// stays an infinity and an invalid operation returns the quiet NaN
// 32'h7FC00000. The flush-to-zero rule is this design's choice; the units'
// FP32 format is the paper's.
package fp32_pkg;

  localparam logic [31:0] FP_QNAN = 32'h7FC0_0000;

  function automatic logic [31:0] fp_inf(input logic s);
    return {s, 8'hFF, 23'd0};
  endfunction

  // Round a normalised 24-bit significand with guard/round/sticky and
  // exponent into a packed FP32 value, handling overflow and underflow.
  function automatic logic [31:0] fp_round_pack(input logic s, input int e,
                                                input logic [23:0] m,
                                                input logic g, input logic r,
                                                input logic st);
    logic [24:0] mr;
    int          ee;
    logic        inc;
    inc = g & (r | st | m[0]);
    mr  = {1'b0, m} + {24'd0, inc};
    ee  = e;
    if (mr[24]) begin
      mr = mr >> 1;
      ee = ee + 1;
    end
    if (ee >= 255) return fp_inf(s);
    if (ee <= 0) return {s, 31'd0};
    return {s, ee[7:0], mr[22:0]};
  endfunction

  function automatic logic [31:0] fp_mul(input logic [31:0] a, input logic [31:0] b);
    logic        s;
    logic [7:0]  ea, eb;
    logic [47:0] p;
    int          e;
    s  = a[31] ^ b[31];
    ea = a[30:23];
    eb = b[30:23];
    if ((ea == 8'hFF && a[22:0] != 0) || (eb == 8'hFF && b[22:0] != 0)) return FP_QNAN;
    if (ea == 8'hFF || eb == 8'hFF) begin
      if (ea == 8'h00 || eb == 8'h00) return FP_QNAN;
      return fp_inf(s);
    end
    if (ea == 8'h00 || eb == 8'h00) return {s, 31'd0};
    p = {1'b1, a[22:0]} * {1'b1, b[22:0]};
    e = int'(ea) + int'(eb) - 127;
    if (p[47]) begin
      e = e + 1;
      return fp_round_pack(s, e, p[47:24], p[23], p[22], |p[21:0]);
    end
    return fp_round_pack(s, e, p[46:23], p[22], p[21], |p[20:0]);
  endfunction

  function automatic logic [31:0] fp_add(input logic [31:0] a, input logic [31:0] b);
    logic [31:0] x, y;
    logic [7:0]  ex, ey;
    logic [49:0] mx, my, sum;   // 24-bit significand, 26 extra low bits
    int          d, e, lz;
    logic        s;
    ex = a[30:23];
    ey = b[30:23];
    if ((ex == 8'hFF && a[22:0] != 0) || (ey == 8'hFF && b[22:0] != 0)) return FP_QNAN;
    if (ex == 8'hFF && ey == 8'hFF) return (a[31] == b[31]) ? a : FP_QNAN;
    if (ex == 8'hFF) return a;
    if (ey == 8'hFF) return b;
    if (ex == 8'h00 && ey == 8'h00) return {a[31] & b[31], 31'd0};
    if (ex == 8'h00) return b;
    if (ey == 8'h00) return a;
    // order so that |x| >= |y|
    if (a[30:0] >= b[30:0]) begin x = a; y = b; end
    else begin x = b; y = a; end
    ex = x[30:23];
    ey = y[30:23];
    d  = int'(ex) - int'(ey);
    mx = {1'b0, 1'b1, x[22:0], 25'd0};
    my = {1'b0, 1'b1, y[22:0], 25'd0};
    if (d > 26) my = 50'd1;                       // only sticky survives
    else if (d > 0) my = (my >> d) | {49'd0, |(my & ((50'd1 << d) - 50'd1))};
    s = x[31];
    if (x[31] == y[31]) sum = mx + my;
    else sum = mx - my;
    if (sum == 0) return 32'd0;
    e = int'(ex);
    if (sum[49]) begin
      sum = (sum >> 1) | {49'd0, sum[0]};
      e   = e + 1;
    end else begin
      lz = 0;
      for (int k = 48; k >= 0; k--) begin
        if (sum[k]) break;
        lz++;
      end
      sum = sum << lz;
      e   = e - lz;
    end
    // sum[48] is the leading one
    return fp_round_pack(s, e, sum[48:25], sum[24], sum[23], |sum[22:0]);
  endfunction

  function automatic logic [31:0] fp_sub(input logic [31:0] a, input logic [31:0] b);
    return fp_add(a, {~b[31], b[30:0]});
  endfunction

  function automatic logic [31:0] fp_sqrt(input logic [31:0] a);
    logic [7:0]  ea;
    logic [51:0] rad;       // radicand: significand scaled to 52 bits
    logic [25:0] q;         // 26-bit root: 24 bits + guard + round
    logic [53:0] rem, trial;
    int          e;
    ea = a[30:23];
    if (ea == 8'hFF && a[22:0] != 0) return FP_QNAN;
    if (ea == 8'h00) return {a[31], 31'd0};
    if (a[31]) return FP_QNAN;
    if (ea == 8'hFF) return a;
    e = int'(ea) - 127;
    // value = 1.f * 2^e ; make the exponent even
    if (e % 2 != 0) begin
      rad = {2'b01, a[22:0], 27'd0} << 1;   // 2 * 1.f
      e   = e - 1;
    end else begin
      rad = {2'b01, a[22:0], 27'd0};
    end
    // integer square root of rad (scaled by 2^50) -> q scaled by 2^25
    q   = '0;
    rem = '0;
    for (int k = 25; k >= 0; k--) begin
      rem   = (rem << 2) | 54'(rad[2*k+1 -: 2]);
      trial = {26'd0, q, 2'b01};
      if (rem >= trial) begin
        rem = rem - trial;
        q   = {q[24:0], 1'b1};
      end else begin
        q   = {q[24:0], 1'b0};
      end
    end
    // q[25] is the leading one (root of 1.x..3.x is 1.x)
    return fp_round_pack(1'b0, e / 2 + 127, q[25:2], q[1], q[0], rem != 0);
  endfunction

  function automatic logic [31:0] fp_abs(input logic [31:0] a);
    return {1'b0, a[30:0]};
  endfunction

endpackage
