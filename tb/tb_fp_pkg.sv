// tb_fp_pkg -- testbench helpers: conversion between real (double) and
// FP32 bit patterns, done through the IEEE double format so that the
// references do not share code with the design's arithmetic. f32 rounds a
// double to nearest-even single precision and flushes subnormals to zero,
// matching the convention of the design.
package tb_fp_pkg;

  function automatic logic [31:0] f32(input real r);
    logic [63:0] d;
    logic        s;
    int          e;
    logic [52:0] m;         // with hidden bit
    logic [24:0] mr;
    logic        g, st;
    d = $realtobits(r);
    s = d[63];
    if (d[62:52] == 11'h7FF) return {s, 8'hFF, (d[51:0] != 0) ? 23'h400000 : 23'd0};
    if (d[62:52] == 11'd0) return {s, 31'd0};
    e  = int'(d[62:52]) - 1023 + 127;
    m  = {1'b1, d[51:0]};
    mr = {1'b0, m[52:29]};
    g  = m[28];
    st = |m[27:0];
    if (g && (st || mr[0])) mr = mr + 1;
    if (mr[24]) begin
      mr = mr >> 1;
      e  = e + 1;
    end
    if (e >= 255) return {s, 8'hFF, 23'd0};
    if (e <= 0) return {s, 31'd0};
    return {s, 8'(e), mr[22:0]};
  endfunction

  function automatic real r32(input logic [31:0] f);
    logic [63:0] d;
    if (f[30:23] == 8'd0) return 0.0;
    d = {f[31], 11'(int'(f[30:23]) - 127 + 1023), f[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction

  // round-trip a real through single precision
  function automatic real q32(input real r);
    return r32(f32(r));
  endfunction

  function automatic real fabs(input real r);
    return (r < 0.0) ? -r : r;
  endfunction

endpackage
