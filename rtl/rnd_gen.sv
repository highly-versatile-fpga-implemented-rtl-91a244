// rnd_gen -- RND_GEN, the normal random number generator (Table 2, Fig. 3(B)),
// one N(0,1) sample per time-evolution lane.
//
// Each lane runs its own xorshift128 generator (four 32-bit words of state).
// A sample is the sum of twelve 10-bit uniform fields of the state, centred
// and scaled: x = (S - 6138) / 1024 with S the sum, which has mean 0 and
// variance 1 - 2^-20 and, by the central limit theorem, a close-to-normal
// shape (bounded at +-6). The integer 2S - 12276 is converted exactly to
// FP32 and divided by 2048 through the exponent. The paper names only a
// "normal random number generator"; the generator and the sum-of-uniforms
// method are this design's choices (the noise they drive, g_s^2 = 1e-7 in
// the paper's runs, makes the tails' shape matter little).
//
// Interface: rnd is valid at all times and changes the cycle after next is
// high. seed_load (or reset, with seed 0) restarts every lane from a state
// derived from seed and the lane number.
module rnd_gen #(
  parameter int LANES = 64
) (
  input  logic                   clk,
  input  logic                   rst,
  input  logic                   seed_load,
  input  logic [31:0]            seed,
  input  logic                   next,
  output logic [LANES-1:0][31:0] rnd
);
  logic [LANES-1:0][127:0] st;

  function automatic logic [127:0] seed_state(input logic [31:0] s, input int lane);
    logic [31:0] l;
    l = 32'(lane);
    return {s ^ (l * 32'h9E37_79B9) ^ 32'h1234_5678,
            32'h3621_4069 ^ (l << 8),
            32'h5211_2629 ^ s,
            32'h0549_1333 ^ l};
  endfunction

  function automatic logic [127:0] step(input logic [127:0] q);
    logic [31:0] x, y, z, w, t;
    {w, z, y, x} = q;
    t = x ^ (x << 11);
    x = y;
    y = z;
    z = w;
    w = w ^ (w >> 19) ^ t ^ (t >> 8);
    return {w, z, y, x};
  endfunction

  function automatic logic [31:0] to_normal(input logic [127:0] q);
    int          sum, tv, p;
    logic [13:0] mag;
    logic [23:0] man;
    sum = 0;
    for (int k = 0; k < 12; k++) sum = sum + int'(q[10*k +: 10]);
    tv = 2 * sum - 12276;
    if (tv == 0) return 32'd0;
    mag = 14'((tv < 0) ? -tv : tv);
    p = 0;
    for (int k = 0; k < 14; k++) if (mag[k]) p = k;
    man = 24'(mag) << (23 - p);
    return {tv < 0, 8'(127 + p - 11), man[22:0]};
  endfunction

  always_ff @(posedge clk) begin
    for (int l = 0; l < LANES; l++) begin
      if (rst) st[l] <= seed_state(32'd0, l);
      else if (seed_load) st[l] <= seed_state(seed, l);
      else if (next) st[l] <= step(st[l]);
    end
  end

  always_comb
    for (int l = 0; l < LANES; l++) rnd[l] = to_normal(st[l]);
endmodule
