// tb_rnd_gen -- checks RND_GEN. A reference xorshift128 with the same
// per-lane seeding is run here for every lane; each sample is rebuilt as
// (sum of twelve 10-bit fields - 6138) / 1024 in double precision and
// compared bit for bit. It also checks that the output holds while next is
// low, that seed_load restarts the sequence, and that the mean and variance
// over 64 lanes x 2000 samples are near 0 and 1.
module tb_rnd_gen;
  import tb_fp_pkg::*;
  localparam int LANES = 64;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic rst, seed_load, next;
  logic [31:0] seed;
  logic [LANES-1:0][31:0] rnd;

  rnd_gen #(.LANES(LANES)) dut (.*);

  logic [31:0] x [LANES], y [LANES], z [LANES], w [LANES];

  task automatic ref_seed(input logic [31:0] s);
    for (int l = 0; l < LANES; l++) begin
      logic [31:0] lv;
      lv = 32'(l);
      w[l] = s ^ (lv * 32'h9E37_79B9) ^ 32'h1234_5678;
      z[l] = 32'h3621_4069 ^ (lv << 8);
      y[l] = 32'h5211_2629 ^ s;
      x[l] = 32'h0549_1333 ^ lv;
    end
  endtask

  task automatic ref_step();
    for (int l = 0; l < LANES; l++) begin
      logic [31:0] t;
      t = x[l] ^ (x[l] << 11);
      x[l] = y[l]; y[l] = z[l]; z[l] = w[l];
      w[l] = w[l] ^ (w[l] >> 19) ^ t ^ (t >> 8);
    end
  endtask

  function automatic real ref_val(input int l);
    logic [127:0] q;
    int sum;
    q = {w[l], z[l], y[l], x[l]};
    sum = 0;
    for (int k = 0; k < 12; k++) sum += int'(q[10*k +: 10]);
    return real'(sum - 6138) / 1024.0;
  endfunction

  real acc, acc2;
  int n;

  task automatic compare_all(input bit stats);
    for (int l = 0; l < LANES; l++) begin
      real v;
      v = ref_val(l);
      checks++;
      if (rnd[l] !== f32(v) && !(v == 0.0 && rnd[l][30:0] == 0)) begin
        failures++;
        if (failures < 10) $display("FAIL lane %0d got %g exp %g", l, r32(rnd[l]), v);
      end
      if (stats) begin
        acc += v; acc2 += v * v; n++;
      end
    end
  endtask

  initial begin
    rst = 1; seed_load = 0; next = 0; seed = 0;
    acc = 0; acc2 = 0; n = 0;
    @(negedge clk); @(negedge clk);
    rst = 0;
    ref_seed(32'd0);
    compare_all(0);
    for (int t = 0; t < 2000; t++) begin
      next = 1;
      @(negedge clk);
      ref_step();
      next = ($urandom % 4) == 0;     // sometimes hold the state
      if (!next) begin
        @(negedge clk);
      end else begin
        @(negedge clk);
        ref_step();
      end
      next = 0;
      compare_all(1);
    end
    // seed restart
    seed = 32'hCAFE_F00D; seed_load = 1;
    @(negedge clk);
    seed_load = 0;
    ref_seed(seed);
    compare_all(0);
    repeat (3) @(negedge clk);
    compare_all(0);                   // held while next = 0
    checks++;
    if (acc / n > 0.02 || acc / n < -0.02) begin
      failures++; $display("FAIL mean %g", acc / n);
    end
    checks++;
    if (acc2 / n > 1.03 || acc2 / n < 0.97) begin
      failures++; $display("FAIL variance %g", acc2 / n);
    end
    $display("mean %f var %f over %0d samples", acc / n, acc2 / n, n);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
