// tb_cal_h_mac -- checks one 32-input MAC of CAL_H. A row of N/32 = 8
// slices is accumulated: the first slice adds g (HEXT_SEL), later ones the
// feedback. Test 1 uses small integers, for which every product and sum is
// exact, so the result must match bit for bit. Test 2 uses random FP32
// values; the reference is the double-precision sum, and the result must
// lie within 2^-16 of the sum of magnitudes (nine truncations to 24 bits) (the block floating-point
// datapath truncates, it does not round). The result must appear on acc
// the cycle after the last en2.
module tb_cal_h_mac;
  import tb_fp_pkg::*;
  localparam int PC = 32, NSL = 8;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic en1, en2, hext_sel;
  logic [PC-1:0][31:0] jrow, v;
  logic [31:0] g, acc;

  cal_h_mac #(.PC(PC)) dut (.*);

  task automatic run_row(input bit exact);
    real ref_sum, mag;
    logic [PC-1:0][31:0] js [NSL], vs [NSL];
    if (exact) g = f32(real'($urandom % 64) - 32.0);
    else g = f32(($urandom % 20000 - 10000) / 997.0);
    ref_sum = r32(g);
    mag = fabs(r32(g));
    for (int s = 0; s < NSL; s++)
      for (int k = 0; k < PC; k++) begin
        if (exact) begin
          js[s][k] = f32(real'($urandom % 16) - 8.0);
          vs[s][k] = f32(real'($urandom % 8) - 4.0);
        end else begin
          js[s][k] = f32((real'($urandom % 200001) - 100000.0) / 31337.0);
          vs[s][k] = f32((real'($urandom % 200001) - 100000.0) / 7919.0);
        end
        ref_sum += r32(f32(r32(js[s][k]) * r32(vs[s][k])));
        mag += fabs(r32(js[s][k]) * r32(vs[s][k]));
      end
    // stream the slices: en1 at slice s, en2 one cycle later
    for (int t = 0; t <= NSL; t++) begin
      @(negedge clk);
      en1 = (t < NSL);
      if (t < NSL) begin jrow = js[t]; v = vs[t]; end
      en2 = (t > 0);
      hext_sel = (t == 1);
    end
    @(negedge clk);
    en1 = 0; en2 = 0;
    checks++;
    if (exact ? (acc !== f32(ref_sum)) : (fabs(r32(acc) - ref_sum) > mag * (2.0 ** -16))) begin
      failures++;
      if (failures < 5) $display("FAIL exact=%0d got %g (%h) expected %g", exact, r32(acc), acc, ref_sum);
    end
  endtask

  initial begin
    en1 = 0; en2 = 0; hext_sel = 0; jrow = '0; v = '0; g = 0;
    repeat (2) @(negedge clk);
    for (int t = 0; t < 100; t++) run_row(1);
    for (int t = 0; t < 100; t++) run_row(0);
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
