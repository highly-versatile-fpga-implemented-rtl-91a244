// tb_cal_h -- checks CAL_H: the Heaviside unit and the 64 MACs. Rows of 64
// local fields over N = 128 (four column blocks, both halves of the CMEM /
// RMEM rows) are computed in Ising mode (mu*sigma = c) and in QUBO mode
// (mu*sigma = r H(c), H(c) = 1 for c > 0), with small integer data so the
// reference sums are exact. The fields must appear two cycles after the
// last block (one after the last en2).
module tb_cal_h;
  import tb_fp_pkg::*;
  localparam int PR = 64, PC = 32, NCB = 4;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic en1, en2, hext_sel, half, qubo;
  logic [PR-1:0][PC-1:0][31:0] jblk;
  logic [PR-1:0][31:0] cmem_row, rmem_row, g_row, h;

  cal_h #(.PR(PR), .PC(PC)) dut (.*);

  int nq = 0, ni = 0;

  task automatic run(input logic mode);
    real ref_h [PR];
    real c [NCB*PC], r [NCB*PC];
    logic [PR-1:0][PC-1:0][31:0] J [NCB];
    for (int j = 0; j < NCB * PC; j++) begin
      c[j] = real'($urandom % 9) - 4.0;
      r[j] = real'($urandom % 7) - 3.0;
    end
    for (int m = 0; m < PR; m++) begin
      g_row[m] = f32(real'($urandom % 21) - 10.0);
      ref_h[m] = r32(g_row[m]);
    end
    for (int b = 0; b < NCB; b++)
      for (int m = 0; m < PR; m++)
        for (int k = 0; k < PC; k++) begin
          real jv, v;
          jv = real'($urandom % 11) - 5.0;
          J[b][m][k] = f32(jv);
          v = mode ? ((c[b*PC+k] > 0.0) ? r[b*PC+k] : 0.0) : c[b*PC+k];
          ref_h[m] += jv * v;
        end
    qubo = mode;
    for (int t = 0; t <= NCB; t++) begin
      @(negedge clk);
      en1 = (t < NCB);
      if (t < NCB) begin
        jblk = J[t];
        half = 1'(t % 2);
        for (int l = 0; l < PR; l++) begin
          // the row holding columns of block t: 64 consecutive elements
          cmem_row[l] = f32(c[(t / 2) * 64 + l]);
          rmem_row[l] = f32(r[(t / 2) * 64 + l]);
        end
      end
      en2 = (t > 0);
      hext_sel = (t == 1);
    end
    @(negedge clk);
    en1 = 0; en2 = 0;
    for (int m = 0; m < PR; m++) begin
      checks++;
      if (h[m] !== f32(ref_h[m])) begin
        failures++;
        if (failures < 5) $display("FAIL qubo=%0d row %0d got %g exp %g", mode, m, r32(h[m]), ref_h[m]);
      end
    end
    if (mode) nq++; else ni++;
  endtask

  initial begin
    en1 = 0; en2 = 0; hext_sel = 0; half = 0; qubo = 0;
    jblk = '0; cmem_row = '0; rmem_row = '0; g_row = '0;
    repeat (2) @(negedge clk);
    for (int t = 0; t < 10; t++) run(1'(t % 2));
    checks++;
    if (nq == 0 || ni == 0) failures++;
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
