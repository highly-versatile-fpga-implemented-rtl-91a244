// tb_j_mux -- checks J_MUX routing. Every bank drives its own number + 1,
// so each MAC input shows which bank it was routed from. For every block
// (row tile rb, column block cb) of an N = 512 matrix the expected bank is
// worked out from the storage rule of Fig. 3(D): element (i, j), i != j,
// is stored at (min, max) when min < N/2 and at (N-1-min, N-1-max)
// otherwise, in bank (row % 64) * 64 + col % 64; the diagonal reads 0.
module tb_j_mux;
  localparam int PR = 64, PC = 32, NBW = 4, N = 512;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic [PR*PR-1:0][31:0] banks;
  logic [NBW-1:0] rb;
  logic [NBW:0] cb, nb;
  logic [PR-1:0][PC-1:0][31:0] jblk;

  j_mux #(.PR(PR), .PC(PC), .NBW(NBW)) dut (.*);

  initial begin
    for (int b = 0; b < PR * PR; b++) banks[b] = 32'(b + 1);
    nb = (NBW+1)'(N / PR);
    for (int r = 0; r < N / PR; r++) begin
      for (int c = 0; c < N / PC; c++) begin
        rb = NBW'(r);
        cb = (NBW+1)'(c);
        #1;
        for (int m = 0; m < PR; m++) begin
          for (int k = 0; k < PC; k++) begin
            int i, j, lo, hi, row, col;
            logic [31:0] exp;
            i = PR * r + m;
            j = PC * c + k;
            lo = (i < j) ? i : j;
            hi = (i < j) ? j : i;
            if (lo < N / 2) begin row = lo; col = hi; end
            else begin row = N - 1 - lo; col = N - 1 - hi; end
            exp = (i == j) ? 32'd0 : 32'((row % 64) * 64 + (col % 64) + 1);
            checks++;
            if (jblk[m][k] !== exp) begin
              failures++;
              if (failures < 5) $display("FAIL rb=%0d cb=%0d m=%0d k=%0d got %0d exp %0d", r, c, m, k, jblk[m][k], exp);
            end
          end
        end
      end
    end
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
