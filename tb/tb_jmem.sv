// tb_jmem -- checks JMEM with an N = 256 build (NB = 4, eight words per
// bank). After a clear sweep every word must read zero. Then a random
// symmetric matrix is written element by element (each unordered pair
// once, in random orientation; diagonal writes must be ignored), and for
// every 64 x 32 block of the full matrix the word the block needs is read
// and routed through J_MUX; the result must equal the matrix block, with
// zeros on the diagonal. The word address of a block pair is worked out
// here from the Rotate & Fit rule.
module tb_jmem;
  localparam int NMAX = 256, BK = 64, NB = NMAX / BK, DEPTH = NB * NB / 2;
  localparam int AW = $clog2(DEPTH);
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic [$clog2(NMAX):0] n;
  logic [AW-1:0] raddr, clr_addr;
  logic [BK*BK-1:0][31:0] rdata;
  logic we, clr;
  logic [$clog2(NMAX)-1:0] wa, wb;
  logic [31:0] wdata;
  logic [3:0] rb;
  logic [4:0] cb, nb;
  logic [BK-1:0][31:0][31:0] jblk;

  logic [31:0] J [NMAX][NMAX];

  jmem #(.NMAX(NMAX), .BK(BK)) dut (.*);
  j_mux #(.PR(64), .PC(32), .NBW(4)) u_mux (.banks(rdata), .rb, .cb, .nb, .jblk);

  function automatic int word_of(input int r, input int jt);
    int lo, hi;
    lo = (r < jt) ? r : jt;
    hi = (r < jt) ? jt : r;
    if (lo >= NB / 2) return (NB - 1 - lo) * NB + (NB - 1 - hi);
    return lo * NB + hi;
  endfunction

  initial begin
    n = NMAX; nb = NB; we = 0; clr = 0; raddr = 0; clr_addr = 0; wa = 0; wb = 0; wdata = 0;
    rb = 0; cb = 0;
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk) clr = 1; clr_addr = AW'(a);
    end
    @(negedge clk) clr = 0;
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk) raddr = AW'(a);
      @(posedge clk); #1;
      checks++;
      if (rdata !== '0) begin failures++; $display("FAIL word %0d not cleared", a); end
    end
    for (int i = 0; i < NMAX; i++)
      for (int j = i; j < NMAX; j++) begin
        J[i][j] = (i == j) ? 32'd0 : $urandom;
        J[j][i] = J[i][j];
      end
    for (int i = 0; i < NMAX; i++)
      for (int j = i; j < NMAX; j++) begin
        @(negedge clk);
        we = 1;
        if ($urandom % 2) begin wa = 8'(i); wb = 8'(j); end
        else begin wa = 8'(j); wb = 8'(i); end
        wdata = (i == j) ? 32'hDEAD_BEEF : J[i][j];
      end
    @(negedge clk) we = 0;
    for (int r = 0; r < NB; r++)
      for (int c = 0; c < NMAX / 32; c++) begin
        @(negedge clk);
        raddr = AW'(word_of(r, c / 2));
        @(posedge clk); #1;
        rb = 4'(r); cb = 5'(c);
        #1;
        for (int m = 0; m < 64; m++)
          for (int k = 0; k < 32; k++) begin
            checks++;
            if (jblk[m][k] !== J[64*r+m][32*c+k]) begin
              failures++;
              if (failures < 5) $display("FAIL J[%0d][%0d] got %h exp %h", 64*r+m, 32*c+k, jblk[m][k], J[64*r+m][32*c+k]);
            end
          end
      end
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
