// tb_ctl_top -- checks CTL_TOP on its own at NMAX = 256 (N = 256 and 128).
// The code memory is loaded with instructions whose spare field holds
// their own address, so the testbench can see which one is issued. For a
// run of NSTEP steps it follows the controller cycle by cycle and checks:
//  * MM phase: blocks issued in row-major order (mux_rb, mux_cb), the JMEM
//    word of each (the folded-tile formula recomputed here) one cycle
//    before, en2 one cycle after en1, HEXT_SEL on the first block of a
//    row, HMEM written with the row number two cycles after the row's
//    last block;
//  * TE phase: instruction PCBASE + k in cycle k of each group, the group
//    row on te_waddr and vraddr (vraddr moving to the next group in the
//    last cycle), c/s/r/rnd strobes only while active, PMEM read at the
//    step number;
//  * totals: cycles = NSTEP (N/64 (N/32 + CE) + 4) + 1, one done pulse, the
//    step counter; and the JMEM clear sweep over all words.
module tb_ctl_top;
  import cim_pkg::*;
  localparam int NMAX = 256, PR = 64, PC = 32;
  localparam int JAW = $clog2((NMAX / PR) * (NMAX / PR) / 2), VAW = $clog2(NMAX / PR);
  localparam int NBW = $clog2(NMAX / PR) + 1;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic rst, start, jclr, seq_we;
  logic [$clog2(NMAX):0] nsize;
  logic [15:0] nstep, step_cnt;
  logic [7:0] ce, pcbase;
  logic [$clog2(SEQ_DEPTH*INSTR_WORDS)-1:0] seq_waddr;
  logic [31:0] seq_wdata, cycles;
  logic busy, done, clearing;
  logic [JAW-1:0] jmem_raddr, jmem_clr_addr;
  logic jmem_clr;
  logic [NBW-1:0] mux_rb;
  logic [NBW:0] mux_cb, nb;
  logic h_en1, h_half, h_en2, hext_sel, hmem_we;
  logic [VAW-1:0] hemem_raddr, hmem_waddr, vraddr, te_waddr;
  logic te_active, c_we, s_we, r_we, rnd_next;
  instr_t instr;
  logic [$clog2(PMEM_DEPTH)-1:0] pmem_raddr;

  ctl_top #(.NMAX(NMAX), .PR(PR), .PC(PC)) dut (.*);

  task automatic chk(input int got, input int exp, input string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 15) $display("FAIL %s got %0d exp %0d at %0t", what, got, exp, $time);
    end
  endtask

  function automatic int word_of(input int r, input int c, input int n);
    int lo, hi, nbk;
    nbk = n / 64;
    lo = (r < c) ? r : c;
    hi = (r < c) ? c : r;
    if (lo >= nbk / 2) begin lo = nbk - 1 - lo; hi = nbk - 1 - hi; end
    return lo * nbk + hi;
  endfunction

  task automatic run(input int n, input int ns, input int cev, input int base);
    int nbk, ncb, mm_idx, te_idx, total, n_done, hw_idx, en2_idx;
    int exp_hw [$];
    logic [JAW-1:0] prev_jaddr;
    nbk = n / 64; ncb = n / 32;
    @(negedge clk);
    nsize = ($clog2(NMAX)+1)'(n); nstep = 16'(ns); ce = 8'(cev); pcbase = 8'(base);
    start = 1;
    @(negedge clk);
    start = 0;
    total = 0; n_done = 0; mm_idx = 0; te_idx = 0; hw_idx = 0; en2_idx = 0;
    prev_jaddr = jmem_raddr;
    while (busy) begin
      int step_mm, step_te;
      total++;
      if (h_en1) begin
        int r, c;
        step_mm = mm_idx % (nbk * ncb);
        r = step_mm / ncb; c = step_mm % ncb;
        chk(int'(mux_rb), r, "mux_rb"); chk(int'(mux_cb), c, "mux_cb");
        chk(int'(h_half), c % 2, "half");
        chk(int'(prev_jaddr), word_of(r, c / 2, n), "jmem word");
        chk(int'(hemem_raddr), r, "hemem row");
        if (c == ncb - 1) exp_hw.push_back(total + 2);
        mm_idx++;
      end
      if (h_en2) begin
        chk(int'(hext_sel), ((en2_idx % ncb) == 0) ? 1 : 0, "hext_sel");
        en2_idx++;
      end else chk(int'(hext_sel), 0, "hext_sel idle");
      if (hmem_we) begin
        chk(exp_hw.size() > 0 ? exp_hw[0] : -1, total, "hmem_we time");
        if (exp_hw.size() > 0) void'(exp_hw.pop_front());
        chk(int'(hmem_waddr), hw_idx % nbk, "hmem row");
        hw_idx++;
      end
      if (te_active) begin
        int k, grp;
        step_te = te_idx % (nbk * cev);
        k = step_te % cev; grp = step_te / cev;
        chk(int'(instr.rsvd), base + k, "instruction");
        chk(int'(te_waddr), grp, "te_waddr");
        chk(int'(vraddr), (k == cev - 1) ? (grp + 1) % (NMAX / PR) : grp, "vraddr");
        chk(int'(c_we), 1, "c_we"); chk(int'(rnd_next), (base + k) % 2, "rnd_next");
        chk(int'(pmem_raddr), te_idx / (nbk * cev), "pmem addr");
        te_idx++;
      end else begin
        chk(int'(c_we || s_we || r_we || rnd_next), 0, "strobe while not active");
      end
      if (done) n_done++;
      prev_jaddr = jmem_raddr;
      @(negedge clk);
    end
    chk(total, ns * (nbk * (ncb + cev) + 4) + 1, "busy cycles");
    chk(int'(cycles), ns * (nbk * (ncb + cev) + 4) + 1, "cycles register");
    chk(int'(step_cnt), ns, "step count");
    chk(mm_idx, ns * nbk * ncb, "blocks issued");
    chk(te_idx, ns * nbk * cev, "TE cycles");
    chk(hw_idx, ns * nbk, "HMEM writes");
    chk(n_done + int'(done), 1, "done pulses");
  endtask

  initial begin
    rst = 1; start = 0; jclr = 0; seq_we = 0; seq_waddr = 0; seq_wdata = 0;
    nsize = 256; nstep = 1; ce = 1; pcbase = 0;
    repeat (2) @(negedge clk);
    rst = 0;
    // code memory: instruction k has rsvd = k, c_we = 1, rnd_next = k odd
    for (int k = 0; k < SEQ_DEPTH; k++) begin
      instr_t ins;
      logic [INSTR_W-1:0] b;
      ins = '0; ins.rsvd = 26'(k); ins.c_we = 1; ins.rnd_next = 1'(k % 2);
      b = ins;
      for (int w = 0; w < INSTR_WORDS; w++) begin
        @(negedge clk);
        seq_we = 1; seq_waddr = $bits(seq_waddr)'(k * INSTR_WORDS + w); seq_wdata = b[32*w +: 32];
      end
    end
    @(negedge clk); seq_we = 0;
    run(256, 2, 3, 5);
    run(128, 3, 4, 10);
    run(256, 1, 32, 20);
    // JMEM clear sweep
    @(negedge clk); jclr = 1; @(negedge clk); jclr = 0;
    for (int a = 0; a < (NMAX / PR) * (NMAX / PR) / 2; a++) begin
      chk(int'(jmem_clr), 1, "clear strobe"); chk(int'(jmem_clr_addr), a, "clear addr");
      chk(int'(clearing && busy), 1, "clearing status");
      @(negedge clk);
    end
    chk(int'(jmem_clr || busy), 0, "clear ends");
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
