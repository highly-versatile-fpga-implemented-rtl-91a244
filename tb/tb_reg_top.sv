// tb_reg_top -- checks REG_TOP: reset values, write and read-back of every
// setting and of P0..P7, the one-cycle command pulses from CTRL, the
// status word built from busy/done/clearing/step/cycles, the interrupt set
// by done and cleared by the ACK input or by writing 1 to IRQ, and the LED
// bits. Each request must be acknowledged exactly one cycle later.
module tb_reg_top;
  import cim_pkg::*;
  localparam int NMAX = 4096;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic rst, req, we, ack, start, jclr, seed_load, qubo, chi_abs;
  logic [7:0] addr, ce, pcbase;
  logic [31:0] wdata, rdata, seed, cycles;
  logic [$clog2(NMAX):0] nsize;
  logic [15:0] nstep, step_cnt;
  logic [NPREG-1:0][31:0] preg;
  logic busy, done, clearing, irq, irq_ack;
  logic [2:0] led;

  reg_top #(.NMAX(NMAX)) dut (.*);

  task automatic chk(input logic [31:0] got, input logic [31:0] exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s got %h exp %h", what, got, exp);
    end
  endtask

  task automatic wr(input int a, input logic [31:0] d);
    @(negedge clk);
    req = 1; we = 1; addr = 8'(a); wdata = d;
    @(negedge clk);
    req = 0; we = 0;
    chk(32'(ack), 1, "write ack");
  endtask

  task automatic rd(input int a, output logic [31:0] d);
    @(negedge clk);
    req = 1; we = 0; addr = 8'(a);
    @(negedge clk);
    req = 0;
    chk(32'(ack), 1, "read ack");
    d = rdata;
  endtask

  int n_start = 0, n_jclr = 0, n_seed = 0;
  always @(posedge clk) if (!rst) begin
    if (start) n_start++;
    if (jclr) n_jclr++;
    if (seed_load) n_seed++;
  end

  logic [31:0] v, p [NPREG];

  initial begin
    rst = 1; req = 0; we = 0; addr = 0; wdata = 0;
    busy = 0; done = 0; clearing = 0; step_cnt = 0; cycles = 0; irq_ack = 0;
    repeat (2) @(negedge clk);
    rst = 0;
    // reset values
    rd(R_NSIZE, v); chk(v, NMAX, "nsize reset");
    rd(R_NSTEP, v); chk(v, 1, "nstep reset");
    rd(R_CE, v);    chk(v, 1, "ce reset");
    rd(R_STATUS, v); chk(v, 0, "status reset");
    // settings
    for (int t = 0; t < 20; t++) begin
      logic [31:0] a, b, c2, d2, e, m;
      a = 32'(128 * (1 + $urandom % 32)); b = $urandom % 65536; c2 = $urandom % 256;
      d2 = $urandom % 256; e = $urandom; m = $urandom % 4;
      wr(R_NSIZE, a); wr(R_NSTEP, b); wr(R_CE, c2); wr(R_PCBASE, d2); wr(R_SEED, e); wr(R_MODE, m);
      for (int k = 0; k < NPREG; k++) begin p[k] = $urandom; wr(R_PREG + k, p[k]); end
      chk(32'(nsize), a, "nsize out"); chk(32'(nstep), b, "nstep out"); chk(32'(ce), c2, "ce out");
      chk(32'(pcbase), d2, "pcbase out"); chk(seed, e, "seed out"); chk(32'({chi_abs, qubo}), m, "mode out");
      rd(R_NSIZE, v); chk(v, a, "nsize rd");
      rd(R_NSTEP, v); chk(v, b, "nstep rd");
      rd(R_CE, v); chk(v, c2, "ce rd");
      rd(R_PCBASE, v); chk(v, d2, "pcbase rd");
      rd(R_SEED, v); chk(v, e, "seed rd");
      rd(R_MODE, v); chk(v, m, "mode rd");
      for (int k = 0; k < NPREG; k++) begin
        rd(R_PREG + k, v); chk(v, p[k], "preg rd"); chk(preg[k], p[k], "preg out");
      end
    end
    // command pulses
    wr(R_CTRL, 1); wr(R_CTRL, 2); wr(R_CTRL, 4); wr(R_CTRL, 7);
    @(negedge clk);
    chk(n_start, 2, "start pulses"); chk(n_jclr, 2, "jclr pulses"); chk(n_seed, 2, "seed pulses");
    // status inputs
    busy = 1; clearing = 1; step_cnt = 16'd77; cycles = 32'd123456;
    rd(R_STATUS, v); chk(v, 32'b0101, "status busy/clearing");
    rd(R_STEP, v); chk(v, 77, "step");
    rd(R_CYCLES, v); chk(v, 123456, "cycles");
    chk(32'(led), 32'b001, "led busy");
    busy = 0; clearing = 0;
    // interrupt by done, cleared by ACK
    @(negedge clk); done = 1; @(negedge clk); done = 0;
    chk(32'(irq), 1, "irq set");
    rd(R_STATUS, v); chk(v, 32'b1010, "status irq/done");
    chk(32'(led), 32'b110, "led irq/done");
    irq_ack = 1; @(negedge clk); irq_ack = 0;
    chk(32'(irq), 0, "irq cleared by ack");
    // again, cleared by writing IRQ
    @(negedge clk); done = 1; @(negedge clk); done = 0;
    rd(R_IRQ, v); chk(v, 1, "irq register");
    wr(R_IRQ, 0); chk(32'(irq), 1, "irq kept by writing 0");
    wr(R_IRQ, 1); @(negedge clk); chk(32'(irq), 0, "irq cleared by W1C");
    // start clears the done flag
    wr(R_CTRL, 1); @(negedge clk);
    rd(R_STATUS, v); chk(v, 0, "done cleared by start");
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
