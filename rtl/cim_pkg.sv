// cim_pkg -- sizes, the time-evolution instruction format and the host
// address map shared by the cyber-CIM modules.
//
// Sizes that follow the paper: up to N = 4096 spins, P_r = 64 MAC rows and
// time-evolution lanes, P_c = 32 MAC inputs, P_b = 1, FP32 everywhere.
// The instruction word, the data-bus source codes, the register map and the
// depths of the code and pump-rate memories are this design's choices: the
// paper says only that per-cycle multiplexer settings and memory addresses
// are held in a control-code memory and read one per cycle.
package cim_pkg;

  localparam int NPREG      = 8;             // FP32 parameter registers
  localparam int NFF        = 6;             // FF0..FF5 in each TE lane
  localparam int SEQ_DEPTH  = 64;            // TE instructions held
  localparam int PMEM_DEPTH = 1024;          // pump-rate entries (N_step)

  // Sources of the time-evolution data bus (Fig. 3(B)).
  typedef enum logic [4:0] {
    SRC_ZERO  = 5'd0,
    SRC_CMEM  = 5'd1,   // c[i]
    SRC_SMEM  = 5'd2,   // s[i] or e[i]
    SRC_HMEM  = 5'd3,   // local field h[i]
    SRC_RMEM  = 5'd4,   // r[i]
    SRC_ADMEM = 5'd5,   // d[i] = 1/J[i][i]
    SRC_PUMP  = 5'd6,   // p of the current step (PGEN)
    SRC_RND   = 5'd7,   // N(0,1) sample of this lane
    SRC_FCHI  = 5'd8,   // F_chi(h[i])
    SRC_FF0   = 5'd9,
    SRC_FF1   = 5'd10,
    SRC_FF2   = 5'd11,
    SRC_FF3   = 5'd12,
    SRC_FF4   = 5'd13,
    SRC_FF5   = 5'd14,
    SRC_FADD0 = 5'd15,
    SRC_FADD1 = 5'd16,
    SRC_FMUL0 = 5'd17,
    SRC_FMUL1 = 5'd18,
    SRC_FSQRT = 5'd19,
    SRC_P0    = 5'd20,  // parameter registers P0..P7 (dt, K, eta, ...)
    SRC_P1    = 5'd21,
    SRC_P2    = 5'd22,
    SRC_P3    = 5'd23,
    SRC_P4    = 5'd24,
    SRC_P5    = 5'd25,
    SRC_P6    = 5'd26,
    SRC_P7    = 5'd27
  } src_e;

  // One time-evolution instruction: the selector settings of one cycle.
  // Operand fields read the bus as it is at the start of the cycle (unit
  // sources give the result registered in the previous cycle). Write-back
  // fields (FFs, CMEM, SMEM, RMEM) take their source at the end of the
  // cycle, so a unit source there means the result computed in this cycle.
  typedef struct packed {
    logic [25:0]       rsvd;
    logic              rnd_next;   // advance this lane's random sample
    logic              r_we;
    src_e              r_src;
    logic              s_we;
    src_e              s_src;
    logic              c_we;
    src_e              c_src;
    src_e [NFF-1:0]    ff_src;
    logic [NFF-1:0]    ff_we;
    logic              add1_neg;   // FADD1 computes a - b
    logic              add0_neg;   // FADD0 computes a - b
    src_e              sqrt_a;
    src_e              mul1_b;
    src_e              mul1_a;
    src_e              mul0_b;
    src_e              mul0_a;
    src_e              add1_b;
    src_e              add1_a;
    src_e              add0_b;
    src_e              add0_a;
  } instr_t;

  localparam int INSTR_W     = $bits(instr_t);
  localparam int INSTR_WORDS = INSTR_W / 32;

  // Host word-address map: region in bits [27:24], offset in [23:0].
  typedef enum logic [3:0] {
    RG_REG   = 4'd0,
    RG_SEQ   = 4'd1,    // instruction k, word w at offset 4*k + w
    RG_PMEM  = 4'd2,
    RG_HEMEM = 4'd3,
    RG_CMEM  = 4'd4,
    RG_SMEM  = 4'd5,
    RG_RMEM  = 4'd6,
    RG_ADMEM = 4'd7,
    RG_HMEM  = 4'd8,
    RG_JMEM  = 4'd9     // offset = a * NMAX + b, element J[a][b]
  } region_e;

  // Register offsets inside RG_REG.
  localparam int R_CTRL   = 0;   // W: bit0 start, bit1 clear JMEM, bit2 load RNG seed
  localparam int R_MODE   = 1;   // bit0 QUBO (mu*sigma = r*H(c)), bit1 F_chi = |h|
  localparam int R_NSIZE  = 2;   // N, a multiple of 64
  localparam int R_NSTEP  = 3;   // steps per run
  localparam int R_CE     = 4;   // TE instructions per group of 64 spins
  localparam int R_PCBASE = 5;   // first instruction of the TE program
  localparam int R_SEED   = 6;
  localparam int R_STATUS = 7;   // R: bit0 busy, bit1 done, bit2 clearing, bit3 irq
  localparam int R_STEP   = 8;   // R: steps completed
  localparam int R_CYCLES = 9;   // R: cycles of the last run
  localparam int R_IRQ    = 10;  // W1C: interrupt pending
  localparam int R_PREG   = 16;  // 16..23: P0..P7

  // Simple internal bus between the AXI slave and the decoder / targets.
  typedef struct packed {
    logic        req;     // one-cycle request
    logic        we;
    logic [27:0] addr;    // word address
    logic [31:0] wdata;
  } bus_req_t;

  typedef struct packed {
    logic        ack;     // one-cycle completion
    logic [31:0] rdata;
  } bus_rsp_t;


  // Folded ("Rotate & Fit", Fig. 3(D)) storage of the symmetric J matrix.
  // Element J[a][b], a < b, is kept at position (a, b) when a < N/2 and at
  // (N-1-a, N-1-b) otherwise, so the upper triangle fills an N/2 x N
  // rectangle. Position (row, col) is held in bank (row % 64, col % 64) at
  // word (row / 64) * (N / 64) + col / 64: every 64 x 64 tile of the
  // rectangle is one word of all 4096 banks. nb = N / 64.
  function automatic int jmem_word(input int rowblk_a, input int colblk_b, input int nb);
    int lo, hi;
    lo = (rowblk_a < colblk_b) ? rowblk_a : colblk_b;
    hi = (rowblk_a < colblk_b) ? colblk_b : rowblk_a;
    if (lo >= nb / 2) return (nb - 1 - lo) * nb + (nb - 1 - hi);
    return lo * nb + hi;
  endfunction

endpackage
