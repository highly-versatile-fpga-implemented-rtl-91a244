// jmem -- JMEM, the coupling-matrix store (Table 2, Fig. 3(D)).
//
// J is symmetric, so only its upper triangle is kept, folded into an
// N/2 x N rectangle as Fig. 3(D) shows ("Rotate & Fit"): J[a][b] (a < b)
// sits at (a, b) for a < N/2 and at (N-1-a, N-1-b) otherwise. The rectangle
// is cut into 64 x 64 tiles; the 4096 elements of a tile are one word of
// 4096 banks (bank = (row % 64) * 64 + col % 64). Any 64 x 32 block of the
// full matrix lies inside one tile or its mirror, so one read of all banks
// at one word address gives every element the MAC array needs in a cycle;
// J_MUX then routes banks to MAC inputs.
//
// Interface: raddr is registered and all banks' words appear on rdata one
// cycle later. The host port writes one element J[a][b] per cycle (a and b
// in any order; a == b is ignored because the diagonal never enters the
// local field, and 1/J[i][i] is held in ADMEM). clr writes zero to word
// clr_addr of every bank, so a sweep of DEPTH cycles empties the matrix.
// The folding follows the paper; the banking and the clear port are this
// design's choices.
module jmem #(
  parameter int NMAX  = 4096,
  parameter int BK    = 64,
  parameter int NB    = NMAX / BK,
  parameter int DEPTH = NB * NB / 2,
  parameter int AW    = $clog2(DEPTH)
) (
  input  logic                      clk,
  input  logic [$clog2(NMAX):0]     n,        // runtime system size
  input  logic [AW-1:0]             raddr,
  output logic [BK*BK-1:0][31:0]    rdata,
  input  logic                      we,
  input  logic [$clog2(NMAX)-1:0]   wa,
  input  logic [$clog2(NMAX)-1:0]   wb,
  input  logic [31:0]               wdata,
  input  logic                      clr,
  input  logic [AW-1:0]             clr_addr
);
  localparam int BANKS = BK * BK;

  logic [31:0] mem [BANKS][DEPTH];

  int lo, hi, row, col, nn;
  logic [$clog2(BANKS)-1:0] wbank;
  logic [AW-1:0]            waddr;

  always_comb begin
    nn  = int'(n);
    lo  = (wa < wb) ? int'(wa) : int'(wb);
    hi  = (wa < wb) ? int'(wb) : int'(wa);
    if (lo < nn / 2) begin
      row = lo;
      col = hi;
    end else begin
      row = nn - 1 - lo;
      col = nn - 1 - hi;
    end
    wbank = $clog2(BANKS)'((row % BK) * BK + (col % BK));
    waddr = AW'((row / BK) * (nn / BK) + col / BK);
  end

  always_ff @(posedge clk) begin
    for (int b = 0; b < BANKS; b++) begin
      rdata[b] <= mem[b][raddr];
      if (clr) mem[b][clr_addr] <= 32'd0;
    end
    if (!clr && we && wa != wb) mem[wbank][waddr] <= wdata;
  end
endmodule
