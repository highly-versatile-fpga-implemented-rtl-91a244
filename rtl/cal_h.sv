// cal_h -- CAL_H, the local-field calculator (Fig. 3(C), Sec. 4.2):
// 64 parallel 32-input MACs and the Heaviside unit.
//
// Each cycle the Heaviside unit takes the 64-lane rows of CMEM and RMEM
// that hold columns j0 .. j0+31 (half selects which 32 lanes) and forms
// the vector mu*sigma: c_j in Ising mode, r_j * H(c_j) in QUBO mode (which
// is also the q_j r_j product Jacobi SOR needs, since q = H(c) is left in
// CMEM by the preceding CIM run). The same 32 values go to all 64 MACs;
// MAC m multiplies them with row 64*rb+m of the 64 x 32 block of J from
// J_MUX. Over N/32 cycles a MAC builds h_i = g_i + sum_j J_ij mu_j sigma_j;
// the first cycle of a row takes g_i from HEMEM (HEXT_SEL), later ones
// their own feedback. A 64 x 32 block is taken per cycle: 2048 MAC
// processing elements, as in the paper. H(c) is 1 for c > 0 and 0
// otherwise (the value at c = 0 is this design's choice).
//
// Timing: inputs with en1 in cycle t, HEMEM data and en2 in t+1, the 64
// local fields on h in t+2.
module cal_h #(
  parameter int PR = 64,
  parameter int PC = 32
) (
  input  logic                      clk,
  input  logic                      en1,
  input  logic [PR-1:0][PC-1:0][31:0] jblk,
  input  logic [PR-1:0][31:0]       cmem_row,
  input  logic [PR-1:0][31:0]       rmem_row,
  input  logic                      half,      // which PC lanes of the rows
  input  logic                      qubo,      // 1: r*H(c), 0: c
  input  logic                      en2,
  input  logic                      hext_sel,
  input  logic [PR-1:0][31:0]       g_row,
  output logic [PR-1:0][31:0]       h
);
  localparam int SUB = PR / PC;
  logic [PC-1:0][31:0] v;

  // Heaviside unit
  always_comb begin
    for (int k = 0; k < PC; k++) begin
      logic [31:0] c, r;
      c = cmem_row[(SUB > 1 ? int'(half) : 0) * PC + k];
      r = rmem_row[(SUB > 1 ? int'(half) : 0) * PC + k];
      if (qubo) v[k] = (!c[31] && c[30:23] != 8'd0) ? r : 32'd0;
      else v[k] = c;
    end
  end

  for (genvar m = 0; m < PR; m++) begin : g_mac
    cal_h_mac #(.PC(PC)) u_mac (
      .clk     (clk),
      .en1     (en1),
      .jrow    (jblk[m]),
      .v       (v),
      .en2     (en2),
      .hext_sel(hext_sel),
      .g       (g_row[m]),
      .acc     (h[m])
    );
  end
endmodule
