// j_mux -- J_MUX: rebuilds a 64 x 32 block of the full symmetric matrix J
// from one word of the 4096 JMEM banks (Table 2; Sec. 4.2 and 6.3).
//
// The block covers rows 64*rb .. 64*rb+63 and columns 32*cb .. 32*cb+31.
// Its column tile is jb = cb / 2. Above the diagonal (jb > rb, or jb == rb
// and row < column) MAC (m, k) takes the element stored at tile position
// (m, jl), jl = column % 64; below it the transposed position (jl, m).
// When the stored tile is a folded one (the smaller tile index is >= N/128)
// both coordinates are mirrored (63 - x). Diagonal elements are forced to
// zero: the local field sums over j != i only. The circuit is purely
// combinational: a 2-level select per MAC input among the banks. The paper
// gives J_MUX's function; this routing is the one that matches the
// storage of jmem.
module j_mux #(
  parameter int PR = 64,
  parameter int PC = 32,
  parameter int NBW = 7          // width of the tile indices
) (
  input  logic [PR*PR-1:0][31:0]      banks,
  input  logic [NBW-1:0]              rb,     // row tile (64 rows)
  input  logic [NBW:0]                cb,     // column block (32 columns)
  input  logic [NBW:0]                nb,     // N / 64
  output logic [PR-1:0][PC-1:0][31:0] jblk
);
  localparam int SUB = PR / PC;
  int   jb;
  logic fold;

  always_comb begin
    jb   = int'(cb) / SUB;
    fold = ((int'(rb) < jb) ? int'(rb) : jb) >= int'(nb) / 2;
    for (int m = 0; m < PR; m++) begin
      for (int k = 0; k < PC; k++) begin
        int   jl, r, c;
        logic upper;
        jl    = (int'(cb) % SUB) * PC + k;
        upper = (jb > int'(rb)) || (jb == int'(rb) && m < jl);
        r     = upper ? m : jl;
        c     = upper ? jl : m;
        if (fold) begin
          r = PR - 1 - r;
          c = PR - 1 - c;
        end
        if (jb == int'(rb) && m == jl) jblk[m][k] = 32'd0;
        else jblk[m][k] = banks[r * PR + c];
      end
    end
  end
endmodule
