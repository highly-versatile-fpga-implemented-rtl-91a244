// vec_mem -- one of the 64-lane vector memories of MEM: HMEM (local field h),
// HEMEM (Zeeman terms g), CMEM (c), SMEM (s or e), RMEM (r), ADMEM (d).
//
// Element i of the vector lives in lane i % LANES of row i / LANES, so one
// row is what the 64 time-evolution lanes (or the 64 MAC rows) use in one
// cycle, and half a row is the 32-element slice a column block of the
// local-field MAC needs. One synchronous read port returns a whole row one
// cycle after the address (read-before-write: a write in the same cycle is
// seen one cycle later). One write port writes any subset of the lanes of a
// row, chosen by wmask. The paper names these memories and what they hold;
// the row organisation and the ports are this design's choice.
module vec_mem #(
  parameter int LANES = 64,
  parameter int DEPTH = 64,
  parameter int AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic                       clk,
  input  logic [AW-1:0]              raddr,
  output logic [LANES-1:0][31:0]     rdata,
  input  logic                       we,
  input  logic [AW-1:0]              waddr,
  input  logic [LANES-1:0]           wmask,
  input  logic [LANES-1:0][31:0]     wdata
);
  logic [31:0] mem [DEPTH][LANES];

  always_ff @(posedge clk) begin
    for (int l = 0; l < LANES; l++) begin
      rdata[l] <= mem[raddr][l];
      if (we && wmask[l]) mem[waddr][l] <= wdata[l];
    end
  end
endmodule
