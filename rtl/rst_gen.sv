// rst_gen -- internal reset ("Reset for Internal" of Fig. 3(A)).
//
// The internal reset is held while the external reset input I_RESET is
// asserted or the clock generator has not reported Locked, and is released
// synchronously, HOLD cycles after both conditions clear. Assertion is
// asynchronous so the logic is reset even before the clock runs. The paper
// shows only that Reset takes I_RESET and Locked; the hold count, the
// active-high polarity and the synchroniser are this design's choices.
module rst_gen #(
  parameter int HOLD = 16
) (
  input  logic clk,
  input  logic i_reset,     // external reset, active high
  input  logic locked,      // from the clock generator
  output logic rst          // internal reset, active high
);
  localparam int CW = $clog2(HOLD + 1);
  logic          arst;
  logic [1:0]    sync;
  logic [CW-1:0] cnt;

  assign arst = i_reset | ~locked;

  always_ff @(posedge clk or posedge arst) begin
    if (arst) begin
      sync <= '0;
      cnt  <= '0;
      rst  <= 1'b1;
    end else begin
      sync <= {sync[0], 1'b1};
      if (sync[1] && cnt != CW'(HOLD)) cnt <= cnt + 1'b1;
      rst <= !(sync[1] && cnt == CW'(HOLD));
    end
  end
endmodule
