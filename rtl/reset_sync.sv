// reset_sync: processor-system reset for one clock domain.
//
// Plays the part of the board design's system reset block: it takes the
// asynchronous active-low board reset, qualified by the clock generator's
// lock signal, and gives the domain an active-low reset that asserts at once
// and releases synchronously, HOLD_CYCLES clock cycles after both inputs are
// good, through a two-flop synchroniser. The paper shows the block without
// describing it; the hold time is this design's choice.
module reset_sync #(
  parameter int unsigned HOLD_CYCLES = 16
) (
  input  logic clk,
  input  logic ext_rst_n,
  input  logic locked,
  output logic rst_n
);

  localparam int unsigned CW = $clog2(HOLD_CYCLES + 1);

  wire        arst_n = ext_rst_n && locked;
  logic [1:0] sync;
  logic [CW-1:0] cnt;

  always_ff @(posedge clk or negedge arst_n) begin
    if (!arst_n) begin
      sync  <= '0;
      cnt   <= '0;
      rst_n <= 1'b0;
    end else begin
      sync <= {sync[0], 1'b1};
      if (sync[1] && cnt != CW'(HOLD_CYCLES)) cnt <= cnt + CW'(1);
      rst_n <= sync[1] && (cnt == CW'(HOLD_CYCLES));
    end
  end

endmodule
