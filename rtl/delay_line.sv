// delay_line: fixed delay of DEPTH clock cycles for a WIDTH-bit word.
//
// Used by the advection datapath to keep operands, coefficients and flags in
// step with the floating point units they bypass. DEPTH = 0 is a plain wire.
// There is no enable or reset: the datapath it serves never stalls, and a
// word's valid flag travels in a delay line of its own.
module delay_line #(
  parameter int unsigned WIDTH = 64,
  parameter int unsigned DEPTH = 1
) (
  input  logic             clk,
  input  logic [WIDTH-1:0] d,
  output logic [WIDTH-1:0] q
);

  if (DEPTH == 0) begin : g_wire
    assign q = d;
  end else begin : g_regs
    logic [WIDTH-1:0] stage [DEPTH];
    always_ff @(posedge clk) begin
      stage[0] <= d;
      for (int unsigned s = 1; s < DEPTH; s++) stage[s] <= stage[s-1];
    end
    assign q = stage[DEPTH-1];
  end

endmodule
