// pw_column_ram: one local column buffer of the advection kernel.
//
// Holds DEPTH double precision words (a batch of columns of one field in one
// X plane, or one batch of results) with one write port and one synchronous
// read port, the shape of an FPGA block RAM. The kernel keeps several copies
// of the same data in separate instances so that more operands can be read
// in one cycle, which is how the paper's design works around the two ports a
// block RAM offers.
//
// Timing: a write lands at the clock edge; read data appears one cycle after
// the read address.
module pw_column_ram #(
  parameter int unsigned DEPTH  = 66 * 64,
  localparam int unsigned AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [63:0]   wdata,
  input  logic [AW-1:0] raddr,
  output logic [63:0]   rdata
);

  logic [63:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end

endmodule
