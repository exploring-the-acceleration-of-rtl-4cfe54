// axi_skid: one registered channel of an AXI register slice.
//
// A two-entry skid buffer for a valid/ready channel carrying a payload of
// type T. Both the forward path (valid, payload) and the backward path
// (ready) are registered, which is what breaks long timing paths between the
// kernels and the interconnects, and a beat can still pass every cycle.
//
// Timing: a beat accepted on the input appears on the output the next cycle
// at the earliest.
module axi_skid #(
  parameter type T = logic [63:0]
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  output logic in_ready,
  input  T     in_data,
  output logic out_valid,
  input  logic out_ready,
  output T     out_data
);

  T     main_q, skid_q;
  logic main_v, skid_v;

  assign in_ready  = !skid_v;
  assign out_valid = main_v;
  assign out_data  = main_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      main_v <= 1'b0;
      skid_v <= 1'b0;
      main_q <= '0;
      skid_q <= '0;
    end else begin
      if (!main_v || out_ready) begin
        // Output register free: fill it from the skid entry or the input.
        if (skid_v) begin
          main_q <= skid_q;
          main_v <= 1'b1;
          skid_v <= 1'b0;
          if (in_valid && in_ready) begin
            skid_q <= in_data;
            skid_v <= 1'b1;
          end
        end else begin
          main_q <= in_data;
          main_v <= in_valid;
        end
      end else if (in_valid && in_ready) begin
        skid_q <= in_data;
        skid_v <= 1'b1;
      end
    end
  end

endmodule
