// async_fifo: dual-clock FIFO for one channel of an AXI clock converter.
//
// DEPTH entries (a power of two) of type T. Write and read pointers are kept
// in Gray code and each is passed to the other clock through a two-flop
// synchroniser, so full and empty are judged safely across the domains.
// Full and empty are pessimistic by the synchroniser delay, never wrong.
//
// Timing: a word written is visible at the read side three to four read
// clock cycles later.
module async_fifo #(
  parameter type T = logic [63:0],
  parameter int unsigned DEPTH = 8,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic wclk,
  input  logic wrst_n,
  input  logic w_valid,
  output logic w_ready,
  input  T     w_data,
  input  logic rclk,
  input  logic rrst_n,
  output logic r_valid,
  input  logic r_ready,
  output T     r_data
);

  T mem [DEPTH];

  logic [AW:0] wptr_bin, wptr_gray, rptr_bin, rptr_gray;
  logic [AW:0] wq1_rgray, wq2_rgray, rq1_wgray, rq2_wgray;

  function automatic logic [AW:0] bin2gray(logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  // Write side.
  wire w_fire = w_valid && w_ready;
  wire [AW:0] wptr_bin_nx = wptr_bin + (AW+1)'(w_fire);
  assign w_ready = (wptr_gray != {~wq2_rgray[AW:AW-1], wq2_rgray[AW-2:0]});

  always_ff @(posedge wclk) begin
    if (w_fire) mem[wptr_bin[AW-1:0]] <= w_data;
  end

  always_ff @(posedge wclk or negedge wrst_n) begin
    if (!wrst_n) begin
      wptr_bin  <= '0;
      wptr_gray <= '0;
      wq1_rgray <= '0;
      wq2_rgray <= '0;
    end else begin
      wptr_bin  <= wptr_bin_nx;
      wptr_gray <= bin2gray(wptr_bin_nx);
      wq1_rgray <= rptr_gray;
      wq2_rgray <= wq1_rgray;
    end
  end

  // Read side.
  wire r_fire = r_valid && r_ready;
  wire [AW:0] rptr_bin_nx = rptr_bin + (AW+1)'(r_fire);
  assign r_valid = (rptr_gray != rq2_wgray);
  assign r_data  = mem[rptr_bin[AW-1:0]];

  always_ff @(posedge rclk or negedge rrst_n) begin
    if (!rrst_n) begin
      rptr_bin  <= '0;
      rptr_gray <= '0;
      rq1_wgray <= '0;
      rq2_wgray <= '0;
    end else begin
      rptr_bin  <= rptr_bin_nx;
      rptr_gray <= bin2gray(rptr_bin_nx);
      rq1_wgray <= wptr_gray;
      rq2_wgray <= rq1_wgray;
    end
  end

endmodule
