// hv_line_buffer: holds every channel of one output pixel for the post-processing
// engine. Because outputs leave the array pixel by pixel, with all channels of a
// pixel together, only this innermost loop has to be stored before a LayerNorm or
// SoftMax can be computed. BEATS entries of 16 x 32 bit (256 channels by default);
// one synchronous write port and one combinational read port. The purpose is the
// paper's; the capacity and ports are this design's choice.
module hv_line_buffer
  import hv_pkg::*;
#(
  parameter int unsigned BEATS = hv_pkg::LB_BEATS,
  parameter int unsigned LANES = hv_pkg::COLS
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(BEATS)-1:0] waddr,
  input  acc_t [LANES-1:0]         wdata,
  input  logic [$clog2(BEATS)-1:0] raddr,
  output acc_t [LANES-1:0]         rdata
);
  acc_t [LANES-1:0] mem [BEATS];
  always_ff @(posedge clk) if (we) mem[waddr] <= wdata;
  assign rdata = mem[raddr];
endmodule
