// hv_pe: one processing element of the 16x16 array.
// An 8x8-bit signed multiplier takes the activation multicast along the PE's row
// and a weight from the PE's own 1 kB weight memory. The product leaves the PE in
// two ways, one per spatial dataflow:
//   C|K  (mode 0): prod goes down to the column adder tree of the array;
//   C|FX (mode 1): prod is added to prev, the partial sum of the PE to the left,
//                  and registered into psum when acc_en is high (psum moves one PE
//                  to the right per cycle, as in a transposed FIR filter).
// Timing: weight read address in cycle t (w_re), activation x in cycle t+1, prod
// combinational in t+1, psum updated at the end of t+1. The multiplier, adder,
// register and the two configurations are the paper's; signed arithmetic and the
// synchronous weight read are this design's choice.
module hv_pe
  import hv_pkg::*;
#(
  parameter int unsigned WDEPTH = hv_pkg::WDEPTH
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  mode_e                     mode,
  input  data_t                     x,
  input  logic                      w_we,
  input  logic [$clog2(WDEPTH)-1:0] w_waddr,
  input  data_t                     w_wdata,
  input  logic                      w_re,
  input  logic [$clog2(WDEPTH)-1:0] w_raddr,
  input  logic                      acc_en,
  input  acc_t                      prev,
  output acc_t                      prod,
  output acc_t                      psum
);
  logic [DW-1:0] w_raw;
  data_t         w;

  hv_weight_sram #(.DEPTH(WDEPTH), .WIDTH(DW)) u_wmem (
    .clk, .we(w_we), .waddr(w_waddr), .wdata(w_wdata),
    .re(w_re), .raddr(w_raddr), .rdata(w_raw));

  assign w    = data_t'(w_raw);
  assign prod = acc_t'(x * w);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                         psum <= '0;
    else if (acc_en && mode == MODE_CFX) psum <= prev + prod;
  end
endmodule
