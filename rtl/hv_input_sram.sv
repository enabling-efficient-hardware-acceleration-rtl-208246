// hv_input_sram: the 8 kB local input memory.
// A word holds 16 activations, one per PE row (input channel); a read multicasts
// each byte along its row of the array. 512 words x 128 bits. One write port from
// the global bus, one synchronous read port (rdata valid one cycle after re, held
// otherwise). Size from the paper; word shape and ports are this design's choice.
module hv_input_sram #(
  parameter int unsigned DEPTH = 512,
  parameter int unsigned WIDTH = 128
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic [WIDTH-1:0]         wdata,
  input  logic                     re,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output logic [WIDTH-1:0]         rdata
);
  logic [WIDTH-1:0] mem [DEPTH];
  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule
