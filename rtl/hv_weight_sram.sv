// hv_weight_sram: the 1 kB local weight memory inside every PE.
// Each PE owns its weights, so weights are delivered unicast: one byte per PE per
// cycle. One write port (filled from the global bus) and one synchronous read port;
// rdata shows the word addressed in the cycle re was high, one cycle later, and holds
// otherwise. The 1 kB size is the paper's; ports and latency are this design's choice.
module hv_weight_sram #(
  parameter int unsigned DEPTH = 1024,
  parameter int unsigned WIDTH = 8
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
