// hv_global_sram: the 512 kB global on-chip memory shared by all lower memory
// levels. 32768 words of 128 bits (one bus word), single port: when en is high
// the word at addr is written (we) or read; read data appears one cycle later and
// holds until the next read. Size from the paper; port structure is this design's.
module hv_global_sram #(
  parameter int unsigned DEPTH = 32768,
  parameter int unsigned WIDTH = 128
) (
  input  logic                     clk,
  input  logic                     en,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] addr,
  input  logic [WIDTH-1:0]         wdata,
  output logic [WIDTH-1:0]         rdata
);
  logic [WIDTH-1:0] mem [DEPTH];
  always_ff @(posedge clk) begin
    if (en) begin
      if (we) mem[addr] <= wdata;
      else    rdata     <= mem[addr];
    end
  end
endmodule
