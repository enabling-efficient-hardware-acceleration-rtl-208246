// hv_output_rf: the 24 kB output register file (384 entries of 16 x 32 bit).
// The PE array's 16 results per cycle are accumulated here across cycles (over C
// tiles, FX and FY): with acc_en high, entry acc_addr becomes acc_data (acc_first)
// or entry + acc_data, lane by lane, at the clock edge. A second, combinational read
// port (raddr/rdata) drains finished entries to the writeback buffer. Size and the
// 32-bit lanes are the paper's; the in-RF accumulation and the port set are this
// design's choice.
module hv_output_rf
  import hv_pkg::*;
#(
  parameter int unsigned DEPTH = hv_pkg::RDEPTH,
  parameter int unsigned LANES = hv_pkg::COLS
) (
  input  logic                     clk,
  input  logic                     acc_en,
  input  logic                     acc_first,
  input  logic [$clog2(DEPTH)-1:0] acc_addr,
  input  acc_t [LANES-1:0]         acc_data,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output acc_t [LANES-1:0]         rdata
);
  acc_t [LANES-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (acc_en) begin
      for (int l = 0; l < LANES; l++)
        mem[acc_addr][l] <= acc_first ? acc_data[l] : mem[acc_addr][l] + acc_data[l];
    end
  end
  assign rdata = mem[raddr];
endmodule
