// hv_dma: data mover on the global bus. It copies len 128-bit words from
// src (DRAM or global SRAM) to dst (DRAM, global SRAM, input SRAM or weight
// memories), both addresses incrementing by one word. It keeps the paper's
// operand placement programmable across the whole memory hierarchy.
// One word at a time: read request, wait for the read data, write request, so a
// word takes at least three cycles; start is ignored while busy. The engine and
// its one-word-at-a-time operation are this design's choice.
module hv_dma
  import hv_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  space_e            src_space,
  input  space_e            dst_space,
  input  logic [21:0]       src_addr,
  input  logic [21:0]       dst_addr,
  input  logic [21:0]       len,
  output logic              busy,
  output logic              bus_valid,
  input  logic              bus_ready,
  output bus_req_t          bus_req,
  input  logic              bus_rvalid,
  input  logic [BUS_W-1:0]  bus_rdata
);
  typedef enum logic [1:0] {D_IDLE, D_RD, D_WAIT, D_WR} dstate_e;
  dstate_e          st_q;
  space_e           ssp_q, dsp_q;
  logic [21:0]      sa_q, da_q, n_q;
  logic [BUS_W-1:0] buf_q;

  assign busy      = (st_q != D_IDLE);
  assign bus_valid = (st_q == D_RD) || (st_q == D_WR);
  always_comb begin
    bus_req = '0;
    if (st_q == D_WR) begin
      bus_req.we = 1'b1; bus_req.space = dsp_q; bus_req.addr = da_q; bus_req.wdata = buf_q;
    end else begin
      bus_req.we = 1'b0; bus_req.space = ssp_q; bus_req.addr = sa_q;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q <= D_IDLE; ssp_q <= SP_DRAM; dsp_q <= SP_GSRAM; sa_q <= '0; da_q <= '0; n_q <= '0; buf_q <= '0;
    end else begin
      unique case (st_q)
        D_IDLE: if (start && len != 0) begin
          ssp_q <= src_space; dsp_q <= dst_space; sa_q <= src_addr; da_q <= dst_addr; n_q <= len;
          st_q <= D_RD;
        end
        D_RD:   if (bus_ready) st_q <= D_WAIT;
        D_WAIT: if (bus_rvalid) begin buf_q <= bus_rdata; st_q <= D_WR; end
        D_WR:   if (bus_ready) begin
          sa_q <= sa_q + 1'b1; da_q <= da_q + 1'b1; n_q <= n_q - 1'b1;
          st_q <= (n_q == 1) ? D_IDLE : D_RD;
        end
        default: st_q <= D_IDLE;
      endcase
    end
  end

  a_src_readable: assert property (@(posedge clk) disable iff (!rst_n)
    (st_q == D_RD) |-> (ssp_q == SP_DRAM || ssp_q == SP_GSRAM));
endmodule
