// hv_writeback_buffer: takes finished 16 x 32-bit output-RF entries, pixel by
// pixel, runs them through the line buffer and the non-linear post-processing
// engine, and queues the resulting 16 x 8-bit words (one 128-bit bus word each,
// byte l = lane l) for writing to global SRAM or DRAM. The queue decouples the
// array from the global bus: a queued word is written only when the bus grants it
// (the DMA has priority), and when the queue is full the engine, and through it
// the drain of the output RF, stalls.
// Interface: start loads the destination space and first word address (words are
// written to consecutive addresses); busy stays high while any pixel or queued
// word is still inside. Timing: one word per cycle when nothing stalls, plus the
// engine's LayerNorm / SoftMax time. Purpose and the two sub-blocks are the
// paper's; the queue depth and addressing are this design's choice. The write
// enable of the bus request is constant 1: this port only writes.
module hv_writeback_buffer
  import hv_pkg::*;
#(
  parameter int unsigned BEATS      = hv_pkg::LB_BEATS,
  parameter int unsigned LANES      = hv_pkg::COLS,
  parameter int unsigned FIFO_DEPTH = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  pp_cfg_t           cfg,
  input  logic              start,
  input  space_e            dst_space,
  input  logic [21:0]       dst_addr,
  input  logic              in_valid,
  output logic              in_ready,
  input  acc_t [LANES-1:0]  in_data,
  input  logic              in_last,
  output logic              bus_valid,
  input  logic              bus_ready,
  output bus_req_t          bus_req,
  output logic              busy
);
  localparam int unsigned BW = $clog2(BEATS);
  localparam int unsigned FW = $clog2(FIFO_DEPTH);

  logic              lb_we;
  logic [BW-1:0]     lb_waddr, lb_raddr;
  acc_t [LANES-1:0]  lb_wdata, lb_rdata;
  logic              pp_valid, pp_ready, pp_last, pp_busy;
  data_t [LANES-1:0] pp_data;

  hv_line_buffer #(.BEATS(BEATS), .LANES(LANES)) u_lb (
    .clk, .we(lb_we), .waddr(lb_waddr), .wdata(lb_wdata), .raddr(lb_raddr), .rdata(lb_rdata));

  hv_postproc #(.BEATS(BEATS), .LANES(LANES)) u_pp (
    .clk, .rst_n, .cfg, .in_valid, .in_ready, .in_data, .in_last,
    .out_valid(pp_valid), .out_ready(pp_ready), .out_data(pp_data), .out_last(pp_last),
    .busy(pp_busy), .lb_we, .lb_waddr, .lb_wdata, .lb_raddr, .lb_rdata);

  // output queue
  bus_req_t        q_mem [FIFO_DEPTH];
  logic [FW:0]     cnt_q;
  logic [FW-1:0]   wp_q, rp_q;
  logic [21:0]     addr_q;
  space_e          space_q;
  logic            push, pop;

  assign pp_ready  = (cnt_q < (FW+1)'(FIFO_DEPTH));
  assign push      = pp_valid && pp_ready;
  assign bus_valid = (cnt_q != 0);
  assign bus_req   = q_mem[rp_q];
  assign pop       = bus_valid && bus_ready;
  assign busy      = pp_busy || (cnt_q != 0);

  always_ff @(posedge clk) begin
    if (push) begin
      q_mem[wp_q].we    <= 1'b1;
      q_mem[wp_q].space <= space_q;
      q_mem[wp_q].addr  <= addr_q;
      q_mem[wp_q].wdata <= BUS_W'(pp_data);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt_q <= '0; wp_q <= '0; rp_q <= '0; addr_q <= '0; space_q <= SP_GSRAM;
    end else begin
      if (start) begin addr_q <= dst_addr; space_q <= dst_space; end
      else if (push) addr_q <= addr_q + 1'b1;
      if (push) wp_q <= (wp_q == FW'(FIFO_DEPTH-1)) ? '0 : wp_q + 1'b1;
      if (pop)  rp_q <= (rp_q == FW'(FIFO_DEPTH-1)) ? '0 : rp_q + 1'b1;
      cnt_q <= cnt_q + (FW+1)'(push) - (FW+1)'(pop);
    end
  end

  // the bus request must stay stable until it is accepted
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
    bus_valid && !bus_ready |=> bus_valid && $stable(bus_req));

  logic unused;
  assign unused = pp_last;
endmodule
