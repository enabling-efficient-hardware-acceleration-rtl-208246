// hv_accel: top level of the hybrid vision-transformer accelerator.
// A 16x16 array of 8-bit PEs, each with a 1 kB weight memory, is fed by an 8 kB
// input SRAM that multicasts one activation per PE row. The array switches between
// two spatial dataflows: C|K (column adder trees; pointwise and regular
// convolutions, matrix multiplications) and C|FX (partial sums move along the rows;
// depthwise convolutions). Its 16 x 32-bit results are accumulated in a 24 kB
// output register file and leave, one output pixel with all its channels at a
// time, through the writeback buffer, whose line buffer and post-processing engine
// apply requantisation, ReLU/GELU, LayerNorm or SoftMax before writing int8 words
// to the 512 kB global SRAM (or DRAM, or straight into the input SRAM). A DMA
// engine moves data between DRAM, global SRAM, input SRAM and weight memories over
// the 128-bit global bus. Everything is run by the FSM controller from a 32-bit
// instruction stream (see hv_controller for the encoding).
// Ports: instruction stream (valid/ready), the off-chip DRAM interface (request
// valid/ready with write data, in-order read responses), busy.
// The block structure and all sizes follow the paper; the instruction set, the bus
// protocol and the post-processing arithmetic are this design's choices.
module hv_accel
  import hv_pkg::*;
#(
  parameter int unsigned NR     = hv_pkg::ROWS,
  parameter int unsigned NC     = hv_pkg::COLS,
  parameter int unsigned WDEPTH = hv_pkg::WDEPTH,
  parameter int unsigned IDEPTH = hv_pkg::IDEPTH,
  parameter int unsigned RDEPTH = hv_pkg::RDEPTH,
  parameter int unsigned GDEPTH = hv_pkg::GDEPTH,
  parameter bit          DW_SUPPORT = 1'b1
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               instr_valid,
  output logic               instr_ready,
  input  logic [31:0]        instr,
  output logic               dram_req_valid,
  input  logic               dram_req_ready,
  output logic               dram_req_we,
  output logic [21:0]        dram_req_addr,
  output logic [BUS_W-1:0]   dram_req_wdata,
  input  logic               dram_rsp_valid,
  input  logic [BUS_W-1:0]   dram_rsp_rdata,
  output logic               busy
);
  // controller <-> DMA
  logic        dma_start, dma_busy;
  space_e      dma_src_space, dma_dst_space;
  logic [21:0] dma_src, dma_dst, dma_len;
  // datapath control
  mode_e                     mode;
  logic                      rd_en, pe_acc_en, rf_acc_en, rf_first;
  logic [$clog2(IDEPTH)-1:0] is_raddr;
  logic [$clog2(WDEPTH)-1:0] w_raddr;
  logic [$clog2(RDEPTH)-1:0] rf_acc_addr, rf_raddr;
  // writeback
  logic        wb_start, wb_in_valid, wb_in_ready, wb_in_last, wb_busy;
  space_e      wb_space;
  logic [21:0] wb_addr;
  pp_cfg_t     pp_cfg;
  // bus masters
  logic        dmab_valid, dmab_ready, dmab_rvalid, wbb_valid, wbb_ready;
  bus_req_t    dmab_req, wbb_req;
  logic [BUS_W-1:0] dmab_rdata;
  // bus targets
  logic                      gs_en, gs_we, is_we, ws_we, contention;
  logic [$clog2(GDEPTH)-1:0] gs_addr;
  logic [$clog2(IDEPTH)-1:0] is_waddr;
  logic [$clog2(WDEPTH)-1:0] ws_waddr;
  logic [3:0]                ws_row;
  logic [BUS_W-1:0]          gs_wdata, gs_rdata, is_wdata, ws_wdata, is_rdata;
  // array / RF data
  data_t [NR-1:0] x;
  data_t [NC-1:0] w_wdata;
  acc_t  [NC-1:0] arr_out, rf_rdata;

  hv_controller #(.IDEPTH(IDEPTH), .WDEPTH(WDEPTH), .RDEPTH(RDEPTH)) u_ctrl (
    .clk, .rst_n, .instr_valid, .instr_ready, .instr, .busy,
    .dma_start, .dma_src_space, .dma_dst_space, .dma_src, .dma_dst, .dma_len, .dma_busy,
    .mode, .rd_en, .is_raddr, .w_raddr, .pe_acc_en,
    .rf_acc_en, .rf_first, .rf_acc_addr, .rf_raddr,
    .wb_start, .wb_space, .wb_addr, .pp_cfg, .wb_in_valid, .wb_in_ready, .wb_in_last, .wb_busy);

  hv_dma u_dma (
    .clk, .rst_n, .start(dma_start), .src_space(dma_src_space), .dst_space(dma_dst_space),
    .src_addr(dma_src), .dst_addr(dma_dst), .len(dma_len), .busy(dma_busy),
    .bus_valid(dmab_valid), .bus_ready(dmab_ready), .bus_req(dmab_req),
    .bus_rvalid(dmab_rvalid), .bus_rdata(dmab_rdata));

  hv_global_bus #(.GDEPTH(GDEPTH), .IDEPTH(IDEPTH), .WDEPTH(WDEPTH)) u_bus (
    .clk, .rst_n,
    .dma_valid(dmab_valid), .dma_ready(dmab_ready), .dma_req(dmab_req),
    .dma_rvalid(dmab_rvalid), .dma_rdata(dmab_rdata),
    .wb_valid(wbb_valid), .wb_ready(wbb_ready), .wb_req(wbb_req),
    .gs_en, .gs_we, .gs_addr, .gs_wdata, .gs_rdata,
    .dram_req_valid, .dram_req_ready, .dram_req_we, .dram_req_addr, .dram_req_wdata,
    .dram_rsp_valid, .dram_rsp_rdata,
    .is_we, .is_waddr, .is_wdata, .ws_we, .ws_row, .ws_waddr, .ws_wdata, .contention);

  hv_global_sram #(.DEPTH(GDEPTH), .WIDTH(BUS_W)) u_gsram (
    .clk, .en(gs_en), .we(gs_we), .addr(gs_addr), .wdata(gs_wdata), .rdata(gs_rdata));

  hv_input_sram #(.DEPTH(IDEPTH), .WIDTH(BUS_W)) u_isram (
    .clk, .we(is_we), .waddr(is_waddr), .wdata(is_wdata),
    .re(rd_en), .raddr(is_raddr), .rdata(is_rdata));

  // byte r of a bus / input-SRAM word belongs to PE row r (input) or column r (weight)
  always_comb begin
    for (int r = 0; r < NR; r++) x[r] = data_t'(is_rdata[r*DW +: DW]);
    for (int c = 0; c < NC; c++) w_wdata[c] = data_t'(ws_wdata[c*DW +: DW]);
  end

  hv_pe_array #(.NR(NR), .NC(NC), .WDEPTH(WDEPTH), .DW_SUPPORT(DW_SUPPORT)) u_array (
    .clk, .rst_n, .mode, .x, .w_we(ws_we), .w_row(ws_row[$clog2(NR)-1:0]), .w_waddr(ws_waddr),
    .w_wdata, .w_re(rd_en), .w_raddr, .acc_en(pe_acc_en), .out(arr_out));

  hv_output_rf #(.DEPTH(RDEPTH), .LANES(NC)) u_orf (
    .clk, .acc_en(rf_acc_en), .acc_first(rf_first), .acc_addr(rf_acc_addr), .acc_data(arr_out),
    .raddr(rf_raddr), .rdata(rf_rdata));

  hv_writeback_buffer #(.LANES(NC)) u_wb (
    .clk, .rst_n, .cfg(pp_cfg), .start(wb_start), .dst_space(wb_space), .dst_addr(wb_addr),
    .in_valid(wb_in_valid), .in_ready(wb_in_ready), .in_data(rf_rdata), .in_last(wb_in_last),
    .bus_valid(wbb_valid), .bus_ready(wbb_ready), .bus_req(wbb_req), .busy(wb_busy));

  logic unused;
  assign unused = contention ^ ^ws_row;
endmodule
