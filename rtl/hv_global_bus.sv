// hv_global_bus: the 128-bit global bus that links the global SRAM, the off-chip
// DRAM interface, the input SRAM and the PE weight memories.
// Two masters: the DMA engine (reads and writes) and the writeback buffer (writes
// only). The DMA always wins; a writeback word goes through in any cycle in which
// its target is not used by the DMA, so results are written back when the bus is
// idle for them. Address spaces (bus_req_t.space): DRAM, global SRAM (word
// address), input SRAM (word address) and weight memories (addr[13:10] = PE row,
// addr[9:0] = weight address, byte k of the word goes to column k). Reads are
// possible from DRAM and global SRAM; read data returns on dma_rvalid, one cycle
// after the request for global SRAM and when the DRAM answers for DRAM (one read
// outstanding). contention pulses in each cycle a writeback word is held back.
// The bus, its width and the writeback-when-idle policy are the paper's; the
// request format, the DRAM handshake and the fixed priority are this design's.
module hv_global_bus
  import hv_pkg::*;
#(
  parameter int unsigned GDEPTH = hv_pkg::GDEPTH,
  parameter int unsigned IDEPTH = hv_pkg::IDEPTH,
  parameter int unsigned WDEPTH = hv_pkg::WDEPTH
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // DMA master
  input  logic                      dma_valid,
  output logic                      dma_ready,
  input  bus_req_t                  dma_req,
  output logic                      dma_rvalid,
  output logic [BUS_W-1:0]          dma_rdata,
  // writeback master
  input  logic                      wb_valid,
  output logic                      wb_ready,
  input  bus_req_t                  wb_req,
  // global SRAM
  output logic                      gs_en,
  output logic                      gs_we,
  output logic [$clog2(GDEPTH)-1:0] gs_addr,
  output logic [BUS_W-1:0]          gs_wdata,
  input  logic [BUS_W-1:0]          gs_rdata,
  // off-chip DRAM
  output logic                      dram_req_valid,
  input  logic                      dram_req_ready,
  output logic                      dram_req_we,
  output logic [21:0]               dram_req_addr,
  output logic [BUS_W-1:0]          dram_req_wdata,
  input  logic                      dram_rsp_valid,
  input  logic [BUS_W-1:0]          dram_rsp_rdata,
  // input SRAM write port
  output logic                      is_we,
  output logic [$clog2(IDEPTH)-1:0] is_waddr,
  output logic [BUS_W-1:0]          is_wdata,
  // weight memories write port
  output logic                      ws_we,
  output logic [3:0]                ws_row,
  output logic [$clog2(WDEPTH)-1:0] ws_waddr,
  output logic [BUS_W-1:0]          ws_wdata,
  output logic                      contention
);
  logic     wb_go;
  bus_req_t sel;
  logic     sel_valid;
  logic     gs_read_q;

  assign wb_go = wb_valid && !(dma_valid && dma_req.space == wb_req.space);

  always_comb begin
    if (dma_valid) begin sel = dma_req; sel_valid = 1'b1; end
    else           begin sel = wb_req;  sel_valid = wb_go; end
  end

  // fan-out of the selected request
  assign gs_en          = sel_valid && sel.space == SP_GSRAM;
  assign gs_we          = sel.we;
  assign gs_addr        = sel.addr[$clog2(GDEPTH)-1:0];
  assign gs_wdata       = sel.wdata;
  assign dram_req_valid = sel_valid && sel.space == SP_DRAM;
  assign dram_req_we    = sel.we;
  assign dram_req_addr  = sel.addr;
  assign dram_req_wdata = sel.wdata;
  assign is_we          = sel_valid && sel.space == SP_ISRAM && sel.we;
  assign is_waddr       = sel.addr[$clog2(IDEPTH)-1:0];
  assign is_wdata       = sel.wdata;
  assign ws_we          = sel_valid && sel.space == SP_WSRAM && sel.we;
  assign ws_row         = sel.addr[13:10];
  assign ws_waddr       = sel.addr[$clog2(WDEPTH)-1:0];
  assign ws_wdata       = sel.wdata;

  assign dma_ready  = dma_valid && (dma_req.space != SP_DRAM || dram_req_ready);
  assign wb_ready   = !dma_valid && wb_go && (wb_req.space != SP_DRAM || dram_req_ready);
  assign contention = wb_valid && !wb_go;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) gs_read_q <= 1'b0;
    else        gs_read_q <= dma_valid && dma_ready && !dma_req.we && dma_req.space == SP_GSRAM;
  end
  assign dma_rvalid = gs_read_q || dram_rsp_valid;
  assign dma_rdata  = gs_read_q ? gs_rdata : dram_rsp_rdata;

  // the writeback buffer never reads
  a_wb_write_only: assert property (@(posedge clk) disable iff (!rst_n) wb_valid |-> wb_req.we);
endmodule
