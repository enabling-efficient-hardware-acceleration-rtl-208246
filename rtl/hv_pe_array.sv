// hv_pe_array: the reconfigurable 16x16 PE array.
// Row r receives activation x[r] (input channel r of the current 16-channel tile),
// multicast to all 16 PEs of the row; every PE has its own weight memory.
//   C|K  (mode 0, pointwise / regular convolution / GeMM): column k sums the 16
//        products of its PEs with an adder tree, giving output channel k; out[k]
//        is that sum, registered. 256 MACs per cycle.
//   C|FX (mode 1, depthwise convolution): row c is channel c and column j is a
//        filter tap; the partial sum moves right one PE per cycle, so the last PE
//        of row c delivers a 1-D convolution of the stream x[c] along X. out[c]
//        is that PE's psum. A kernel of FX taps is placed in columns 16-FX..15,
//        with zero weights in the other columns.
// Timing: both modes deliver out two cycles after the weight read address
// (cycle t: w_re/w_raddr, t+1: x, t+2: out). Weights are written one PE row at a
// time, one byte per column (w_row, w_wdata). The two dataflows and their
// directions follow the paper's text; the FIR reading of C|FX, the register after
// the adder tree and the write organisation are this design's.
// DW_SUPPORT follows the paper's statement that depthwise support is a
// parameter: with DW_SUPPORT = 0 the PEs are held in C|K, the row chains are
// never loaded (synthesis removes them) and out is always the column sums, so a
// C|FX program gives C|K results.
module hv_pe_array
  import hv_pkg::*;
#(
  parameter int unsigned NR     = hv_pkg::ROWS,
  parameter int unsigned NC     = hv_pkg::COLS,
  parameter int unsigned WDEPTH = hv_pkg::WDEPTH,
  parameter bit          DW_SUPPORT = 1'b1
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  mode_e                     mode,
  input  data_t [NR-1:0]            x,
  input  logic                      w_we,
  input  logic [$clog2(NR)-1:0]     w_row,
  input  logic [$clog2(WDEPTH)-1:0] w_waddr,
  input  data_t [NC-1:0]            w_wdata,
  input  logic                      w_re,
  input  logic [$clog2(WDEPTH)-1:0] w_raddr,
  input  logic                      acc_en,
  output acc_t  [NC-1:0]            out
);
  acc_t prod [NR][NC];
  acc_t psum [NR][NC];
  acc_t colsum_q [NC];
  mode_e pe_mode;

  assign pe_mode = DW_SUPPORT ? mode : MODE_CK;

  for (genvar r = 0; r < NR; r++) begin : g_row
    for (genvar c = 0; c < NC; c++) begin : g_col
      acc_t prev;
      if (c == 0) begin : g_first
        assign prev = '0;
      end else begin : g_chain
        assign prev = psum[r][c-1];
      end
      hv_pe #(.WDEPTH(WDEPTH)) u_pe (
        .clk, .rst_n, .mode(pe_mode), .x(x[r]),
        .w_we(w_we && (w_row == r[$clog2(NR)-1:0])), .w_waddr, .w_wdata(w_wdata[c]),
        .w_re, .w_raddr, .acc_en, .prev,
        .prod(prod[r][c]), .psum(psum[r][c]));
    end
  end

  // Column adder trees (C|K).
  for (genvar c = 0; c < NC; c++) begin : g_tree
    acc_t s;
    always_comb begin
      s = '0;
      for (int r = 0; r < NR; r++) s += prod[r][c];
    end
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) colsum_q[c] <= '0;
      else        colsum_q[c] <= s;
    end
  end

  // Output select. With NR != NC the C|FX lanes beyond NR read zero.
  always_comb begin
    for (int i = 0; i < NC; i++) begin
      if (pe_mode == MODE_CK) out[i] = colsum_q[i];
      else                 out[i] = (i < NR) ? psum[i % NR][NC-1] : '0;
    end
  end
endmodule
