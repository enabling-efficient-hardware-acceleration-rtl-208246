// hv_controller: the central, instruction-programmed FSM controller.
// It accepts 32-bit instructions on a valid/ready stream:
//   SET     instr[31:28]=1, [27:22]=register, [21:0]=value
//   DMA     instr[31:28]=2, [1:0]=source space, [3:2]=destination space; uses the
//           DMA_SRC / DMA_DST / DMA_LEN registers; waits while the DMA is busy
//   COMPUTE instr[31:28]=3, [0]=mode (0 C|K, 1 C|FX), [1]=clear the output-RF
//           accumulators first, [2]=drain results to the writeback buffer at the
//           end, [5:3]=post-processing op, [7:6]=writeback destination space;
//           uses the layer registers; waits while a previous compute or its
//           writeback is still running
//   WAIT    instr[31:28]=4, [0]=until DMA idle, [1]=until compute and writeback idle
// A COMPUTE copies the layer registers, so SETs for the next layer and DMA
// transfers can overlap it. The compute sequencer issues one input-SRAM/weight
// read per cycle with these loop orders (innermost last):
//   C|K : ox, oy, kt, fx, fy, ct  -> RF[RF_BASE + (ox*OY+oy)*KT + kt]
//         input  IN_BASE + (ox*S+fx)*IN_XSTR + (oy*S+fy)*IN_YSTR + ct
//         weight W_BASE + ((kt*FX+fx)*FY+fy)*CT + ct
//   C|FX: oy, ct, fy, ix (0..OX+FX-2) -> RF[RF_BASE + (ox*OY+oy)*CT + ct], ox=ix-FX+1
//         input  IN_BASE + ix*IN_XSTR + (oy+fy)*IN_YSTR + ct, weight W_BASE + ct*FY + fy
// so every output pixel is complete with all its channels (pixelwise order), and
// the drain sends pixel after pixel, all channel tiles of a pixel together, to the
// writeback buffer. Clear and drain flags plus a programmable RF base let partial
// sums of one output tile stay in the RF across several COMPUTEs, which is how the
// inverted-bottleneck layer fusion is run. Timing: compute takes one cycle per
// issued read plus 2 cycles of pipeline, the drain one cycle per RF entry unless
// the writeback buffer stalls it. The FSM controller and its 32-bit programming
// interface are the paper's; the instruction set and loop orders are this design's.
// The DMA and writeback space outputs are instruction bits passed through on
// purpose: they are only sampled together with dma_start / wb_start.
module hv_controller
  import hv_pkg::*;
#(
  parameter int unsigned IDEPTH = hv_pkg::IDEPTH,
  parameter int unsigned WDEPTH = hv_pkg::WDEPTH,
  parameter int unsigned RDEPTH = hv_pkg::RDEPTH
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      instr_valid,
  output logic                      instr_ready,
  input  logic [31:0]               instr,
  output logic                      busy,
  // DMA
  output logic                      dma_start,
  output space_e                    dma_src_space,
  output space_e                    dma_dst_space,
  output logic [21:0]               dma_src,
  output logic [21:0]               dma_dst,
  output logic [21:0]               dma_len,
  input  logic                      dma_busy,
  // PE array, input SRAM
  output mode_e                     mode,
  output logic                      rd_en,
  output logic [$clog2(IDEPTH)-1:0] is_raddr,
  output logic [$clog2(WDEPTH)-1:0] w_raddr,
  output logic                      pe_acc_en,
  // output RF
  output logic                      rf_acc_en,
  output logic                      rf_first,
  output logic [$clog2(RDEPTH)-1:0] rf_acc_addr,
  output logic [$clog2(RDEPTH)-1:0] rf_raddr,
  // writeback buffer
  output logic                      wb_start,
  output space_e                    wb_space,
  output logic [21:0]               wb_addr,
  output pp_cfg_t                   pp_cfg,
  output logic                      wb_in_valid,
  input  logic                      wb_in_ready,
  output logic                      wb_in_last,
  input  logic                      wb_busy
);
  localparam int unsigned RW = $clog2(RDEPTH);

  logic [21:0] regs [NREGS];
  opcode_e     op;
  assign op = opcode_e'(instr[31:28]);

  typedef enum logic [1:0] {C_IDLE, C_RUN, C_FLUSH, C_DRAIN} cstate_e;
  cstate_e st_q;

  // latched layer
  typedef struct packed {
    logic        mode, clr, drain;
    logic [21:0] ox, oy, kt, ct, fx, fy, s, in_base, in_xs, in_ys, w_base, rf_base;
  } layer_t;
  layer_t L;

  logic comp_busy, accept;
  assign comp_busy = (st_q != C_IDLE) || wb_busy;
  assign busy      = comp_busy || dma_busy;

  always_comb begin
    unique case (op)
      OP_DMA:     instr_ready = !dma_busy;
      OP_COMPUTE: instr_ready = !comp_busy;
      OP_WAIT:    instr_ready = !(instr[0] && dma_busy) && !(instr[1] && comp_busy);
      default:    instr_ready = 1'b1;
    endcase
  end
  assign accept = instr_valid && instr_ready;

  assign dma_start     = accept && op == OP_DMA;
  assign dma_src_space = space_e'(instr[1:0]);
  assign dma_dst_space = space_e'(instr[3:2]);
  assign dma_src       = regs[R_DMA_SRC];
  assign dma_dst       = regs[R_DMA_DST];
  assign dma_len       = regs[R_DMA_LEN];
  assign wb_start      = accept && op == OP_COMPUTE;
  assign wb_space      = space_e'(instr[7:6]);
  assign wb_addr       = regs[R_WB_ADDR];

  // loop counters: a..f, meaning depends on the mode (see header)
  logic [21:0] ox_q, oy_q, kt_q, fx_q, fy_q, ct_q;
  logic [21:0] p_q, t_q;          // drain: pixel, channel tile
  logic [21:0] ntile, npix, ixmax;
  logic        last_issue;
  assign ntile = L.mode ? L.ct : L.kt;
  assign npix  = L.ox * L.oy;
  assign ixmax = L.ox + L.fx - 2;

  always_comb begin
    if (!L.mode) last_issue = (ox_q == L.ox-1) && (oy_q == L.oy-1) && (kt_q == L.kt-1) &&
                              (fx_q == L.fx-1) && (fy_q == L.fy-1) && (ct_q == L.ct-1);
    else         last_issue = (oy_q == L.oy-1) && (ct_q == L.ct-1) && (fy_q == L.fy-1) && (ox_q == ixmax);
  end

  // issue-stage addresses
  logic [21:0] in_a, w_a, rf_a, oxo;
  logic        out_ok, first;
  always_comb begin
    oxo = ox_q - (L.fx - 1);
    if (!L.mode) begin
      in_a   = L.in_base + (ox_q*L.s + fx_q)*L.in_xs + (oy_q*L.s + fy_q)*L.in_ys + ct_q;
      w_a    = L.w_base + ((kt_q*L.fx + fx_q)*L.fy + fy_q)*L.ct + ct_q;
      rf_a   = L.rf_base + (ox_q*L.oy + oy_q)*L.kt + kt_q;
      out_ok = 1'b1;
      first  = L.clr && fx_q == 0 && fy_q == 0 && ct_q == 0;
    end else begin
      in_a   = L.in_base + ox_q*L.in_xs + (oy_q + fy_q)*L.in_ys + ct_q;
      w_a    = L.w_base + ct_q*L.fy + fy_q;
      rf_a   = L.rf_base + (oxo*L.oy + oy_q)*L.ct + ct_q;
      out_ok = (ox_q >= L.fx - 1);
      first  = L.clr && fy_q == 0;
    end
  end

  assign mode     = mode_e'(L.mode);
  assign rd_en    = (st_q == C_RUN);
  assign is_raddr = in_a[$clog2(IDEPTH)-1:0];
  assign w_raddr  = w_a[$clog2(WDEPTH)-1:0];

  // result tags follow the two-cycle datapath
  typedef struct packed {logic v, ok, first; logic [RW-1:0] a;} tag_t;
  tag_t t1_q, t2_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin t1_q <= '0; t2_q <= '0; end
    else begin
      t1_q <= '{v: rd_en, ok: out_ok, first: first, a: rf_a[RW-1:0]};
      t2_q <= t1_q;
    end
  end
  assign pe_acc_en   = t1_q.v;
  assign rf_acc_en   = t2_q.v && t2_q.ok;
  assign rf_first    = t2_q.first;
  assign rf_acc_addr = t2_q.a;

  logic [21:0] rf_ra;
  assign rf_ra       = L.rf_base + p_q*ntile + t_q;
  assign rf_raddr    = rf_ra[RW-1:0];
  assign wb_in_valid = (st_q == C_DRAIN);
  assign wb_in_last  = (t_q == ntile - 1);

  logic [1:0] fl_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q <= C_IDLE; L <= '0; pp_cfg <= '0;
      ox_q <= '0; oy_q <= '0; kt_q <= '0; fx_q <= '0; fy_q <= '0; ct_q <= '0;
      p_q <= '0; t_q <= '0; fl_q <= '0;
      for (int i = 0; i < NREGS; i++) regs[i] <= '0;
    end else begin
      if (accept && op == OP_SET && 32'(instr[27:22]) < NREGS) regs[instr[27:22]] <= instr[21:0];
      unique case (st_q)
        C_IDLE: if (accept && op == OP_COMPUTE) begin
          L <= '{mode: instr[0], clr: instr[1], drain: instr[2],
                 ox: regs[R_OX], oy: regs[R_OY], kt: regs[R_KT], ct: regs[R_CT],
                 fx: regs[R_FX], fy: regs[R_FY], s: regs[R_STRIDE],
                 in_base: regs[R_IN_BASE], in_xs: regs[R_IN_XSTR], in_ys: regs[R_IN_YSTR],
                 w_base: regs[R_W_BASE], rf_base: regs[R_RF_BASE]};
          pp_cfg <= '{op: ppop_e'(instr[5:3]), nch: regs[R_NCH][8:0], qmul: regs[R_QMUL][15:0],
                      qshift: regs[R_QSHIFT][5:0], gelu_t: regs[R_GELU_T][4:0], sm_mul: regs[R_SM_MUL][15:0]};
          ox_q <= '0; oy_q <= '0; kt_q <= '0; fx_q <= '0; fy_q <= '0; ct_q <= '0;
          st_q <= C_RUN;
        end
        C_RUN: begin
          if (last_issue) begin st_q <= C_FLUSH; fl_q <= '0; end
          if (!L.mode) begin
            // ox, oy, kt, fx, fy, ct
            if (ct_q != L.ct-1) ct_q <= ct_q + 1;
            else begin
              ct_q <= '0;
              if (fy_q != L.fy-1) fy_q <= fy_q + 1;
              else begin
                fy_q <= '0;
                if (fx_q != L.fx-1) fx_q <= fx_q + 1;
                else begin
                  fx_q <= '0;
                  if (kt_q != L.kt-1) kt_q <= kt_q + 1;
                  else begin
                    kt_q <= '0;
                    if (oy_q != L.oy-1) oy_q <= oy_q + 1;
                    else begin oy_q <= '0; ox_q <= ox_q + 1; end
                  end
                end
              end
            end
          end else begin
            // oy, ct, fy, ix (ix held in ox_q)
            if (ox_q != ixmax) ox_q <= ox_q + 1;
            else begin
              ox_q <= '0;
              if (fy_q != L.fy-1) fy_q <= fy_q + 1;
              else begin
                fy_q <= '0;
                if (ct_q != L.ct-1) ct_q <= ct_q + 1;
                else begin ct_q <= '0; oy_q <= oy_q + 1; end
              end
            end
          end
        end
        C_FLUSH: begin
          fl_q <= fl_q + 1'b1;
          if (fl_q == 2'd2) begin
            p_q <= '0; t_q <= '0;
            st_q <= L.drain ? C_DRAIN : C_IDLE;
          end
        end
        C_DRAIN: if (wb_in_ready) begin
          if (t_q != ntile-1) t_q <= t_q + 1;
          else begin
            t_q <= '0;
            if (p_q == npix-1) st_q <= C_IDLE;
            else p_q <= p_q + 1;
          end
        end
        default: st_q <= C_IDLE;
      endcase
    end
  end

  // a C|FX kernel must fit in one PE row; loop bounds must be non-zero
  a_fx_fits: assert property (@(posedge clk) disable iff (!rst_n)
    (st_q == C_RUN) |-> (L.fx >= 1 && L.fx <= 22'(hv_pkg::COLS) && L.fy >= 1 && L.ct >= 1 && L.ox >= 1 && L.oy >= 1));
endmodule
