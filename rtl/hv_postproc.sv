// hv_postproc: the non-linear post-processing engine of the writeback buffer.
// It works on one output pixel at a time: all channels of the pixel arrive as
// beats of 16 x 32-bit accumulators (in_last marks the pixel's final beat) and are
// stored in the line buffer; the engine then emits the same number of beats of
// 16 x int8. Channels at or beyond cfg.nch are treated as absent and give 0.
// Operations (cfg.op):
//   QUANT  y = sat8((x*qmul + rnd) >>> qshift)
//   RELU   QUANT of max(x,0)
//   GELU   QUANT of (x * clamp(x + 2^(T-1), 0, 2^T)) >>> T, a hard-gated GELU
//   LNORM  mean and variance over the pixel's channels (sequential divider and
//          integer square root), y = sat8(((x-mean) * (2^40/std) + rnd) >>> qshift)
//   SMAX   e = 2^-((max-x)*sm_mul/256), linear in the fraction, summed over the
//          channels; y = sat8(e * (2^31/sum) >>> 24), i.e. probability x 128
// Timing: the fill takes one cycle per beat, the output one cycle per beat while
// out_ready is high. LNORM adds a pass over the line buffer and about 3x80 + 36
// cycles of division and square root; SMAX one pass and 80 cycles. A new pixel is
// accepted only after the previous one has been emitted. That LayerNorm, SoftMax,
// quantisation and activations are done here on a per-pixel line buffer is the
// paper's; all arithmetic above is this design's choice (the paper gives none),
// and the LayerNorm affine parameters are not applied.
module hv_postproc
  import hv_pkg::*;
#(
  parameter int unsigned BEATS = hv_pkg::LB_BEATS,
  parameter int unsigned LANES = hv_pkg::COLS
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  pp_cfg_t                  cfg,
  input  logic                     in_valid,
  output logic                     in_ready,
  input  acc_t [LANES-1:0]         in_data,
  input  logic                     in_last,
  output logic                     out_valid,
  input  logic                     out_ready,
  output data_t [LANES-1:0]        out_data,
  output logic                     out_last,
  output logic                     busy,
  // line buffer
  output logic                     lb_we,
  output logic [$clog2(BEATS)-1:0] lb_waddr,
  output acc_t [LANES-1:0]         lb_wdata,
  output logic [$clog2(BEATS)-1:0] lb_raddr,
  input  acc_t [LANES-1:0]         lb_rdata
);
  localparam int unsigned BW = $clog2(BEATS);
  localparam int unsigned DVW = 80;

  typedef enum logic [3:0] {S_FILL, S_MEAN, S_VAR, S_VDIV, S_SQRT, S_RDIV,
                            S_EXP, S_SDIV, S_OUT} state_e;
  state_e st_q;

  logic [BW-1:0]        wr_q, rd_q, nb_q;      // fill pointer, pass pointer, last beat
  logic signed [47:0]   sum_q;
  acc_t                 max_q;
  logic [DVW-1:0]       acc2_q;                // sum of squares / sum of exponentials
  logic signed [47:0]   mean_q;
  logic [DVW-1:0]       var_q;
  logic [35:0]          sqrt_q;
  logic [5:0]           sbit_q;
  logic [DVW-1:0]       scale_q;               // 2^40/std or 2^31/sum

  // divider
  logic           dv_start, dv_busy, dv_done;
  logic [DVW-1:0] dv_a, dv_b, dv_q;
  hv_divider #(.W(DVW)) u_div (.clk, .rst_n, .start(dv_start), .dividend(dv_a),
    .divisor(dv_b), .busy(dv_busy), .done(dv_done), .quotient(dv_q));

  function automatic logic lane_ok(input logic [BW-1:0] beat, input int l, input logic [8:0] nch);
    return (32'(beat) * LANES + 32'(l)) < 32'(nch);
  endfunction

  function automatic data_t requant(input logic signed [47:0] v, input logic signed [15:0] m,
                                    input logic [5:0] sh);
    logic signed [63:0] p;
    p = 64'(v) * 64'(m);
    if (sh != 0) p = p + (64'sd1 <<< (sh - 1));
    return sat8(p >>> sh);
  endfunction

  function automatic logic signed [47:0] sat48(input logic signed [63:0] v);
    if (v > 64'sh7FFF_FFFF_FFFF)       return 48'sh7FFF_FFFF_FFFF;
    else if (v < -64'sh8000_0000_0000) return 48'sh8000_0000_0000;
    else                               return v[47:0];
  endfunction

  // ---- per-lane datapath -------------------------------------------------
  logic signed [47:0] fill_sum;
  acc_t               fill_max;
  logic [DVW-1:0]     var_part, exp_part;
  acc_t [LANES-1:0]   exp_vals;
  data_t [LANES-1:0]  y;

  always_comb begin
    fill_sum = '0;
    fill_max = (wr_q == 0) ? acc_t'(32'sh8000_0000) : max_q;
    for (int l = 0; l < LANES; l++) begin
      if (lane_ok(wr_q, l, cfg.nch)) begin
        fill_sum += 48'(in_data[l]);
        if (in_data[l] > fill_max) fill_max = in_data[l];
      end
    end
  end

  always_comb begin
    var_part = '0;
    exp_part = '0;
    for (int l = 0; l < LANES; l++) begin
      logic signed [47:0] dlt;
      logic [32:0]        dm;
      logic [48:0]        dfix;
      logic [16:0]        e;
      dlt = 48'(lb_rdata[l]) - mean_q;
      if (lane_ok(rd_q, l, cfg.nch)) var_part += DVW'(64'(dlt) * 64'(dlt));
      dm   = 33'(64'(max_q) - 64'(lb_rdata[l]));
      dfix = 49'(dm) * 49'(cfg.sm_mul);
      if (dfix[48:8] >= 17) e = '0;
      else                  e = (17'd65536 - (17'(dfix[7:0]) << 7)) >> dfix[12:8];
      if (!lane_ok(rd_q, l, cfg.nch)) e = '0;
      exp_vals[l] = acc_t'(e);
      exp_part += DVW'(e);
    end
  end

  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      acc_t x;
      logic signed [63:0] g, gate, v;
      logic signed [95:0] w;
      x = lb_rdata[l];
      gate = 64'(x) + (64'sd1 <<< (cfg.gelu_t - 1));
      if (gate < 0) gate = 0;
      else if (gate > (64'sd1 <<< cfg.gelu_t)) gate = 64'sd1 <<< cfg.gelu_t;
      g = (64'(x) * gate) >>> cfg.gelu_t;
      v = '0;
      w = '0;
      unique case (cfg.op)
        PP_RELU:  y[l] = requant((x < 0) ? 48'sd0 : 48'(x), cfg.qmul, cfg.qshift);
        PP_GELU:  y[l] = requant(sat48(g), cfg.qmul, cfg.qshift);
        PP_LNORM: begin
          w = 96'(sat48(64'(x) - 64'(mean_q))) * $signed({55'd0, scale_q[40:0]});
          if (cfg.qshift != 0) w = w + (96'sd1 <<< (cfg.qshift - 1));
          w = w >>> cfg.qshift;
          y[l] = (w > 96'sd127) ? 8'sd127 : (w < -96'sd128) ? -8'sd128 : w[7:0];
        end
        PP_SMAX:  begin
          v = 64'(x) * 64'(scale_q[31:0]);
          y[l] = sat8(v >>> 24);
        end
        default:  y[l] = requant(48'(x), cfg.qmul, cfg.qshift);
      endcase
      if (!lane_ok(rd_q, l, cfg.nch)) y[l] = '0;
    end
  end

  // ---- control ------------------------------------------------------------
  logic [71:0] sq_trial;
  assign sq_trial = 72'(sqrt_q | (36'd1 << sbit_q)) * 72'(sqrt_q | (36'd1 << sbit_q));

  assign in_ready  = (st_q == S_FILL);
  assign out_valid = (st_q == S_OUT);
  assign out_data  = y;
  assign out_last  = (rd_q == nb_q);
  assign busy      = (st_q != S_FILL) || (wr_q != 0);
  assign lb_raddr  = rd_q;

  always_comb begin
    lb_we    = 1'b0;
    lb_waddr = wr_q;
    lb_wdata = in_data;
    if (st_q == S_FILL && in_valid) lb_we = 1'b1;
    if (st_q == S_EXP) begin
      lb_we = 1'b1; lb_waddr = rd_q; lb_wdata = exp_vals;
    end
  end

  always_comb begin
    dv_a = '0; dv_b = '0;
    unique case (st_q)
      S_MEAN: begin dv_a = DVW'(sum_q < 0 ? -sum_q : sum_q); dv_b = DVW'(cfg.nch); end
      S_VDIV: begin dv_a = acc2_q; dv_b = DVW'(cfg.nch); end
      S_RDIV: begin dv_a = DVW'(1) << 40; dv_b = (sqrt_q == 0) ? DVW'(1) : DVW'(sqrt_q); end
      S_SDIV: begin dv_a = DVW'(1) << 31; dv_b = acc2_q; end
      default: ;
    endcase
  end

  // the divider is started on the first cycle of each division state
  logic dv_issued_q;
  assign dv_start = (st_q inside {S_MEAN, S_VDIV, S_RDIV, S_SDIV}) && !dv_issued_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       dv_issued_q <= 1'b0;
    else if (dv_start) dv_issued_q <= 1'b1;
    else if (dv_done)  dv_issued_q <= 1'b0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q <= S_FILL; wr_q <= '0; rd_q <= '0; nb_q <= '0;
      sum_q <= '0; max_q <= '0; acc2_q <= '0; mean_q <= '0; var_q <= '0;
      sqrt_q <= '0; sbit_q <= '0; scale_q <= '0;
    end else begin
      unique case (st_q)
        S_FILL: if (in_valid) begin
          sum_q <= (wr_q == 0) ? fill_sum : sum_q + fill_sum;
          max_q <= fill_max;
          if (in_last) begin
            nb_q <= wr_q; wr_q <= '0; rd_q <= '0; acc2_q <= '0;
            unique case (cfg.op)
              PP_LNORM: st_q <= S_MEAN;
              PP_SMAX:  st_q <= S_EXP;
              default:  st_q <= S_OUT;
            endcase
          end else begin
            wr_q <= wr_q + 1'b1;
          end
        end
        S_MEAN: if (dv_done) begin
          mean_q <= (sum_q < 0) ? -48'(dv_q) : 48'(dv_q);
          st_q <= S_VAR;
        end
        S_VAR: begin
          acc2_q <= acc2_q + var_part;
          if (rd_q == nb_q) begin rd_q <= '0; st_q <= S_VDIV; end
          else rd_q <= rd_q + 1'b1;
        end
        S_VDIV: if (dv_done) begin
          var_q <= dv_q; sqrt_q <= '0; sbit_q <= 6'd35; st_q <= S_SQRT;
        end
        S_SQRT: begin
          if (DVW'(sq_trial) <= var_q) sqrt_q <= sqrt_q | (36'd1 << sbit_q);
          if (sbit_q == 0) st_q <= S_RDIV;
          else sbit_q <= sbit_q - 1'b1;
        end
        S_RDIV: if (dv_done) begin scale_q <= dv_q; st_q <= S_OUT; end
        S_EXP: begin
          acc2_q <= acc2_q + exp_part;
          if (rd_q == nb_q) begin rd_q <= '0; st_q <= S_SDIV; end
          else rd_q <= rd_q + 1'b1;
        end
        S_SDIV: if (dv_done) begin scale_q <= dv_q; st_q <= S_OUT; end
        S_OUT: if (out_ready) begin
          if (rd_q == nb_q) begin rd_q <= '0; st_q <= S_FILL; end
          else rd_q <= rd_q + 1'b1;
        end
        default: st_q <= S_FILL;
      endcase
    end
  end
endmodule
