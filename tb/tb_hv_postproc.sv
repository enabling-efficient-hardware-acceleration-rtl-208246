// tb_hv_postproc: self-checking test of the non-linear post-processing engine
// (with its line buffer). Random pixels of 1..16 beats and random channel counts
// go through every operation. Expected int8 results are computed here from the
// operation definitions (64-bit integer arithmetic); LayerNorm results are also
// compared with a floating-point LayerNorm (within 2 LSB) and SoftMax results must
// add up to about 128. Output back-pressure is random. For requantisation without
// back-pressure the first output beat must follow the last input beat by exactly one cycle.
module tb_hv_postproc;
  import hv_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  pp_cfg_t cfg;
  logic in_valid = 0, in_ready, in_last = 0, out_valid, out_ready = 0, out_last, busy;
  acc_t  [15:0] in_data = '0;
  data_t [15:0] out_data;
  logic        lb_we;
  logic [3:0]  lb_waddr, lb_raddr;
  acc_t [15:0] lb_wdata, lb_rdata;

  hv_postproc dut (.clk, .rst_n, .cfg, .in_valid, .in_ready, .in_data, .in_last,
    .out_valid, .out_ready, .out_data, .out_last, .busy,
    .lb_we, .lb_waddr, .lb_wdata, .lb_raddr, .lb_rdata);
  hv_line_buffer lb (.clk, .we(lb_we), .waddr(lb_waddr), .wdata(lb_wdata), .raddr(lb_raddr), .rdata(lb_rdata));

  int cyc = 0;
  always @(posedge clk) cyc++;
  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  longint X [256];
  int     expv [256];
  int     counts [5];

  function automatic int s8(input longint v);
    return (v > 127) ? 127 : (v < -128) ? -128 : int'(v);
  endfunction
  function automatic int rq(input longint v, input longint m, input int sh);
    longint p; p = v * m;
    if (sh != 0) p += longint'(1) <<< (sh - 1);
    return s8(p >>> sh);
  endfunction
  function automatic longint isqrt(input longint v);
    longint s; s = longint'($floor($sqrt(real'(v))));
    while (s > 0 && s * s > v) s--;
    while ((s + 1) * (s + 1) <= v) s++;
    return s;
  endfunction

  task automatic run_pixel(input ppop_e op, input int nb, input int nch);
    int n_out, sh, t0;
    longint sum, mean, sq, var_, sd, inv, mx, esum;
    longint e [256];
    real rmean, rvar;
    int ysum;
    cfg.op = op; cfg.nch = 9'(nch);
    cfg.qmul = 16'(int'($urandom % 200) + 1); cfg.qshift = 6'(4 + $urandom % 8);
    cfg.gelu_t = 5'(6 + $urandom % 6); cfg.sm_mul = 16'(20 + $urandom % 200);
    if (op == PP_LNORM) cfg.qshift = 6'(35);
    for (int i = 0; i < nb*16; i++) begin
      if (op == PP_GELU || op == PP_SMAX) X[i] = longint'($urandom % 4001) - 2000;
      else if (op == PP_LNORM)            X[i] = longint'(int'($urandom)) >>> (9 + $urandom % 14);
      else                                X[i] = longint'(int'($urandom)) >>> ($urandom % 20);
    end
    // reference
    sum = 0; mx = -(longint'(1) << 40); sq = 0; esum = 0;
    for (int i = 0; i < nch; i++) begin sum += X[i]; if (X[i] > mx) mx = X[i]; end
    mean = sum / nch;
    for (int i = 0; i < nch; i++) sq += (X[i] - mean) * (X[i] - mean);
    var_ = sq / nch; sd = isqrt(var_); if (sd == 0) sd = 1; inv = (longint'(1) << 40) / sd;
    for (int i = 0; i < nch; i++) begin
      longint d, di, df;
      d = (mx - X[i]) * longint'(cfg.sm_mul); di = d >>> 8; df = d & 255;
      e[i] = (di >= 17) ? 0 : ((65536 - df * 128) >>> di);
      esum += e[i];
    end
    for (int i = 0; i < nb*16; i++) begin
      longint g, gate;
      gate = X[i] + (longint'(1) <<< (cfg.gelu_t - 1));
      if (gate < 0) gate = 0; if (gate > (longint'(1) <<< cfg.gelu_t)) gate = longint'(1) <<< cfg.gelu_t;
      g = (X[i] * gate) >>> cfg.gelu_t;
      case (op)
        PP_QUANT: expv[i] = rq(X[i], cfg.qmul, cfg.qshift);
        PP_RELU:  expv[i] = rq(X[i] < 0 ? 0 : X[i], cfg.qmul, cfg.qshift);
        PP_GELU:  expv[i] = rq(g, cfg.qmul, cfg.qshift);
        PP_LNORM: expv[i] = s8(((X[i] - mean) * inv + (longint'(1) <<< 34)) >>> 35);
        default:  expv[i] = s8((e[i] * ((longint'(1) << 31) / esum)) >>> 24);
      endcase
      if (i >= nch) expv[i] = 0;
    end
    // drive
    fork
      begin
        for (int b = 0; b < nb; b++) begin
          @(negedge clk); in_valid = 1; in_last = (b == nb - 1);
          for (int l = 0; l < 16; l++) in_data[l] = acc_t'(X[b*16+l]);
          @(posedge clk); while (!in_ready) @(posedge clk);
          if (b == nb - 1) t0 = cyc;
        end
        @(negedge clk); in_valid = 0; in_last = 0;
      end
      begin
        bit first; first = 1;
        n_out = 0; ysum = 0;
        while (n_out < nb) begin
          @(negedge clk); out_ready = ($urandom % 4 != 0) || op == PP_QUANT;
          @(posedge clk);
          if (out_valid && out_ready) begin
            if (first && op == PP_QUANT) begin
              checks++; if (cyc - t0 != 1) begin failures++; $display("latency %0d", cyc - t0); end
            end
            first = 0;
            for (int l = 0; l < 16; l++) begin
              int i; i = n_out*16 + l;
              checks++;
              if (int'(out_data[l]) != expv[i]) begin
                failures++; $display("op %0d ch %0d: got %0d exp %0d (x=%0d)", op, i, out_data[l], expv[i], X[i]);
              end
              ysum += int'(out_data[l]);
            end
            checks++; if (out_last != (n_out == nb - 1)) failures++;
            n_out++;
          end
        end
      end
    join
    // floating-point comparisons
    if (op == PP_LNORM) begin
      rmean = 0; rvar = 0;
      for (int i = 0; i < nch; i++) rmean += real'(X[i]) / nch;
      for (int i = 0; i < nch; i++) rvar += (real'(X[i]) - rmean) ** 2 / nch;
      if (rvar > 1.0e6) for (int i = 0; i < nch; i++) begin
        real r; r = (real'(X[i]) - rmean) / $sqrt(rvar) * 32.0;
        if (r > -127.0 && r < 126.0) begin
          checks++; if (r - real'(expv[i]) > 2.0 || real'(expv[i]) - r > 2.0) begin
            failures++; $display("LN float %f vs %0d", r, expv[i]); end
        end
      end
    end
    if (op == PP_SMAX) begin
      checks++; if (ysum > 130 || ysum < 128 - nch - 8) begin failures++; $display("softmax sum %0d", ysum); end
    end
    counts[op]++;
  endtask

  initial begin
    cfg = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < 60; k++) begin
      ppop_e op; int nb, nch;
      op  = ppop_e'(k % 5);
      nb  = (k < 5) ? 16 : 1 + int'($urandom % 16);
      nch = (k % 7 == 0) ? nb*16 : (nb-1)*16 + 1 + int'($urandom % 16);
      run_pixel(op, nb, nch);
    end
    for (int o = 0; o < 5; o++) begin checks++; if (counts[o] == 0) failures++; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
