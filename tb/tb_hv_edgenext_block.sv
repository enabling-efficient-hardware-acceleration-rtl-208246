// tb_hv_edgenext_block: one convolutional encoder block of an EdgeNeXt-style
// hybrid network, run on the accelerator at its default size through the
// instruction stream only. The block is a 7x7 depthwise convolution on 48
// channels (C|FX dataflow, taps in columns 9..15) with LayerNorm fused into its
// writeback, followed by the inverted bottleneck PW 48->192, GELU, PW 192->48.
// The bottleneck runs depth-first: the 192 intermediate channels are produced in
// four tiles of 48, each written straight into the input SRAM and consumed at
// once by the second pointwise layer, whose partial sums stay in the output
// register file across the four tiles. Only the input, the weights and the
// final result cross the DRAM interface. The spatial tile is 4x4 output pixels
// (10x10 padded input), which keeps the simulation short; the 48 channels are
// the width of the network's second stage and the expansion factor is 4; the
// 7x7 kernel is one of the depthwise kernel sizes EdgeNeXt uses. The residual connection and the LayerNorm scale/shift of the network
// are not part of the block as run here (the hardware has no residual adder).
// Every output byte is compared with a reference computed from the layer
// definitions with the same integer post-processing arithmetic, and the compute
// phase of every COMPUTE must take exactly one cycle per issued read.
module tb_hv_edgenext_block;
  import hv_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic instr_valid = 0, instr_ready, busy;
  logic [31:0] instr = '0;
  logic dram_req_valid, dram_req_ready, dram_req_we, dram_rsp_valid;
  logic [21:0] dram_req_addr;
  logic [127:0] dram_req_wdata, dram_rsp_rdata;

  hv_accel u_dut (.clk, .rst_n, .instr_valid, .instr_ready, .instr,
    .dram_req_valid, .dram_req_ready, .dram_req_we, .dram_req_addr, .dram_req_wdata,
    .dram_rsp_valid, .dram_rsp_rdata, .busy);
  hv_dram_model u_dram (.clk, .rst_n, .req_valid(dram_req_valid), .req_ready(dram_req_ready),
    .req_we(dram_req_we), .req_addr(dram_req_addr), .req_wdata(dram_req_wdata),
    .rsp_valid(dram_rsp_valid), .rsp_rdata(dram_rsp_rdata));

  initial begin
    repeat (300000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int n_ck = 0, n_cfx = 0, n_keep = 0, dram_words = 0;
  int n_op [5] = '{0, 0, 0, 0, 0};
  int run_cycles = 0;
  always @(posedge clk) if (rst_n) begin
    if (u_dut.rd_en) run_cycles++;
    if (dram_req_valid && dram_req_ready) dram_words++;
  end

  // ---------------- instruction helpers ----------------
  task automatic issue(input logic [31:0] i);
    @(negedge clk); instr_valid = 1; instr = i;
    @(posedge clk); while (!instr_ready) @(posedge clk);
    @(negedge clk); instr_valid = 0;
  endtask
  task automatic set(input int r, input int v);
    issue({OP_SET, 6'(r), 22'(v)});
  endtask
  task automatic dma(input space_e s, input space_e d, input int src, input int dst, input int len);
    set(R_DMA_SRC, src); set(R_DMA_DST, dst); set(R_DMA_LEN, len);
    issue({OP_DMA, 24'd0, d, s});
  endtask
  task automatic wait_all();
    issue({OP_WAIT, 26'd0, 2'b11});
  endtask
  task automatic compute(input bit cfx, input bit clr, input bit drain, input ppop_e op, input space_e sp,
                         input int expect_cycles);
    int c0;
    wait_all();
    c0 = run_cycles;
    issue({OP_COMPUTE, 20'd0, sp, op, drain, clr, cfx});
    if (cfx) n_cfx++; else n_ck++;
    if (!clr) n_keep++;
    n_op[op]++;
    // compute phase length
    @(posedge clk); while (u_dut.u_ctrl.st_q != 2'd0 && u_dut.u_ctrl.st_q != 2'd3) @(posedge clk);
    checks++; if (run_cycles - c0 != expect_cycles) begin
      failures++; $display("compute took %0d read cycles, expected %0d", run_cycles - c0, expect_cycles); end
  endtask
  task automatic layer(input int ox, oy, kt, ct, fx, fy, s, ib, ixs, iys, wb, rfb, wba, nch, qm, qs, gt, sm);
    set(R_OX, ox); set(R_OY, oy); set(R_KT, kt); set(R_CT, ct); set(R_FX, fx); set(R_FY, fy);
    set(R_STRIDE, s); set(R_IN_BASE, ib); set(R_IN_XSTR, ixs); set(R_IN_YSTR, iys); set(R_W_BASE, wb);
    set(R_RF_BASE, rfb); set(R_WB_ADDR, wba); set(R_NCH, nch); set(R_QMUL, qm); set(R_QSHIFT, qs);
    set(R_GELU_T, gt); set(R_SM_MUL, sm);
  endtask

  // ---------------- reference arithmetic ----------------
  function automatic int s8(input longint v);
    return (v > 127) ? 127 : (v < -128) ? -128 : int'(v);
  endfunction
  function automatic int rq(input longint v, input longint m, input int sh);
    longint p; p = v * m;
    if (sh != 0) p += longint'(1) <<< (sh - 1);
    return s8(p >>> sh);
  endfunction
  function automatic longint gelu(input longint x, input int t);
    longint g; g = x + (longint'(1) <<< (t - 1));
    if (g < 0) g = 0; if (g > (longint'(1) <<< t)) g = longint'(1) <<< t;
    return (x * g) >>> t;
  endfunction
  function automatic longint isqrt(input longint v);
    longint s; s = longint'($floor($sqrt(real'(v))));
    while (s > 0 && s * s > v) s--;
    while ((s + 1) * (s + 1) <= v) s++;
    return s;
  endfunction
  // LayerNorm / SoftMax of one pixel in place (n valid channels of acc[0..nt-1])
  task automatic ln_ref(ref longint acc [64], input int n, input int qs, ref int y [64]);
    longint sum, mean, sq, sd, inv;
    sum = 0; sq = 0;
    for (int i = 0; i < n; i++) sum += acc[i];
    mean = sum / n;
    for (int i = 0; i < n; i++) sq += (acc[i] - mean) * (acc[i] - mean);
    sd = isqrt(sq / n); if (sd == 0) sd = 1; inv = (longint'(1) << 40) / sd;
    for (int i = 0; i < 64; i++) y[i] = (i < n) ? s8(((acc[i] - mean) * inv + (longint'(1) <<< (qs - 1))) >>> qs) : 0;
  endtask
  task automatic sm_ref(ref longint acc [64], input int n, input int sm, ref int y [64]);
    longint mx, esum, e [64];
    mx = acc[0]; esum = 0;
    for (int i = 1; i < n; i++) if (acc[i] > mx) mx = acc[i];
    for (int i = 0; i < n; i++) begin
      longint d, di, df;
      d = (mx - acc[i]) * sm; di = d >>> 8; df = d & 255;
      e[i] = (di >= 17) ? 0 : ((65536 - df * 128) >>> di);
      esum += e[i];
    end
    for (int i = 0; i < 64; i++) y[i] = (i < n) ? s8((e[i] * ((longint'(1) << 31) / esum)) >>> 24) : 0;
  endtask

  function automatic logic [7:0] dbyte(input int addr, input int b);
    logic [127:0] w; w = u_dram.mem[addr];
    return w[b*8 +: 8];
  endfunction
  task automatic put(input int addr, input int b, input int v);
    logic [127:0] w; w = u_dram.mem[addr]; w[b*8 +: 8] = 8'(v); u_dram.mem[addr] = w;
  endtask
  task automatic check_byte(input int addr, input int b, input int e, input string what);
    checks++;
    if (int'($signed(dbyte(addr, b))) != e) begin
      failures++;
      if (failures < 20) $display("%s: DRAM[%0d] byte %0d = %0d, expected %0d", what, addr, b, $signed(dbyte(addr, b)), e);
    end
  endtask
  function automatic int rnd(input int lo, input int hi);
    return lo + int'($urandom % (hi - lo + 1));
  endfunction

  // ---------------- data ----------------
  localparam int C = 48, E = 192, K = 7, P = 4, IX = P + K - 1;
  int xin [IX][IX][C], wdw [C][K][K], wa [E][C], wbk [C][E];

  initial begin
    int d_in, d_w, d_all, e, n_sat, n_zero;
    for (int i = 0; i < 8192; i++) u_dram.mem[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    // input tile (zero border of 3), x-major, 3 channel tiles per pixel
    for (int x = 0; x < IX; x++) for (int y = 0; y < IX; y++) for (int c = 0; c < C; c++) begin
      xin[x][y][c] = (x < 3 || y < 3 || x >= IX - 3 || y >= IX - 3) ? 0 : rnd(-128, 127);
      put((x*IX + y)*3 + c/16, c%16, xin[x][y][c]);
    end
    for (int c = 0; c < C; c++) for (int fx = 0; fx < K; fx++) for (int fy = 0; fy < K; fy++) wdw[c][fx][fy] = rnd(-128, 127);
    for (int t = 0; t < E; t++) for (int c = 0; c < C; c++) wa[t][c] = rnd(-32, 32);
    for (int k = 0; k < C; k++) for (int t = 0; t < E; t++) wbk[k][t] = rnd(-32, 32);
    // weight memory of PE row r: [0,21) depthwise, [21,57) PW1, [57,93) PW2
    for (int r = 0; r < 16; r++) begin
      int base; base = 1024 + r*128;
      for (int ct = 0; ct < 3; ct++) for (int fy = 0; fy < K; fy++) for (int j = 0; j < 16; j++)
        put(base + ct*K + fy, j, (j >= 16 - K) ? wdw[ct*16+r][j-(16-K)][fy] : 0);
      for (int l = 0; l < 4; l++) for (int kt = 0; kt < 3; kt++) for (int ct = 0; ct < 3; ct++) for (int k = 0; k < 16; k++) begin
        put(base + 21 + l*9 + kt*3 + ct, k, wa[l*48 + kt*16 + k][ct*16 + r]);
        put(base + 57 + l*9 + kt*3 + ct, k, wbk[kt*16 + k][l*48 + ct*16 + r]);
      end
    end
    d_w = dram_words;
    for (int r = 0; r < 16; r++) dma(SP_DRAM, SP_WSRAM, 1024 + r*128, (r << 10), 93);
    dma(SP_DRAM, SP_ISRAM, 0, 0, IX*IX*3);
    wait_all();
    d_in = dram_words - d_w;

    // depthwise 7x7, C|FX, LayerNorm over 48 channels, result into the input SRAM
    layer(P, P, 1, 3, K, K, 1, 0, IX*3, 3, 0, 0, 300, C, 1, 35, 4, 0);
    compute(1, 1, 1, PP_LNORM, SP_ISRAM, P*3*K*(P+K-1));
    // fused inverted bottleneck, four intermediate tiles of 48 channels
    for (int l = 0; l < 4; l++) begin
      layer(P, P, 3, 3, 1, 1, 1, 300, P*3, 3, 21 + l*9, 0, 400, C, 1, 7, 12, 0);
      compute(0, 1, 1, PP_GELU, SP_ISRAM, P*P*3*3);
      layer(P, P, 3, 3, 1, 1, 1, 400, P*3, 3, 57 + l*9, 64, 4096, C, 1, 7, 12, 0);
      compute(0, l == 0, l == 3, PP_QUANT, SP_DRAM, P*P*3*3);
    end
    wait_all();
    d_all = dram_words - d_w;
    $display("DRAM words: weights+input %0d, total %0d (intermediate tensor would be %0d words each way)",
             d_in, d_all, P*P*E/16);
    checks++; if (d_all != d_in + P*P*3) begin failures++; $display("unexpected DRAM traffic"); end

    // reference (the data must not be trivially saturated or zero)
    n_sat = 0; n_zero = 0;
    for (int x = 0; x < P; x++) for (int y = 0; y < P; y++) begin
      longint acc [64]; int yv [64]; int tq [E];
      for (int c = 0; c < 64; c++) acc[c] = 0;
      for (int c = 0; c < C; c++)
        for (int fx = 0; fx < K; fx++) for (int fy = 0; fy < K; fy++) acc[c] += wdw[c][fx][fy] * xin[x+fx][y+fy][c];
      ln_ref(acc, C, 35, yv);
      for (int t = 0; t < E; t++) begin
        longint a; a = 0;
        for (int c = 0; c < C; c++) a += yv[c] * wa[t][c];
        tq[t] = rq(gelu(a, 12), 1, 7);
      end
      for (int k = 0; k < C; k++) begin
        longint o; o = 0;
        for (int t = 0; t < E; t++) o += tq[t] * wbk[k][t];
        e = rq(o, 1, 7);
        if (e == 127 || e == -128) n_sat++;
        if (e == 0) n_zero++;
        check_byte(4096 + (x*P + y)*3 + k/16, k%16, e, "block");
      end
    end

    $display("outputs saturated %0d, zero %0d of %0d", n_sat, n_zero, P*P*C);
    checks++; if (n_sat > P*P*C/4 || n_zero > P*P*C/4) failures++;
    $display("C|K=%0d C|FX=%0d keep=%0d ln=%0d gelu=%0d", n_ck, n_cfx, n_keep, n_op[PP_LNORM], n_op[PP_GELU]);
    checks++; if (n_cfx != 1 || n_ck != 8 || n_keep != 3) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
