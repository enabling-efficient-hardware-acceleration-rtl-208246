// tb_hv_accel: end-to-end test of the whole accelerator at its default size
// (16x16 PEs, full memories), driven only through the 32-bit instruction stream
// and a behavioural DRAM. Four programs run one after the other:
//   1. pointwise convolution 32->32 channels on 4x4 pixels, C|K, ReLU + requant,
//      result to global SRAM while a DMA into global SRAM runs at the same time
//      (bus contention), then DMA to DRAM;
//   2. 3x3 depthwise convolution on 32 channels (6x6 padded input), C|FX, fused
//      LayerNorm over the 32 channels, again with a concurrent DMA;
//   3. inverted-bottleneck layer fusion: PW 16->64 with GELU, the intermediate
//      tile of 32 channels written straight into the input SRAM and used at once
//      by PW 64->16, whose partial sums stay in the output RF across the two
//      intermediate tiles (clear only on the first, drain only on the last);
//   4. 2x2 stride-2 convolution 16->48 channels with SoftMax over 40 channels,
//      written straight to DRAM.
// Every result word is compared with a reference computed here from the layer
// definitions. The compute phase of each COMPUTE must take exactly one cycle per
// issued read (256 MACs per cycle in C|K). Each mechanism (both dataflows, every
// post-processing op, bus contention, writeback back-pressure, DRAM back-pressure,
// partial sums kept across instructions, writeback to each space) is counted and
// must occur at least once.
module tb_hv_accel;
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
    repeat (400000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // ---------------- mechanism counters ----------------
  int n_ck = 0, n_cfx = 0, n_contention = 0, n_wb_stall = 0, n_dram_busy = 0, n_keep = 0;
  int n_op [5] = '{0, 0, 0, 0, 0};
  int n_wb_space [4] = '{0, 0, 0, 0};
  int run_cycles = 0;
  always @(posedge clk) if (rst_n) begin
    if (u_dut.u_bus.contention) n_contention++;
    if (u_dut.wb_in_valid && !u_dut.wb_in_ready) n_wb_stall++;
    if (dram_req_valid && !dram_req_ready) n_dram_busy++;
    if (u_dut.rd_en) run_cycles++;
    if (u_dut.wbb_valid && u_dut.wbb_ready) n_wb_space[u_dut.wbb_req.space]++;
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
  int in1 [16][32], w1 [32][32];
  int in2 [6][6][32], w2 [32][3][3];
  int in3 [4][16], wa [64][16], wbk [16][64];
  int in4 [4][4][16], w4 [48][16][2][2];

  initial begin
    for (int i = 0; i < 8192; i++) u_dram.mem[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    // ======== 1. pointwise C|K, ReLU ========
    for (int p = 0; p < 16; p++) for (int c = 0; c < 32; c++) begin in1[p][c] = rnd(-128, 127); put(p*2 + c/16, c%16, in1[p][c]); end
    for (int k = 0; k < 32; k++) for (int c = 0; c < 32; c++) w1[k][c] = rnd(-128, 127);
    for (int r = 0; r < 16; r++) for (int kt = 0; kt < 2; kt++) for (int ct = 0; ct < 2; ct++)
      for (int k = 0; k < 16; k++) put(1024 + r*64 + kt*2 + ct, k, w1[kt*16+k][ct*16+r]);
    for (int r = 0; r < 16; r++) dma(SP_DRAM, SP_WSRAM, 1024 + r*64, (r << 10), 4);
    dma(SP_DRAM, SP_ISRAM, 0, 0, 32);
    layer(4, 4, 2, 2, 1, 1, 1, 0, 8, 2, 0, 0, 100, 32, 3, 10, 4, 0);
    for (int i = 0; i < 64; i++) u_dram.mem[6000 + i] = {$urandom, $urandom, $urandom, $urandom};
    compute(0, 1, 1, PP_RELU, SP_GSRAM, 4*4*2*2);
    dma(SP_DRAM, SP_GSRAM, 6000, 1100, 64);      // competes with the writeback for global SRAM
    wait_all();
    dma(SP_GSRAM, SP_DRAM, 1100, 7100, 64);
    wait_all();
    for (int i = 0; i < 64; i++) begin
      checks++; if (u_dram.mem[7100 + i] !== u_dram.mem[6000 + i]) failures++;
    end
    dma(SP_GSRAM, SP_DRAM, 100, 4096, 32);
    wait_all();
    for (int p = 0; p < 16; p++) for (int k = 0; k < 32; k++) begin
      longint a; a = 0;
      for (int c = 0; c < 32; c++) a += in1[p][c] * w1[k][c];
      check_byte(4096 + p*2 + k/16, k%16, rq(a < 0 ? 0 : a, 3, 10), "pw-relu");
    end

    // ======== 2. depthwise 3x3 C|FX + LayerNorm, concurrent DMA ========
    for (int x = 0; x < 6; x++) for (int y = 0; y < 6; y++) for (int c = 0; c < 32; c++) begin
      in2[x][y][c] = (x == 0 || y == 0 || x == 5 || y == 5) ? 0 : rnd(-128, 127);
      put(256 + (x*6 + y)*2 + c/16, c%16, in2[x][y][c]);
    end
    for (int c = 0; c < 32; c++) for (int fx = 0; fx < 3; fx++) for (int fy = 0; fy < 3; fy++) w2[c][fx][fy] = rnd(-128, 127);
    for (int r = 0; r < 16; r++) for (int ct = 0; ct < 2; ct++) for (int fy = 0; fy < 3; fy++)
      for (int j = 0; j < 16; j++) put(2048 + r*8 + ct*3 + fy, j, (j >= 13) ? w2[ct*16+r][j-13][fy] : 0);
    for (int r = 0; r < 16; r++) dma(SP_DRAM, SP_WSRAM, 2048 + r*8, (r << 10) | 16, 6);
    dma(SP_DRAM, SP_ISRAM, 256, 64, 72);
    layer(4, 4, 1, 2, 3, 3, 1, 64, 12, 2, 16, 0, 200, 32, 1, 35, 4, 0);
    compute(1, 1, 1, PP_LNORM, SP_GSRAM, 4*2*3*6);
    dma(SP_DRAM, SP_GSRAM, 6000, 1000, 64);      // runs while the writeback drains
    wait_all();
    dma(SP_GSRAM, SP_DRAM, 200, 5000, 32);
    dma(SP_GSRAM, SP_DRAM, 1000, 7000, 64);
    wait_all();
    for (int i = 0; i < 64; i++) begin
      checks++; if (u_dram.mem[7000 + i] !== u_dram.mem[6000 + i]) failures++;
    end
    for (int x = 0; x < 4; x++) for (int y = 0; y < 4; y++) begin
      longint acc [64]; int yv [64];
      for (int c = 0; c < 64; c++) acc[c] = 0;
      for (int c = 0; c < 32; c++)
        for (int fx = 0; fx < 3; fx++) for (int fy = 0; fy < 3; fy++) acc[c] += w2[c][fx][fy] * in2[x+fx][y+fy][c];
      ln_ref(acc, 32, 35, yv);
      for (int c = 0; c < 32; c++) check_byte(5000 + (x*4 + y)*2 + c/16, c%16, yv[c], "dw-ln");
    end

    // ======== 3. inverted-bottleneck fusion: PW 16->64, GELU, PW 64->16 ========
    for (int p = 0; p < 4; p++) for (int c = 0; c < 16; c++) begin in3[p][c] = rnd(-64, 64); put(600 + p, c, in3[p][c]); end
    for (int t = 0; t < 64; t++) for (int c = 0; c < 16; c++) wa[t][c] = rnd(-64, 64);
    for (int k = 0; k < 16; k++) for (int t = 0; t < 64; t++) wbk[k][t] = rnd(-64, 64);
    for (int r = 0; r < 16; r++) for (int l = 0; l < 2; l++) for (int j = 0; j < 2; j++) for (int k = 0; k < 16; k++) begin
      put(3072 + r*16 + l*2 + j, k, wa[l*32 + j*16 + k][r]);            // addr 40 + l*2 + kt
      put(3072 + r*16 + 8 + l*2 + j, k, wbk[k][l*32 + j*16 + r]);      // addr 48 + l*2 + ct
    end
    for (int r = 0; r < 16; r++) dma(SP_DRAM, SP_WSRAM, 3072 + r*16, (r << 10) | 40, 12);
    dma(SP_DRAM, SP_ISRAM, 600, 300, 4);
    for (int l = 0; l < 2; l++) begin
      layer(2, 2, 2, 1, 1, 1, 1, 300, 2, 1, 40 + l*2, 0, 320 + l*8, 32, 1, 6, 8, 0);
      compute(0, 1, 1, PP_GELU, SP_ISRAM, 2*2*2*1);
      layer(2, 2, 1, 2, 1, 1, 1, 320 + l*8, 4, 2, 48 + l*2, 64, 300, 16, 1, 7, 8, 0);
      compute(0, l == 0, l == 1, PP_QUANT, SP_GSRAM, 2*2*1*2);
    end
    wait_all();
    dma(SP_GSRAM, SP_DRAM, 300, 5200, 4);
    wait_all();
    for (int p = 0; p < 4; p++) begin
      int tq [64];
      for (int t = 0; t < 64; t++) begin
        longint a; a = 0;
        for (int c = 0; c < 16; c++) a += in3[p][c] * wa[t][c];
        tq[t] = rq(gelu(a, 8), 1, 6);
      end
      for (int k = 0; k < 16; k++) begin
        longint o; o = 0;
        for (int t = 0; t < 64; t++) o += tq[t] * wbk[k][t];
        check_byte(5200 + p, k, rq(o, 1, 7), "fusion");
      end
    end

    // ======== 4. 2x2 stride-2 conv 16->48, SoftMax over 40, to DRAM ========
    for (int x = 0; x < 4; x++) for (int y = 0; y < 4; y++) for (int c = 0; c < 16; c++) begin
      in4[x][y][c] = rnd(-8, 8); put(512 + x*4 + y, c, in4[x][y][c]); end
    for (int k = 0; k < 48; k++) for (int c = 0; c < 16; c++) for (int fx = 0; fx < 2; fx++) for (int fy = 0; fy < 2; fy++)
      w4[k][c][fx][fy] = rnd(-8, 8);
    for (int r = 0; r < 16; r++) for (int kt = 0; kt < 3; kt++) for (int fx = 0; fx < 2; fx++) for (int fy = 0; fy < 2; fy++)
      for (int k = 0; k < 16; k++) put(3584 + r*16 + (kt*2 + fx)*2 + fy, k, w4[kt*16+k][r][fx][fy]);
    for (int r = 0; r < 16; r++) dma(SP_DRAM, SP_WSRAM, 3584 + r*16, (r << 10) | 60, 12);
    dma(SP_DRAM, SP_ISRAM, 512, 400, 16);
    layer(2, 2, 3, 1, 2, 2, 2, 400, 4, 1, 60, 0, 5300, 40, 1, 0, 8, 64);
    compute(0, 1, 1, PP_SMAX, SP_DRAM, 2*2*3*2*2);
    wait_all();
    for (int x = 0; x < 2; x++) for (int y = 0; y < 2; y++) begin
      longint acc [64]; int yv [64];
      for (int k = 0; k < 64; k++) acc[k] = 0;
      for (int k = 0; k < 48; k++)
        for (int c = 0; c < 16; c++) for (int fx = 0; fx < 2; fx++) for (int fy = 0; fy < 2; fy++)
          acc[k] += w4[k][c][fx][fy] * in4[2*x+fx][2*y+fy][c];
      sm_ref(acc, 40, 64, yv);
      for (int k = 0; k < 48; k++) check_byte(5300 + (x*2 + y)*3 + k/16, k%16, yv[k], "conv-sm");
    end

    // ======== mechanisms ========
    $display("C|K=%0d C|FX=%0d contention=%0d wb_stall=%0d dram_busy=%0d keep=%0d wb_to_isram=%0d wb_to_dram=%0d",
             n_ck, n_cfx, n_contention, n_wb_stall, n_dram_busy, n_keep, n_wb_space[SP_ISRAM], n_wb_space[SP_DRAM]);
    $display("ops quant=%0d relu=%0d gelu=%0d ln=%0d sm=%0d", n_op[0], n_op[1], n_op[2], n_op[3], n_op[4]);
    checks++; if (n_ck == 0) failures++;
    checks++; if (n_cfx == 0) failures++;
    checks++; if (n_contention == 0) begin failures++; $display("no bus contention"); end
    checks++; if (n_wb_stall == 0) begin failures++; $display("no writeback stall"); end
    checks++; if (n_dram_busy == 0) failures++;
    checks++; if (n_keep == 0) failures++;
    checks++; if (n_wb_space[SP_ISRAM] == 0 || n_wb_space[SP_DRAM] == 0 || n_wb_space[SP_GSRAM] == 0) failures++;
    for (int o = 0; o < 5; o++) begin checks++; if (n_op[o] == 0) failures++; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
