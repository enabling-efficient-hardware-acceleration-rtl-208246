// tb_hv_attention: the attention core of a transformer block of a hybrid
// network, run on the accelerator at its default size through the instruction
// stream. 16 tokens (a 4x4-pixel tile) with 48 channels:
//   1. V = X * Wv, a pointwise layer (C|K), requantised into the global SRAM;
//   2. S = SoftMax(Q * K^T) over the 16 tokens, C|K with the SoftMax fused into
//      the writeback, written straight into the input SRAM (one word of 16
//      probabilities per query token);
//   3. V is moved by the DMA from the global SRAM into the weight memories
//      (token j's words to PE row j), with no help from outside;
//   4. O = S * V, C|K, written to DRAM.
// K^T is prepared outside the accelerator: the weight word of PE row c must hold
// channel c of 16 tokens, a layout the writeback does not produce. Every output
// byte is compared with a reference computed with the same integer arithmetic,
// and every COMPUTE must take exactly one cycle per issued read.
module tb_hv_attention;
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
    repeat (200000) @(posedge clk);
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
  localparam int N = 16, C = 48;
  int xv [N][C], q [N][C], kk [N][C], wv [C][C];

  initial begin
    int e, n_sat, n_zero;
    for (int i = 0; i < 8192; i++) u_dram.mem[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    for (int p = 0; p < N; p++) for (int c = 0; c < C; c++) begin
      xv[p][c] = rnd(-64, 64); put(p*3 + c/16, c%16, xv[p][c]);
      q[p][c]  = rnd(-8, 8);   put(100 + p*3 + c/16, c%16, q[p][c]);
      kk[p][c] = rnd(-8, 8);
    end
    for (int k = 0; k < C; k++) for (int c = 0; c < C; c++) wv[k][c] = rnd(-32, 32);
    // weight memory of PE row r: [0,9) Wv, [20,23) K^T (token j in column j)
    for (int r = 0; r < 16; r++) begin
      for (int kt = 0; kt < 3; kt++) for (int ct = 0; ct < 3; ct++) for (int k = 0; k < 16; k++)
        put(1024 + r*64 + kt*3 + ct, k, wv[kt*16 + k][ct*16 + r]);
      for (int ct = 0; ct < 3; ct++) for (int j = 0; j < 16; j++)
        put(1024 + r*64 + 20 + ct, j, kk[j][ct*16 + r]);
    end
    for (int r = 0; r < 16; r++) dma(SP_DRAM, SP_WSRAM, 1024 + r*64, (r << 10), 23);
    dma(SP_DRAM, SP_ISRAM, 0, 0, N*3);
    dma(SP_DRAM, SP_ISRAM, 100, 100, N*3);

    // 1. V = X * Wv -> global SRAM 2000
    layer(4, 4, 3, 3, 1, 1, 1, 0, 12, 3, 0, 0, 2000, C, 1, 6, 4, 0);
    compute(0, 1, 1, PP_QUANT, SP_GSRAM, N*3*3);
    // 2. S = SoftMax(Q K^T) -> input SRAM 200
    layer(4, 4, 1, 3, 1, 1, 1, 100, 12, 3, 20, 0, 200, N, 1, 0, 4, 4);
    compute(0, 1, 1, PP_SMAX, SP_ISRAM, N*1*3);
    // 3. V into the weight memories: token j -> PE row j, addresses 30..32
    wait_all();
    for (int j = 0; j < N; j++) dma(SP_GSRAM, SP_WSRAM, 2000 + j*3, (j << 10) | 30, 3);
    // 4. O = S V -> DRAM 4096
    layer(4, 4, 3, 1, 1, 1, 1, 200, 4, 1, 30, 0, 4096, C, 1, 7, 4, 0);
    compute(0, 1, 1, PP_QUANT, SP_DRAM, N*3*1);
    wait_all();

    // reference
    n_sat = 0; n_zero = 0;
    begin
      int vq [N][C], pr [N][64];
      for (int p = 0; p < N; p++) for (int k = 0; k < C; k++) begin
        longint a; a = 0;
        for (int c = 0; c < C; c++) a += xv[p][c] * wv[k][c];
        vq[p][k] = rq(a, 1, 6);
      end
      for (int i = 0; i < N; i++) begin
        longint acc [64]; int yv [64];
        for (int j = 0; j < 64; j++) acc[j] = 0;
        for (int j = 0; j < N; j++) for (int c = 0; c < C; c++) acc[j] += q[i][c] * kk[j][c];
        sm_ref(acc, N, 4, yv);
        for (int j = 0; j < N; j++) pr[i][j] = yv[j];
      end
      for (int i = 0; i < N; i++) for (int k = 0; k < C; k++) begin
        longint o; o = 0;
        for (int j = 0; j < N; j++) o += pr[i][j] * vq[j][k];
        e = rq(o, 1, 7);
        if (e == 127 || e == -128) n_sat++;
        if (e == 0) n_zero++;
        check_byte(4096 + i*3 + k/16, k%16, e, "attention");
      end
    end
    $display("outputs saturated %0d, zero %0d of %0d", n_sat, n_zero, N*C);
    checks++; if (n_sat > N*C/4 || n_zero > N*C/4) failures++;
    $display("C|K=%0d softmax=%0d", n_ck, n_op[PP_SMAX]);
    checks++; if (n_ck != 3 || n_op[PP_SMAX] != 1) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
