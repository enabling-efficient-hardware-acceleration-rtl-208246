// tb_hv_pe_array: self-checking test of the 16x16 array in both dataflows.
// C|K: random weights w[k][c] (PE row c, column k) and random input vectors; each
// column output must equal sum_c x[c]*w[k][c], two cycles after the read address.
// C|FX: each row c holds an FX-tap kernel in columns 16-FX..15 (zeros elsewhere);
// a stream x[c][n] enters row c one value per cycle and row c's output two cycles
// later must be the 1-D convolution sum_f w[c][f]*x[c][n-FX+1+f] (for n >= FX-1).
// A second array built without depthwise support (DW_SUPPORT = 0) gets the same
// stimulus and must give the C|K sums in both modes.
module tb_hv_pe_array;
  import hv_pkg::*;
  localparam int N = 16;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  mode_e mode = MODE_CK;
  data_t [N-1:0] x = '0, w_wdata = '0;
  logic w_we = 0, w_re = 0, acc_en = 0;
  logic [3:0] w_row = 0;
  logic [9:0] w_waddr = 0, w_raddr = 0;
  acc_t [N-1:0] out, out_ck;
  data_t W [4][N][N];          // [addr][row][col]
  data_t xs [64][N];
  int    fx_taps;

  hv_pe_array dut (.clk, .rst_n, .mode, .x, .w_we, .w_row, .w_waddr, .w_wdata, .w_re,
                   .w_raddr, .acc_en, .out);
  hv_pe_array #(.DW_SUPPORT(1'b0)) dut_ck (.clk, .rst_n, .mode, .x, .w_we, .w_row, .w_waddr, .w_wdata, .w_re,
                   .w_raddr, .acc_en, .out(out_ck));

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic load_weights(input bit depthwise);
    for (int a = 0; a < 4; a++)
      for (int r = 0; r < N; r++) begin
        @(negedge clk); w_we = 1; w_row = 4'(r); w_waddr = 10'(a);
        for (int c = 0; c < N; c++) begin
          W[a][r][c] = (depthwise && c < N - fx_taps) ? data_t'(0) : data_t'($urandom);
          w_wdata[c] = W[a][r][c];
        end
      end
    @(negedge clk); w_we = 0;
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    // ---------------- C|K ----------------
    load_weights(0);
    mode = MODE_CK;
    for (int i = 0; i < 200; i++) begin
      int a; data_t xv [N];
      a = i % 4;
      @(negedge clk); w_re = 1; w_raddr = 10'(a);
      @(negedge clk); w_re = 0;
      for (int r = 0; r < N; r++) begin xv[r] = data_t'($urandom); x[r] = xv[r]; end
      @(negedge clk);                           // cycle t+2: out valid
      for (int k = 0; k < N; k++) begin
        longint s; s = 0;
        for (int c = 0; c < N; c++) s += longint'(xv[c]) * longint'(W[a][c][k]);
        checks++; if (longint'(out[k]) != s) begin failures++; $display("CK k=%0d %0d vs %0d", k, out[k], s); end
        checks++; if (longint'(out_ck[k]) != s) begin failures++; $display("CK-only k=%0d %0d vs %0d", k, out_ck[k], s); end
      end
    end
    // ---------------- C|FX ----------------
    for (int pass = 0; pass < 3; pass++) begin
      int a;
      fx_taps = (pass == 0) ? 3 : (pass == 1) ? 7 : 16;
      load_weights(1);
      mode = MODE_CFX;
      a = pass % 4;
      for (int n = 0; n < 64; n++) for (int r = 0; r < N; r++) xs[n][r] = data_t'($urandom);
      // stream: read address at cycle n, x at n+1, output at n+2
      for (int n = 0; n < 66; n++) begin
        @(negedge clk);
        w_re = (n < 64); w_raddr = 10'(a);
        acc_en = (n >= 1 && n <= 64);
        if (n >= 1 && n <= 64) for (int r = 0; r < N; r++) x[r] = xs[n-1][r];
        if (n >= 2) for (int k = 0; k < N; k++) begin
          longint s; s = 0;
          for (int c = 0; c < N; c++) s += longint'(xs[n-2][c]) * longint'(W[a][c][k]);
          checks++; if (longint'(out_ck[k]) != s) begin failures++; $display("CK-only in C|FX k=%0d %0d vs %0d", k, out_ck[k], s); end
        end
        if (n >= 2 && (n - 2) >= fx_taps - 1) begin
          for (int r = 0; r < N; r++) begin
            longint s; s = 0;
            for (int f = 0; f < fx_taps; f++)
              s += longint'(W[a][r][N-fx_taps+f]) * longint'(xs[n-2-fx_taps+1+f][r]);
            checks++; if (longint'(out[r]) != s) begin failures++; $display("CFX r=%0d n=%0d %0d vs %0d", r, n, out[r], s); end
          end
        end
      end
      @(negedge clk); w_re = 0; acc_en = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
