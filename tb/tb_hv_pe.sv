// tb_hv_pe: self-checking test of one PE. Loads random signed weights, then for
// random addresses, activations and partial sums checks the product used by the
// C|K adder tree and the registered sum prev + x*w of the C|FX row chain, with the
// weight read one cycle ahead of the activation. Also checks that psum holds in
// C|K mode and when acc_en is low.
module tb_hv_pe;
  import hv_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  mode_e mode = MODE_CK;
  data_t x = '0, w_wdata = '0;
  logic  w_we = 0, w_re = 0, acc_en = 0;
  logic [9:0] w_waddr = 0, w_raddr = 0;
  acc_t prev = '0, prod, psum;
  data_t wref [1024];

  hv_pe dut (.clk, .rst_n, .mode, .x, .w_we, .w_waddr, .w_wdata, .w_re, .w_raddr,
             .acc_en, .prev, .prod, .psum);

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int a = 0; a < 1024; a++) begin
      @(negedge clk); w_we = 1; w_waddr = 10'(a); w_wdata = data_t'($urandom); wref[a] = w_wdata;
    end
    @(negedge clk); w_we = 0;
    for (int i = 0; i < 2000; i++) begin
      logic [9:0] a; acc_t p_before; longint exp_prod;
      a = 10'($urandom);
      mode = (i % 3 == 0) ? MODE_CK : MODE_CFX;
      // cycle t: weight read
      @(negedge clk); w_re = 1; w_raddr = a; acc_en = 0;
      // cycle t+1: activation
      @(negedge clk); w_re = 0; x = data_t'($urandom); prev = acc_t'($urandom % 200000) - 100000;
      acc_en = (i % 5 != 0);
      #1;
      exp_prod = longint'(x) * longint'(wref[a]);
      checks++; if (longint'(prod) != exp_prod) begin failures++; $display("prod %0d vs %0d", prod, exp_prod); end
      p_before = psum;
      @(posedge clk); #1;
      checks++;
      if (mode == MODE_CFX && acc_en) begin
        if (longint'(psum) != longint'(prev) + exp_prod) begin failures++; $display("psum %0d", psum); end
      end else if (psum !== p_before) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
