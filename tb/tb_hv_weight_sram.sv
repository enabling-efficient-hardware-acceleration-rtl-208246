// tb_hv_weight_sram: self-checking test of hv_weight_sram. Writes random words to random addresses,
// keeps a reference copy, reads them back and checks both the data and the
// one-cycle read latency (data must not appear in the cycle of the request).
module tb_hv_weight_sram;
  localparam int unsigned DEPTH = 1024;
  localparam int unsigned WIDTH = 8;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [WIDTH-1:0] ref_mem [DEPTH];
  logic             valid [DEPTH];
  logic we = 0, re = 0;
  logic [9:0] waddr = 0, raddr = 0;
  logic [7:0] wdata = 0, rdata;
  hv_weight_sram dut (.clk, .we, .waddr, .wdata, .re, .raddr, .rdata);
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int i = 0; i < DEPTH; i++) valid[i] = 0;
    @(posedge clk);
    for (int i = 0; i < 3000; i++) begin
      logic [9:0] a; logic [7:0] d;
      a = 10'($urandom); d = 8'($urandom);
      // write
      @(negedge clk); we = 1; waddr = a; wdata = d; re = 0;
      @(posedge clk); #1 we = 0; ref_mem[a] = d; valid[a] = 1;
      // read a random valid address and the one just written
      a = (i % 2) ? a : 10'($urandom);
      if (valid[a]) begin
        @(negedge clk); re = 1; raddr = a;
        @(posedge clk); #1 re = 0;
        checks++; if (rdata !== ref_mem[a]) begin failures++; $display("mismatch at %0d: %h vs %h", a, rdata, ref_mem[a]); end
        // hold: rdata must stay while re is low
        @(posedge clk); #1 checks++; if (rdata !== ref_mem[a]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
