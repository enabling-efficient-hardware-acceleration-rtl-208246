// tb_hv_global_sram: self-checking test of hv_global_sram. Writes random words to random addresses,
// keeps a reference copy, reads them back and checks both the data and the
// one-cycle read latency (data must not appear in the cycle of the request).
module tb_hv_global_sram;
  localparam int unsigned DEPTH = 32768;
  localparam int unsigned WIDTH = 128;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [WIDTH-1:0] ref_mem [DEPTH];
  logic             valid [DEPTH];
  logic en = 0, we = 0;
  logic [14:0] addr = 0;
  logic [127:0] wdata = 0, rdata;
  hv_global_sram dut (.clk, .en, .we, .addr, .wdata, .rdata);
  initial begin
    repeat (40000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int i = 0; i < DEPTH; i++) valid[i] = 0;
    @(posedge clk);
    for (int i = 0; i < 4000; i++) begin
      logic [14:0] a; logic [127:0] d;
      a = (i % 3 == 0) ? 15'(i) : 15'($urandom); d = {$urandom, $urandom, $urandom, $urandom};
      @(negedge clk); en = 1; we = 1; addr = a; wdata = d;
      @(posedge clk); #1 en = 0; we = 0; ref_mem[a] = d; valid[a] = 1;
      a = (i % 2) ? a : 15'($urandom % 4000);
      if (valid[a]) begin
        @(negedge clk); en = 1; we = 0; addr = a;
        @(posedge clk); #1 en = 0;
        checks++; if (rdata !== ref_mem[a]) begin failures++; $display("mismatch at %0d", a); end
        // a write must not disturb the read register
        @(negedge clk); en = 1; we = 1; addr = a ^ 15'h1; wdata = ~ref_mem[a];
        @(posedge clk); #1 en = 0; we = 0; ref_mem[a ^ 15'h1] = ~ref_mem[a]; valid[a ^ 15'h1] = 1;
        checks++; if (rdata !== ref_mem[a]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
