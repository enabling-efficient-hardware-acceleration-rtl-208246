// tb_hv_line_buffer: self-checking test of the line buffer: random beats written
// to random entries, read back on the combinational port against a reference.
module tb_hv_line_buffer;
  import hv_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic we = 0;
  logic [3:0] waddr = 0, raddr = 0;
  acc_t [15:0] wdata = '0, rdata;
  acc_t [15:0] R [16];

  hv_line_buffer dut (.clk, .we, .waddr, .wdata, .raddr, .rdata);

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      we = 1; waddr = (i < 16) ? 4'(i) : 4'($urandom);
      for (int l = 0; l < 16; l++) wdata[l] = acc_t'($urandom);
      @(posedge clk); #1 we = 0; R[waddr] = wdata;
      if (i >= 16) begin
        raddr = 4'($urandom); #1;
        checks++; if (rdata !== R[raddr]) begin failures++; $display("mismatch %0d", raddr); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
