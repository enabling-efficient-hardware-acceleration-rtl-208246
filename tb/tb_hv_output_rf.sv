// tb_hv_output_rf: self-checking test of the output register file. Random
// overwrite (acc_first) and accumulate operations on random entries are mirrored
// in a reference array; every entry touched is read back on the combinational
// drain port and compared, lane by lane.
module tb_hv_output_rf;
  import hv_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic acc_en = 0, acc_first = 0;
  logic [8:0] acc_addr = 0, raddr = 0;
  acc_t [15:0] acc_data = '0, rdata;
  acc_t [15:0] R [384];
  bit          init [384];

  hv_output_rf dut (.clk, .acc_en, .acc_first, .acc_addr, .acc_data, .raddr, .rdata);

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int i = 0; i < 384; i++) init[i] = 0;
    for (int i = 0; i < 6000; i++) begin
      int a;
      a = (i < 384) ? i : int'($urandom % 384);
      @(negedge clk);
      acc_en = 1; acc_addr = 9'(a); acc_first = !init[a] || ($urandom % 8 == 0);
      for (int l = 0; l < 16; l++) acc_data[l] = acc_t'($urandom);
      for (int l = 0; l < 16; l++) R[a][l] = acc_first ? acc_data[l] : R[a][l] + acc_data[l];
      init[a] = 1;
      raddr = 9'($urandom % 384);
      #1;
      if (init[raddr] && raddr != 9'(a)) begin
        checks++; if (rdata !== R[raddr]) begin failures++; $display("mismatch entry %0d", raddr); end
      end
      @(posedge clk); #1 acc_en = 0; raddr = 9'(a);
      #1 checks++; if (rdata !== R[a]) begin failures++; $display("mismatch after write %0d", a); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
