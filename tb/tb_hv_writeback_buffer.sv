// tb_hv_writeback_buffer: self-checking test of the writeback buffer. Pixels of
// random length are pushed in; the bus side accepts words at random. Each bus word
// must be a write to the programmed space at consecutive addresses holding the
// requantised int8 lanes (byte l = lane l). A long bus stall must fill the queue
// and stop the input (counted), and busy must fall only after the last word left.
module tb_hv_writeback_buffer;
  import hv_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  pp_cfg_t cfg;
  logic start = 0, in_valid = 0, in_ready, in_last = 0, bus_valid, bus_ready = 0, busy;
  space_e dst_space = SP_GSRAM;
  logic [21:0] dst_addr = '0;
  acc_t [15:0] in_data = '0;
  bus_req_t bus_req;
  int stalls = 0;
  logic [127:0] expq [$];
  logic [21:0] next_addr;
  bit hold_bus = 0;

  hv_writeback_buffer dut (.clk, .rst_n, .cfg, .start, .dst_space, .dst_addr, .in_valid, .in_ready,
    .in_data, .in_last, .bus_valid, .bus_ready, .bus_req, .busy);

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // bus side
  always @(negedge clk) bus_ready <= !hold_bus && ($urandom % 3 != 0);
  always @(posedge clk) if (rst_n) begin
    if (in_valid && !in_ready) stalls++;
    if (bus_valid && bus_ready) begin
      checks++;
      if (expq.size() == 0) begin failures++; $display("unexpected word"); end
      else begin
        logic [127:0] e; e = expq.pop_front();
        if (bus_req.wdata !== e || !bus_req.we || bus_req.space != dst_space || bus_req.addr != next_addr) begin
          failures++; $display("word %0d mismatch %h vs %h", next_addr, bus_req.wdata, e);
        end
      end
      next_addr = next_addr + 1;
    end
  end

  initial begin
    cfg = '0; cfg.op = PP_QUANT; cfg.qmul = 16'sd1; cfg.qshift = '0; cfg.nch = 9'd256;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk); start = 1; dst_space = SP_DRAM; dst_addr = 22'h1234; next_addr = 22'h1234;
    @(negedge clk); start = 0;
    for (int p = 0; p < 40; p++) begin
      int nb; nb = 1 + int'($urandom % 16);
      if (p == 10) fork begin hold_bus = 1; repeat (60) @(posedge clk); hold_bus = 0; end join_none
      for (int b = 0; b < nb; b++) begin
        logic [127:0] e;
        @(negedge clk); in_valid = 1; in_last = (b == nb - 1);
        for (int l = 0; l < 16; l++) begin
          in_data[l] = acc_t'(int'($urandom % 400) - 200);
          e[l*8 +: 8] = (in_data[l] > 127) ? 8'd127 : (in_data[l] < -128) ? 8'h80 : in_data[l][7:0];
        end
        expq.push_back(e);
        @(posedge clk); while (!in_ready) @(posedge clk);
      end
      @(negedge clk); in_valid = 0; in_last = 0;
    end
    while (busy) @(posedge clk);
    repeat (2) @(posedge clk);
    checks++; if (expq.size() != 0) begin failures++; $display("%0d words missing", expq.size()); end
    checks++; if (stalls == 0) begin failures++; $display("no back-pressure stall seen"); end
    $display("stalls=%0d", stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
