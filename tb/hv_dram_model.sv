// hv_dram_model: behavioural model of the off-chip DRAM, for simulation only.
// A word array behind the accelerator's 128-bit request/response interface.
// Requests are accepted when req_ready is high, which drops at random to model a
// busy memory; a read returns its word in order 2 to 5 cycles later on rsp_valid.
// Only one read is outstanding at a time (req_ready stays low meanwhile).
module hv_dram_model #(
  parameter int unsigned WORDS = 8192
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         req_valid,
  output logic         req_ready,
  input  logic         req_we,
  input  logic [21:0]  req_addr,
  input  logic [127:0] req_wdata,
  output logic         rsp_valid,
  output logic [127:0] rsp_rdata
);
  logic [127:0] mem [WORDS];
  int           wait_q;
  logic [127:0] pend_q;
  logic         rand_ok;
  int           busy_cycles = 0;

  assign req_ready = rand_ok && (wait_q == 0);
  always @(negedge clk) rand_ok <= ($urandom % 4 != 0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wait_q <= 0; rsp_valid <= 1'b0; rsp_rdata <= '0; pend_q <= '0;
    end else begin
      rsp_valid <= 1'b0;
      if (req_valid && !req_ready) busy_cycles <= busy_cycles + 1;
      if (wait_q > 1) wait_q <= wait_q - 1;
      else if (wait_q == 1) begin wait_q <= 0; rsp_valid <= 1'b1; rsp_rdata <= pend_q; end
      if (req_valid && req_ready) begin
        if (req_we) mem[req_addr % WORDS] <= req_wdata;
        else begin pend_q <= mem[req_addr % WORDS]; wait_q <= 2 + int'($urandom % 4); end
      end
    end
  end
endmodule
