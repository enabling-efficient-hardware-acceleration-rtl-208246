// hv_divider: sequential unsigned restoring divider, one quotient bit per cycle.
// Pulse start with dividend/divisor; W cycles later done pulses for one cycle and
// quotient holds the result until the next start. A zero divisor gives all ones.
// Used by the post-processing engine for LayerNorm and SoftMax statistics.
module hv_divider #(
  parameter int unsigned W = 80
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [W-1:0] dividend,
  input  logic [W-1:0] divisor,
  output logic         busy,
  output logic         done,
  output logic [W-1:0] quotient
);
  logic [W-1:0]         d_q;
  logic [W:0]           rem_q;
  logic [$clog2(W+1)-1:0] cnt_q;
  logic [W:0]           rem_sh;

  assign rem_sh = {rem_q[W-1:0], quotient[W-1]};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; cnt_q <= '0; rem_q <= '0; d_q <= '0; quotient <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        busy <= 1'b1; cnt_q <= ($clog2(W+1))'(W); rem_q <= '0; d_q <= divisor; quotient <= dividend;
      end else if (busy) begin
        if (rem_sh >= {1'b0, d_q}) begin
          rem_q    <= rem_sh - {1'b0, d_q};
          quotient <= {quotient[W-2:0], 1'b1};
        end else begin
          rem_q    <= rem_sh;
          quotient <= {quotient[W-2:0], 1'b0};
        end
        cnt_q <= cnt_q - 1'b1;
        if (cnt_q == 1) begin busy <= 1'b0; done <= 1'b1; end
      end
    end
  end
endmodule
