// categorizer: reduces each received I and Q sample to +1 or -1.
//
// The fine detector does not multiply samples by the reference preamble; it
// first maps every sample to its sign and then only adds and subtracts. The
// categorizer produces that sign as one bit: 1 stands for +1 (value >= 0) and
// 0 for -1 (value < 0), the same rule the host uses to turn a known preamble
// into coefficient bits, so that "equal bits" means a product of +1.
//
// Timing: one register stage. The sample, its strobe and the energy enable are
// delayed by the same clock so they stay aligned with the sign bits.
//
// The +-1 reduction and the >= 0 rule follow the paper; the single-bit encoding
// and the register stage are this design's choices.
module categorizer
#(
  parameter int unsigned SAMPLE_W = pd_pkg::SAMPLE_W
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in_valid,
  input  logic                       in_en,
  input  logic signed [SAMPLE_W-1:0] in_i,
  input  logic signed [SAMPLE_W-1:0] in_q,
  output logic                       out_valid,
  output logic                       out_en,
  output logic signed [SAMPLE_W-1:0] out_i,
  output logic signed [SAMPLE_W-1:0] out_q,
  output logic                       sign_i,   // 1: +1, 0: -1
  output logic                       sign_q
);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_en <= 1'b0; out_i <= '0; out_q <= '0;
      sign_i <= 1'b0; sign_q <= 1'b0;
    end else begin
      out_valid <= in_valid;
      out_en    <= in_en;
      out_i     <= in_i;
      out_q     <= in_q;
      sign_i    <= ~in_i[SAMPLE_W-1];   // >= 0 -> 1
      sign_q    <= ~in_q[SAMPLE_W-1];
    end
  end

endmodule
