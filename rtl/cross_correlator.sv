// cross_correlator: variable-point sign cross-correlator for one standard.
//
// A stack of N_CORES windowing cores holds the last N_CORES*TAPS sign bits of
// the received I and Q streams; core c+1 is fed by the oldest bit of core c.
// Every core returns its share of Re{P} and Im{P} (Eq. 3) over the taps that
// fall inside the programmed length corr_len, and this module adds the shares.
// The standard is detected when Re{P} is strictly greater than the signed
// threshold. For an L-point complex preamble received without noise the peak
// of Re{P} is 2L (64 for 32 points, 128 for 64 points).
//
// Interface: shift advances the windows by one sample (strobe and energy
// enable). coef_i[c]/coef_q[c] are the 32-bit coefficient registers of core c.
// gate must be the shift condition delayed by two clocks; detect is only raised
// for a sample that actually entered the window.
//
// Timing: corr_re/corr_im/detect are registered and refer to the window whose
// newest sample entered two clocks before (window register, core stage, sum
// stage).
//
// The sign correlation, stacked cores, programmable length and threshold on
// Re follow the paper; the two-stage pipeline and the gate input are this
// design's own.
module cross_correlator
#(
  parameter int unsigned N_CORES = pd_pkg::N_CORES,
  parameter int unsigned TAPS    = pd_pkg::CORE_TAPS,
  parameter int unsigned LEN_W   = pd_pkg::LEN_W,
  localparam int unsigned CORR_W = $clog2(2 * N_CORES * TAPS + 1) + 1,
  localparam int unsigned PW     = $clog2(2 * TAPS + 1) + 1
) (
  input  logic                                clk,
  input  logic                                rst_n,
  input  logic                                shift,
  input  logic                                in_si,
  input  logic                                in_sq,
  input  logic [LEN_W-1:0]                    corr_len,
  input  logic signed [CORR_W-1:0]            threshold,
  input  logic [N_CORES-1:0][TAPS-1:0]        coef_i,
  input  logic [N_CORES-1:0][TAPS-1:0]        coef_q,
  input  logic                                gate,
  output logic signed [CORR_W-1:0]            corr_re,
  output logic signed [CORR_W-1:0]            corr_im,
  output logic                                detect
);

  logic [N_CORES:0]           chain_i, chain_q;
  logic signed [PW-1:0]       p_re [N_CORES];
  logic signed [PW-1:0]       p_im [N_CORES];
  logic signed [CORR_W-1:0]   s_re, s_im;

  assign chain_i[0] = in_si;
  assign chain_q[0] = in_sq;

  for (genvar c = 0; c < N_CORES; c++) begin : g_core
    window_core #(.TAPS(TAPS), .CORE_IDX(c), .LEN_W(LEN_W)) u_core (
      .clk, .rst_n, .shift,
      .in_si   (chain_i[c]),
      .in_sq   (chain_q[c]),
      .corr_len,
      .coef_i  (coef_i[c]),
      .coef_q  (coef_q[c]),
      .out_si  (chain_i[c+1]),
      .out_sq  (chain_q[c+1]),
      .part_re (p_re[c]),
      .part_im (p_im[c])
    );
  end

  always_comb begin
    s_re = '0;
    s_im = '0;
    for (int c = 0; c < N_CORES; c++) begin
      s_re = s_re + CORR_W'(p_re[c]);
      s_im = s_im + CORR_W'(p_im[c]);
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      corr_re <= '0;
      corr_im <= '0;
      detect  <= 1'b0;
    end else begin
      corr_re <= s_re;
      corr_im <= s_im;
      detect  <= gate && (s_re > threshold);
    end
  end

endmodule
