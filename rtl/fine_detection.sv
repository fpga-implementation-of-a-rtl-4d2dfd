// fine_detection: the categorizer and NUM_STD parallel cross-correlators.
//
// Received samples are reduced to sign bits by the categorizer and fed to one
// sign cross-correlator per standard; each standard has its own length,
// threshold and coefficient registers, so up to NUM_STD preambles of different
// lengths and values are searched for at once. The Energy Detect decision is the
// enable: the correlator windows only advance, and a detection is only reported,
// while it is high. Outside it the windows keep their last content.
//
// Interface: in_* come from the energy detector (in_en = Energy Detect).
// corr_len/corr_thresh/coef_* are per-standard configuration registers.
// detect[s] is Packet Detect for standard s, corr_re/corr_im its correlator
// output.
//
// Timing: 4 register stages (categorizer, window, core sums, total and
// compare). detect and corr_* refer to the window whose newest sample is the one
// leaving on out_i/out_q in the same cycle.
//
// Enable from the energy detector, sign categorizer and parallel correlators
// follow the paper; freezing the windows while disabled is this design's choice.
module fine_detection
#(
  parameter int unsigned NUM_STD  = pd_pkg::NUM_STD,
  parameter int unsigned N_CORES  = pd_pkg::N_CORES,
  parameter int unsigned TAPS     = pd_pkg::CORE_TAPS,
  parameter int unsigned SAMPLE_W = pd_pkg::SAMPLE_W,
  parameter int unsigned LEN_W    = pd_pkg::LEN_W,
  localparam int unsigned CORR_W  = $clog2(2 * N_CORES * TAPS + 1) + 1
) (
  input  logic                                       clk,
  input  logic                                       rst_n,
  input  logic                                       in_valid,
  input  logic                                       in_en,
  input  logic signed [SAMPLE_W-1:0]                 in_i,
  input  logic signed [SAMPLE_W-1:0]                 in_q,
  input  logic [NUM_STD-1:0][LEN_W-1:0]              corr_len,
  input  logic [NUM_STD-1:0][CORR_W-1:0]             corr_thresh,
  input  logic [NUM_STD-1:0][N_CORES-1:0][TAPS-1:0]  coef_i,
  input  logic [NUM_STD-1:0][N_CORES-1:0][TAPS-1:0]  coef_q,
  output logic                                       out_valid,
  output logic signed [SAMPLE_W-1:0]                 out_i,
  output logic signed [SAMPLE_W-1:0]                 out_q,
  output logic [NUM_STD-1:0]                         detect,
  output logic [NUM_STD-1:0][CORR_W-1:0]             corr_re,
  output logic [NUM_STD-1:0][CORR_W-1:0]             corr_im
);

  // Stage 1: categorizer.
  logic                       v1, en1, si1, sq1;
  logic signed [SAMPLE_W-1:0] i1, q1;

  categorizer #(.SAMPLE_W(SAMPLE_W)) u_cat (
    .clk, .rst_n,
    .in_valid, .in_en, .in_i, .in_q,
    .out_valid (v1),
    .out_en    (en1),
    .out_i     (i1),
    .out_q     (q1),
    .sign_i    (si1),
    .sign_q    (sq1)
  );

  logic shift;
  assign shift = v1 && en1;

  // Stages 2-4: sample delay line and the shift condition delayed for the
  // correlators' gate input, alongside the correlators.
  logic [1:0]                 g_d;
  logic [2:0]                 v_d;
  logic signed [SAMPLE_W-1:0] i_d [3];
  logic signed [SAMPLE_W-1:0] q_d [3];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      g_d <= '0;
      v_d <= '0;
      for (int k = 0; k < 3; k++) begin
        i_d[k] <= '0;
        q_d[k] <= '0;
      end
    end else begin
      g_d <= {g_d[0], shift};
      v_d <= {v_d[1:0], v1};
      i_d[0] <= i1;
      q_d[0] <= q1;
      for (int k = 1; k < 3; k++) begin
        i_d[k] <= i_d[k-1];
        q_d[k] <= q_d[k-1];
      end
    end
  end

  assign out_valid = v_d[2];
  assign out_i     = i_d[2];
  assign out_q     = q_d[2];

  for (genvar s = 0; s < NUM_STD; s++) begin : g_std
    cross_correlator #(.N_CORES(N_CORES), .TAPS(TAPS), .LEN_W(LEN_W)) u_xc (
      .clk, .rst_n, .shift,
      .in_si     (si1),
      .in_sq     (sq1),
      .corr_len  (corr_len[s]),
      .threshold (corr_thresh[s]),
      .coef_i    (coef_i[s]),
      .coef_q    (coef_q[s]),
      .gate      (g_d[1]),
      .corr_re   (corr_re[s]),
      .corr_im   (corr_im[s]),
      .detect    (detect[s])
    );
  end

endmodule
