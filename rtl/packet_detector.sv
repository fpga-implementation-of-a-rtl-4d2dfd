// packet_detector: multi-standard, run-time adaptable OFDM packet detector.
//
// Received I/Q samples pass through three stages in a line:
//   energy_detector    - windowed energy above a threshold -> Energy Detect
//   fine_detection     - NUM_STD sign cross-correlators, enabled by Energy
//                        Detect, one per standard -> Packet Detect per standard
//   standard_detection - picks one standard (longest preamble first), pulses
//                        Frame Start and presents that standard's parameters
// All of them are configured through shared_regs, which a host processor writes
// over a simple register bus (address map in pd_pkg). Changing the registers
// while samples flow changes the searched preambles, lengths, thresholds and
// enabled standards on the fly.
//
// Interface: in_valid/in_i/in_q take one sample per strobe from the radio
// front end. out_valid/out_i/out_q give the same samples 8 clocks later;
// frame_start is high together with the output sample that completed the
// detected preamble, so a receiver can start its frame timing there. The
// per-standard detections and correlator outputs are brought out for
// observation, aligned with out_i/out_q; energy and energy_det are aligned with
// the energy detector's output, 5 clocks ahead of out_i/out_q.
//
// Timing: latency 3 (energy) + 4 (fine) + 1 (standard) = 8 clocks; one sample
// per clock at most.
//
// The chain of blocks follows the paper's block diagram; the bus, latencies
// and observation ports are this design's own.
module packet_detector
#(
  parameter int unsigned NUM_STD  = pd_pkg::NUM_STD,
  parameter int unsigned N_CORES  = pd_pkg::N_CORES,
  parameter int unsigned TAPS     = pd_pkg::CORE_TAPS,
  parameter int unsigned SAMPLE_W = pd_pkg::SAMPLE_W,
  parameter int unsigned MAX_WIN  = pd_pkg::MAX_WIN,
  parameter int unsigned E_SHIFT  = pd_pkg::E_SHIFT,
  localparam int unsigned LEN_W   = pd_pkg::LEN_W,
  localparam int unsigned CORR_W  = $clog2(2 * N_CORES * TAPS + 1) + 1,
  localparam int unsigned WL_W    = $clog2(MAX_WIN) + 1,
  localparam int unsigned ID_W    = (NUM_STD > 1) ? $clog2(NUM_STD) : 1
) (
  input  logic                            clk,
  input  logic                            rst_n,
  // samples from the radio front end
  input  logic                            in_valid,
  input  logic signed [SAMPLE_W-1:0]      in_i,
  input  logic signed [SAMPLE_W-1:0]      in_q,
  // host register bus
  input  logic                            bus_we,
  input  logic [7:0]                      bus_addr,
  input  logic [31:0]                     bus_wdata,
  output logic [31:0]                     bus_rdata,
  // standard detection results and aligned samples
  output logic                            out_valid,
  output logic signed [SAMPLE_W-1:0]      out_i,
  output logic signed [SAMPLE_W-1:0]      out_q,
  output logic                            frame_start,
  output logic [ID_W-1:0]                 std_id,
  output logic                            in_packet,
  output pd_pkg::std_params_t                     active,
  // observation
  output logic                            energy_det,
  output logic [31:0]                     energy,
  output logic [NUM_STD-1:0]              detect,
  output logic [NUM_STD-1:0][CORR_W-1:0]  corr_re,
  output logic [NUM_STD-1:0][CORR_W-1:0]  corr_im
);

  // Configuration.
  logic [WL_W-1:0]                            energy_win;
  logic [31:0]                                energy_thresh;
  logic [NUM_STD-1:0]                         std_enable;
  logic [NUM_STD-1:0][LEN_W-1:0]              corr_len;
  logic [NUM_STD-1:0][CORR_W-1:0]             corr_thresh;
  logic [NUM_STD-1:0][N_CORES-1:0][TAPS-1:0]  coef_i, coef_q;
  pd_pkg::std_params_t [NUM_STD-1:0]                  params;

  shared_regs #(.NUM_STD(NUM_STD), .N_CORES(N_CORES), .TAPS(TAPS),
                .MAX_WIN(MAX_WIN), .LEN_W(LEN_W)) u_regs (
    .clk, .rst_n,
    .bus_we, .bus_addr, .bus_wdata, .bus_rdata,
    .energy_win, .energy_thresh, .std_enable, .corr_len, .corr_thresh,
    .coef_i, .coef_q, .params,
    .frame_start, .std_id
  );

  // Energy detection.
  logic                       e_valid;
  logic signed [SAMPLE_W-1:0] e_i, e_q;

  energy_detector #(.SAMPLE_W(SAMPLE_W), .MAX_WIN(MAX_WIN), .E_SHIFT(E_SHIFT)) u_energy (
    .clk, .rst_n,
    .in_valid, .in_i, .in_q,
    .win_len    (energy_win),
    .threshold  (energy_thresh),
    .out_valid  (e_valid),
    .out_i      (e_i),
    .out_q      (e_q),
    .energy     (energy),
    .energy_det (energy_det)
  );

  // Fine detection.
  logic                                 f_valid;
  logic signed [SAMPLE_W-1:0]           f_i, f_q;
  logic [NUM_STD-1:0]                   f_detect;
  logic [NUM_STD-1:0][CORR_W-1:0]       f_re, f_im;

  fine_detection #(.NUM_STD(NUM_STD), .N_CORES(N_CORES), .TAPS(TAPS),
                   .SAMPLE_W(SAMPLE_W), .LEN_W(LEN_W)) u_fine (
    .clk, .rst_n,
    .in_valid (e_valid),
    .in_en    (energy_det),
    .in_i     (e_i),
    .in_q     (e_q),
    .corr_len, .corr_thresh, .coef_i, .coef_q,
    .out_valid (f_valid),
    .out_i     (f_i),
    .out_q     (f_q),
    .detect    (f_detect),
    .corr_re   (f_re),
    .corr_im   (f_im)
  );

  // Correlator observation delayed to line up with the standard detector's
  // output sample.
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      detect  <= '0;
      corr_re <= '0;
      corr_im <= '0;
    end else begin
      detect  <= f_detect;
      corr_re <= f_re;
      corr_im <= f_im;
    end
  end

  // Standard detection.
  standard_detection #(.NUM_STD(NUM_STD), .SAMPLE_W(SAMPLE_W), .LEN_W(LEN_W)) u_std (
    .clk, .rst_n,
    .in_valid (f_valid),
    .in_i     (f_i),
    .in_q     (f_q),
    .detect   (f_detect),
    .std_enable,
    .corr_len,
    .params,
    .out_valid, .out_i, .out_q,
    .frame_start, .std_id, .in_packet, .active
  );

endmodule
