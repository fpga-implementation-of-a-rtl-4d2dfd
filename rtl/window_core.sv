// window_core: one 32-sample windowing core of the sign cross-correlator.
//
// The core buffers the last TAPS sign bits of I and of Q in shift registers whose
// every stage is visible, and correlates them with TAPS coefficient bits for I
// and TAPS for Q. With all values in {+1,-1} a product is an XNOR of two bits and
// a sum over n taps is 2*(number of agreeing taps) - n, so the four real
// correlations of Eq. (3) need only population counts:
//   P_II = 2*a(si,ci) - n    P_QQ = 2*a(sq,cq) - n
//   P_QI = 2*a(sq,ci) - n    P_IQ = 2*a(si,cq) - n
//   Re   = P_II + P_QQ       Im   = P_QI - P_IQ
// Cores are stacked for longer correlations: out_si/out_sq carry the oldest
// bit to the next core, and CORE_IDX tells the core which taps of a corr_len
// correlation are its own (tap k is used when CORE_IDX*TAPS + k < corr_len).
//
// Bit order: window bit 0 is the newest sample. Coefficient bit k multiplies
// window bit k, so a preamble h[0..L-1] is loaded time reversed: core c bit k
// holds sign(h[L-1-(c*TAPS+k)]). A shorter correlation uses the low bits of
// the first register.
//
// Timing: the window advances on `shift`; part_re/part_im are registered and
// reflect the window one clock after it changed.
//
// Sign reduction, 32-bit coefficient registers, half-register use for shorter
// correlations, shift-register windowing and stacking follow the paper; bit
// order, masking and the popcount form are this design's choices.
module window_core
#(
  parameter int unsigned TAPS     = pd_pkg::CORE_TAPS,
  parameter int unsigned CORE_IDX = 0,
  parameter int unsigned LEN_W    = pd_pkg::LEN_W,
  localparam int unsigned PW      = $clog2(2 * TAPS + 1) + 1   // signed partial width
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 shift,
  input  logic                 in_si,
  input  logic                 in_sq,
  input  logic [LEN_W-1:0]     corr_len,
  input  logic [TAPS-1:0]      coef_i,
  input  logic [TAPS-1:0]      coef_q,
  output logic                 out_si,
  output logic                 out_sq,
  output logic signed [PW-1:0] part_re,
  output logic signed [PW-1:0] part_im
);

  localparam int unsigned CW = $clog2(TAPS + 1);

  logic [TAPS-1:0] win_i, win_q;   // bit 0 newest
  logic [TAPS-1:0] mask;
  logic [CW-1:0]   n, a_ii, a_qq, a_qi, a_iq;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      win_i <= '0;
      win_q <= '0;
    end else if (shift) begin
      win_i <= {win_i[TAPS-2:0], in_si};
      win_q <= {win_q[TAPS-2:0], in_sq};
    end
  end

  assign out_si = win_i[TAPS-1];
  assign out_sq = win_q[TAPS-1];

  always_comb begin
    for (int k = 0; k < TAPS; k++)
      mask[k] = (32'(CORE_IDX * TAPS + k) < 32'(corr_len));
  end

  // Agreement vectors: bit k is 1 when tap k is used and the two signs match.
  logic [TAPS-1:0] m_ii, m_qq, m_qi, m_iq;
  assign m_ii = mask & ~(win_i ^ coef_i);
  assign m_qq = mask & ~(win_q ^ coef_q);
  assign m_qi = mask & ~(win_q ^ coef_i);
  assign m_iq = mask & ~(win_i ^ coef_q);

  always_comb begin
    n = '0; a_ii = '0; a_qq = '0; a_qi = '0; a_iq = '0;
    for (int k = 0; k < TAPS; k++) begin
      n    = n    + CW'(mask[k]);
      a_ii = a_ii + CW'(m_ii[k]);
      a_qq = a_qq + CW'(m_qq[k]);
      a_qi = a_qi + CW'(m_qi[k]);
      a_iq = a_iq + CW'(m_iq[k]);
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      part_re <= '0;
      part_im <= '0;
    end else begin
      // Re = (2a_ii - n) + (2a_qq - n) ; Im = (2a_qi - n) - (2a_iq - n)
      part_re <= PW'(2) * (PW'(a_ii) + PW'(a_qq) - PW'(n));
      part_im <= PW'(2) * (PW'(a_qi) - PW'(a_iq));
    end
  end

endmodule
