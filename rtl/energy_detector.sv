// energy_detector: windowed signal energy and the Energy Detect decision.
//
// Each sample's energy e = (I^2 + Q^2) >> E_SHIFT is pushed into an addressable
// shift register of MAX_WIN entries. A running sum adds the new value and
// subtracts the value read at address win_len-1, the one that leaves a window of
// win_len samples, so the sum is always Eq. (1) over the last win_len samples
// without an adder tree. energy_det is high while that sum is strictly greater
// than `threshold`. Window length and threshold are run-time registers.
//
// Timing: three register stages. The decision for a window whose newest sample
// is x[k] appears together with x[k] on out_i/out_q, 3 clocks after x[k] was
// presented with in_valid. Samples may arrive on any clock (in_valid strobe).
// After reset, and whenever win_len changes, the sum restarts from zero and the
// detector stays low until win_len new samples have been seen.
//
// Following the paper: energy of Eq. (1), compare with a programmable
// threshold, addressable shift register, variable window. Own choices: the
// shift register holds energies rather than raw I/Q, the E_SHIFT scaling,
// the 32-bit sum and the restart rule.
module energy_detector
#(
  parameter int unsigned SAMPLE_W = pd_pkg::SAMPLE_W,
  parameter int unsigned MAX_WIN  = pd_pkg::MAX_WIN,
  parameter int unsigned E_SHIFT  = pd_pkg::E_SHIFT,
  localparam int unsigned WL_W    = $clog2(MAX_WIN) + 1,
  localparam int unsigned AI_W    = (MAX_WIN > 1) ? $clog2(MAX_WIN) : 1
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in_valid,
  input  logic signed [SAMPLE_W-1:0] in_i,
  input  logic signed [SAMPLE_W-1:0] in_q,
  input  logic [WL_W-1:0]            win_len,    // 1..MAX_WIN
  input  logic [31:0]                threshold,
  output logic                       out_valid,
  output logic signed [SAMPLE_W-1:0] out_i,
  output logic signed [SAMPLE_W-1:0] out_q,
  output logic [31:0]                energy,
  output logic                       energy_det
);

  localparam int unsigned SQ_W = 2 * SAMPLE_W + 1;

  // Stage 1: per-sample energy.
  logic                       v1;
  logic signed [SAMPLE_W-1:0] i1, q1;
  logic [31:0]                e1;
  logic [SQ_W-1:0]            sq;

  always_comb sq = SQ_W'(in_i * in_i) + SQ_W'(in_q * in_q);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      v1 <= 1'b0; i1 <= '0; q1 <= '0; e1 <= '0;
    end else begin
      v1 <= in_valid;
      i1 <= in_i;
      q1 <= in_q;
      e1 <= 32'(sq >> E_SHIFT);
    end
  end

  // Stage 2: addressable shift register and running sum.
  logic [31:0]       esr [MAX_WIN];
  logic [WL_W-1:0]   win_q;      // window length the running sum refers to
  logic [WL_W-1:0]   fill;       // samples seen since the last restart, saturating at win_q
  logic [31:0]       sum;
  logic              v2, full2;
  logic signed [SAMPLE_W-1:0] i2, q2;
  logic [31:0]       leaving;
  logic [WL_W-1:0]   win_eff;

  // Clamp the programmed length to 1..MAX_WIN.
  always_comb begin
    if (win_len == '0)                win_eff = WL_W'(1);
    else if (win_len > WL_W'(MAX_WIN)) win_eff = WL_W'(MAX_WIN);
    else                              win_eff = win_len;
  end

  always_comb leaving = esr[AI_W'(win_q - WL_W'(1))];

  always_ff @(posedge clk) begin
    if (v1) begin
      esr[0] <= e1;
      for (int k = 1; k < MAX_WIN; k++) esr[k] <= esr[k-1];
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      sum <= '0; fill <= '0; win_q <= WL_W'(1);
      v2 <= 1'b0; full2 <= 1'b0; i2 <= '0; q2 <= '0;
    end else begin
      v2 <= v1;
      i2 <= i1;
      q2 <= q1;
      if (win_eff != win_q) begin
        // New window length: restart the sum with the current sample.
        win_q <= win_eff;
        sum   <= v1 ? e1 : '0;
        fill  <= v1 ? WL_W'(1) : '0;
        full2 <= v1 && (win_eff == WL_W'(1));
      end else if (v1) begin
        if (fill == win_q) sum <= sum + e1 - leaving;
        else begin
          sum  <= sum + e1;
          fill <= fill + WL_W'(1);
        end
        full2 <= (fill == win_q) || (fill + WL_W'(1) == win_q);
      end
    end
  end

  // Stage 3: decision.
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_i <= '0; out_q <= '0; energy <= '0; energy_det <= 1'b0;
    end else begin
      out_valid  <= v2;
      out_i      <= i2;
      out_q      <= q2;
      energy     <= sum;
      energy_det <= full2 && (sum > threshold);
    end
  end

endmodule
