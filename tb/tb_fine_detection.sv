// tb_fine_detection: three correlators (32, 64 and 64 points, thresholds 50,
// 100, 100) on a sample stream that carries the three preambles in turn, with
// the energy enable dropping at times. An integer model of the sign windows
// (advancing only on strobe and enable) and of Eq. (3) checks every output
// cycle: aligned samples 4 clocks after input, Re/Im of each correlator and
// each Packet Detect. Counts detections per standard and detections
// suppressed by the enable.
module tb_fine_detection;
  localparam int W = 16, NS = 3, NC = 2, TAPS = 32, CW = 9, L = NC * TAPS;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_en, out_valid;
  logic signed [W-1:0] in_i, in_q, out_i, out_q;
  logic [NS-1:0][7:0] corr_len;
  logic [NS-1:0][CW-1:0] corr_thresh, corr_re, corr_im;
  logic [NS-1:0][NC-1:0][TAPS-1:0] coef_i, coef_q;
  logic [NS-1:0] detect;
  int checks = 0, failures = 0;
  int ndet [NS];
  int gated = 0;

  fine_detection #(.NUM_STD(NS), .N_CORES(NC), .TAPS(TAPS), .SAMPLE_W(W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int pm(logic b); return b ? 1 : -1; endfunction

  int  lens [NS] = '{32, 64, 64};
  int  thr  [NS] = '{50, 100, 100};
  logic pre_i [NS][L], pre_q [NS][L];
  int  hi [L], hq [L];                      // model window, index 0 newest
  localparam int D = 4;
  logic h_v [D], h_g [D];
  logic signed [W-1:0] h_i [D], h_q [D];
  int  h_re [D][NS], h_im [D][NS];

  task automatic model(int s, output int re, output int im);
    int pii = 0, pqq = 0, pqi = 0, piq = 0;
    for (int k = 0; k < lens[s]; k++) begin
      pii += hi[k] * pm(coef_i[s][k/TAPS][k%TAPS]);
      pqq += hq[k] * pm(coef_q[s][k/TAPS][k%TAPS]);
      pqi += hq[k] * pm(coef_i[s][k/TAPS][k%TAPS]);
      piq += hi[k] * pm(coef_q[s][k/TAPS][k%TAPS]);
    end
    re = pii + pqq; im = pqi - piq;
  endtask

  initial begin
    int pstd, pos, re, im;
    logic g;
    in_valid = 0; in_en = 0; in_i = 0; in_q = 0;
    coef_i = '0; coef_q = '0;
    for (int s = 0; s < NS; s++) begin
      ndet[s] = 0;
      corr_len[s] = 8'(lens[s]);
      corr_thresh[s] = CW'(thr[s]);
      for (int k = 0; k < L; k++) begin pre_i[s][k] = 1'($urandom); pre_q[s][k] = 1'($urandom); end
      for (int k = 0; k < lens[s]; k++) begin
        coef_i[s][k/TAPS][k%TAPS] = pre_i[s][lens[s]-1-k];
        coef_q[s][k/TAPS][k%TAPS] = pre_q[s][lens[s]-1-k];
      end
    end
    for (int k = 0; k < L; k++) begin hi[k] = -1; hq[k] = -1; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (4) @(negedge clk);
    for (int d = 0; d < D; d++) begin
      h_v[d] = 0; h_g[d] = 0; h_i[d] = 0; h_q[d] = 0;
      for (int s = 0; s < NS; s++) begin model(s, re, im); h_re[d][s] = re; h_im[d][s] = im; end
    end
    pstd = 0; pos = -30;
    for (int n = 0; n < 3000; n++) begin
      // outputs now belong to the input of four clocks ago
      checks++;
      if (out_valid != h_v[D-1] || (h_v[D-1] && (out_i != h_i[D-1] || out_q != h_q[D-1]))) begin
        failures++; $display("n %0d: sample misaligned", n);
      end
      for (int s = 0; s < NS; s++) begin
        checks++;
        if (int'($signed(corr_re[s])) != h_re[D-1][s] || int'($signed(corr_im[s])) != h_im[D-1][s] ||
            detect[s] != (h_g[D-1] && h_re[D-1][s] > thr[s])) begin
          failures++;
          $display("n %0d std %0d: re %0d exp %0d im %0d exp %0d det %b", n, s,
                   $signed(corr_re[s]), h_re[D-1][s], $signed(corr_im[s]), h_im[D-1][s], detect[s]);
        end
        if (detect[s]) ndet[s]++;
        if (!h_g[D-1] && h_re[D-1][s] > thr[s]) gated++;
      end
      // next input: noise-like filler, or preamble of standard pstd; the
      // enable drops during some fillers
      in_valid = ($urandom_range(0, 5) != 0);
      in_en = !(pos < -10 && (n / 200) % 3 == 2);
      if (pos >= 0 && pos < lens[pstd]) begin
        in_i = W'((pre_i[pstd][pos] ? 1000 : -1000) + $signed($urandom_range(0, 200)) - 100);
        in_q = W'((pre_q[pstd][pos] ? 1000 : -1000) + $signed($urandom_range(0, 200)) - 100);
      end else begin
        in_i = W'($signed($urandom_range(0, 2000)) - 1000);
        in_q = W'($signed($urandom_range(0, 2000)) - 1000);
      end
      g = in_valid && in_en;
      if (g) begin
        for (int k = L-1; k > 0; k--) begin hi[k] = hi[k-1]; hq[k] = hq[k-1]; end
        hi[0] = (in_i >= 0) ? 1 : -1; hq[0] = (in_q >= 0) ? 1 : -1;
      end
      if (in_valid) begin
        pos++;
        if (pos == lens[pstd] + 30) begin pos = -30; pstd = (pstd + 1) % NS; end
      end
      for (int d = D-1; d > 0; d--) begin
        h_v[d] = h_v[d-1]; h_g[d] = h_g[d-1]; h_i[d] = h_i[d-1]; h_q[d] = h_q[d-1];
        h_re[d] = h_re[d-1]; h_im[d] = h_im[d-1];
      end
      h_v[0] = in_valid; h_g[0] = g; h_i[0] = in_i; h_q[0] = in_q;
      for (int s = 0; s < NS; s++) begin model(s, re, im); h_re[0][s] = re; h_im[0][s] = im; end
      @(negedge clk);
    end
    for (int s = 0; s < NS; s++) begin
      checks++;
      if (ndet[s] < 3) begin failures++; $display("standard %0d detected only %0d times", s, ndet[s]); end
    end
    $display("detections %0d %0d %0d, suppressed by enable %0d", ndet[0], ndet[1], ndet[2], gated);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
