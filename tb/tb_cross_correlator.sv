// tb_cross_correlator: one 64-point correlator (two stacked cores) fed with a
// sign stream in which a known preamble is embedded. Checks Re/Im against an
// integer model of Eq. (3) on every cycle, the detect flag against the
// threshold and gate, the noiseless peaks of 2L (128 for 64 points, 64 for 32
// points), and the two-clock latency from shift to output.
module tb_cross_correlator;
  localparam int TAPS = 32, NC = 2, CW = 9;
  logic clk = 0, rst_n = 0;
  logic shift, in_si, in_sq, gate, detect;
  logic [7:0] corr_len;
  logic signed [CW-1:0] threshold, corr_re, corr_im;
  logic [NC-1:0][TAPS-1:0] coef_i, coef_q;
  int checks = 0, failures = 0, peaks = 0, dets = 0;

  cross_correlator #(.N_CORES(NC), .TAPS(TAPS)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int pm(logic b); return b ? 1 : -1; endfunction

  int hi [NC*TAPS], hq [NC*TAPS];
  logic pre_i [NC*TAPS], pre_q [NC*TAPS];   // preamble signs, index 0 sent first
  // Per-clock history, index 0 = previous clock: shift strobes and the model's
  // Re/Im of the window after that clock's shift.
  logic h_sh [3];
  int   h_re [3], h_im [3];
  int   cur_re = 0, cur_im = 0;

  // Coefficient loading as the host does it: time-reversed preamble signs.
  task automatic load_coef(int len);
    coef_i = '0; coef_q = '0;
    for (int k = 0; k < len; k++) begin
      coef_i[k / TAPS][k % TAPS] = pre_i[len-1-k];
      coef_q[k / TAPS][k % TAPS] = pre_q[len-1-k];
    end
  endtask

  // Integer model of Eq. (3) on +-1 values.
  task automatic model(output int re, output int im);
    int pii = 0, pqq = 0, pqi = 0, piq = 0;
    for (int k = 0; k < int'(corr_len); k++) begin
      pii += hi[k] * pm(coef_i[k/TAPS][k%TAPS]);
      pqq += hq[k] * pm(coef_q[k/TAPS][k%TAPS]);
      pqi += hq[k] * pm(coef_i[k/TAPS][k%TAPS]);
      piq += hi[k] * pm(coef_q[k/TAPS][k%TAPS]);
    end
    re = pii + pqq; im = pqi - piq;
  endtask

  initial begin
    int len, pos, sent;
    for (int k = 0; k < 3; k++) begin h_sh[k] = 0; h_re[k] = 0; h_im[k] = 0; end
    shift = 0; in_si = 0; in_sq = 0; gate = 0; threshold = 100; corr_len = 64;
    coef_i = '0; coef_q = '0;
    for (int k = 0; k < NC*TAPS; k++) begin
      hi[k] = -1; hq[k] = -1; pre_i[k] = 1'($urandom); pre_q[k] = 1'($urandom);
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int round = 0; round < 8; round++) begin
      @(negedge clk);   // let the last shift of the previous round be clocked in
      shift = 0;
      len = (round % 2 == 0) ? 64 : 32;
      corr_len = 8'(len);
      threshold = (len == 64) ? 9'sd100 : 9'sd50;
      load_coef(len);
      // settle with the window frozen, then restart the model history
      shift = 0; gate = 0;
      repeat (4) @(negedge clk);
      model(cur_re, cur_im);
      for (int k = 0; k < 3; k++) begin h_sh[k] = 0; h_re[k] = cur_re; h_im[k] = cur_im; end
      pos = -40;   // 40 random samples, then the preamble, then 40 random
      sent = 0;
      while (sent < len + 80) begin
        @(negedge clk);
        // outputs now belong to the clock three cycles back
        checks++;
        if (int'(corr_re) != h_re[2] || int'(corr_im) != h_im[2] ||
            detect != (h_sh[2] && h_re[2] > int'(threshold))) begin
          failures++;
          $display("round %0d: re %0d exp %0d im %0d exp %0d det %b", round, corr_re,
                   h_re[2], corr_im, h_im[2], detect);
        end
        if (detect) dets++;
        shift = ($urandom_range(0, 4) != 0);
        if (shift) begin
          if (pos >= 0 && pos < len) begin in_si = pre_i[pos]; in_sq = pre_q[pos]; end
          else begin in_si = 1'($urandom); in_sq = 1'($urandom); end
          for (int k = NC*TAPS-1; k > 0; k--) begin hi[k] = hi[k-1]; hq[k] = hq[k-1]; end
          hi[0] = pm(in_si); hq[0] = pm(in_sq);
          model(cur_re, cur_im);
          if (pos == len - 1) begin
            checks++;
            if (cur_re != 2 * len || cur_im != 0) begin failures++; $display("model peak wrong"); end
            peaks++;
          end
          pos++; sent++;
        end
        for (int k = 2; k > 0; k--) begin h_sh[k] = h_sh[k-1]; h_re[k] = h_re[k-1]; h_im[k] = h_im[k-1]; end
        h_sh[0] = shift; h_re[0] = cur_re; h_im[0] = cur_im;
        gate = h_sh[2];
      end
    end
    // let the pipeline drain
    @(negedge clk); shift = 0;
    checks++;
    if (dets < 8) begin failures++; $display("only %0d detections for 8 preambles", dets); end
    $display("peaks %0d detections %0d", peaks, dets);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
