// tb_window_core: two stacked windowing cores against an integer model of the
// four +-1 correlations of Eq. (3). Random sign streams, random coefficients,
// random lengths 1..64 and random shift strobes; checks both cores' partial
// Re/Im one clock after each shift and the cascade bit.
module tb_window_core;
  localparam int TAPS = 32;
  logic clk = 0, rst_n = 0;
  logic shift, in_si, in_sq;
  logic [7:0] corr_len;
  logic [TAPS-1:0] ci0, cq0, ci1, cq1;
  logic so_i0, so_q0, so_i1, so_q1;
  logic signed [7:0] re0, im0, re1, im1;
  int checks = 0, failures = 0;

  window_core #(.TAPS(TAPS), .CORE_IDX(0)) u0 (.clk, .rst_n, .shift, .in_si, .in_sq, .corr_len,
    .coef_i(ci0), .coef_q(cq0), .out_si(so_i0), .out_sq(so_q0), .part_re(re0), .part_im(im0));
  window_core #(.TAPS(TAPS), .CORE_IDX(1)) u1 (.clk, .rst_n, .shift, .in_si(so_i0), .in_sq(so_q0), .corr_len,
    .coef_i(ci1), .coef_q(cq1), .out_si(so_i1), .out_sq(so_q1), .part_re(re1), .part_im(im1));

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Model: history of +-1 values, index 0 newest; reset clears to bit 0 = -1.
  int hi [2*TAPS], hq [2*TAPS];

  function automatic int pm(logic b); return b ? 1 : -1; endfunction

  task automatic expect_core(int c, logic [TAPS-1:0] ci, logic [TAPS-1:0] cq,
                             logic signed [7:0] re, logic signed [7:0] im);
    int pii = 0, pqq = 0, pqi = 0, piq = 0;
    for (int k = 0; k < TAPS; k++) begin
      if (c * TAPS + k < int'(corr_len)) begin
        pii += hi[c*TAPS+k] * pm(ci[k]);
        pqq += hq[c*TAPS+k] * pm(cq[k]);
        pqi += hq[c*TAPS+k] * pm(ci[k]);
        piq += hi[c*TAPS+k] * pm(cq[k]);
      end
    end
    checks++;
    if (int'(re) != pii + pqq || int'(im) != pqi - piq) begin
      failures++;
      $display("core %0d len %0d: re %0d exp %0d, im %0d exp %0d", c, corr_len, re, pii + pqq, im, pqi - piq);
    end
  endtask

  initial begin
    shift = 0; in_si = 0; in_sq = 0; corr_len = 64;
    ci0 = 0; cq0 = 0; ci1 = 0; cq1 = 0;
    for (int k = 0; k < 2*TAPS; k++) begin hi[k] = -1; hq[k] = -1; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      if (n % 200 == 0) begin
        ci0 = $urandom; cq0 = $urandom; ci1 = $urandom; cq1 = $urandom;
        case ((n / 200) % 4)
          0: corr_len = 64;
          1: corr_len = 32;
          2: corr_len = 16;
          default: corr_len = 8'(1 + $urandom_range(0, 63));
        endcase
      end
      shift = ($urandom_range(0, 3) != 0);
      in_si = 1'($urandom); in_sq = 1'($urandom);
      if (shift) begin
        for (int k = 2*TAPS-1; k > 0; k--) begin hi[k] = hi[k-1]; hq[k] = hq[k-1]; end
        hi[0] = pm(in_si); hq[0] = pm(in_sq);
      end
      @(negedge clk);  // window updated at the first edge, partials at the second
      shift = 0;
      @(negedge clk);
      expect_core(0, ci0, cq0, re0, im0);
      expect_core(1, ci1, cq1, re1, im1);
      checks++;
      if (pm(so_i1) != hi[2*TAPS-1] || pm(so_q1) != hq[2*TAPS-1]) begin
        failures++;
        $display("cascade bit mismatch");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
