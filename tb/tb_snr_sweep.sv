// tb_snr_sweep: detection rate of the full detector against SNR.
//
// Three standards are searched for in parallel (preambles of 32, 64 and 64
// random complex samples, thresholds 50, 100, 100). Each trial sends noise,
// a random QPSK lead-in, the preamble of standard 0 (32 samples) or standard 1
// (64 samples) and a QPSK payload, all with complex white Gaussian noise at the
// given SNR (signal power per sample over noise power per sample). A trial is
// correct when exactly one frame start occurs and it names the standard that
// was sent; a miss and a wrong standard count alike. The energy threshold is
// set a quarter of the way from the noise-only to the signal-plus-noise
// window energy, so that it rarely drops inside a packet.
// TRIALS trials are run at each SNR from 0 to 6 dB and at 10 dB.
//
// Checks: at 10 dB every trial is correct with the correlator of the sent
// standard above its threshold; the rate does not fall from 0 dB to 6 dB; it
// is at least 0.9 at 6 dB.
module tb_snr_sweep;
  import pd_pkg::*;
  localparam int W = 16, NS = 3, L = 64;
  localparam int TRIALS = 300;
  localparam real A = 1000.0;          // per-component signal amplitude
  logic clk = 0, rst_n = 0;
  logic in_valid, bus_we;
  logic signed [W-1:0] in_i, in_q, out_i, out_q;
  logic [7:0] bus_addr;
  logic [31:0] bus_wdata, bus_rdata, energy;
  logic out_valid, frame_start, in_packet, energy_det;
  logic [1:0] std_id;
  std_params_t active;
  logic [NS-1:0] detect;
  logic [NS-1:0][8:0] corr_re, corr_im;
  int checks = 0, failures = 0;

  packet_detector dut (.*);

  always #5 clk = ~clk;

  initial begin
    #400000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int lens [NS] = '{32, 64, 64};
  int thr  [NS] = '{50, 100, 100};
  logic pre_i [NS][L], pre_q [NS][L];

  task automatic wr(logic [7:0] a, logic [31:0] d);
    @(negedge clk); bus_we = 1; bus_addr = a; bus_wdata = d;
    @(negedge clk); bus_we = 0;
  endtask

  function automatic real gauss();
    real u1, u2;
    u1 = (real'($urandom) + 1.0) / 4294967297.0;
    u2 = real'($urandom) / 4294967296.0;
    return $sqrt(-2.0 * $ln(u1)) * $cos(6.283185307179586 * u2);
  endfunction

  function automatic logic signed [W-1:0] to_smp(real x);
    if (x > 32767.0) return 16'sh7fff;
    if (x < -32768.0) return 16'sh8000;
    return W'($rtoi(x));
  endfunction

  // Monitor: frame starts of the current trial.
  int fs_count, fs_std;
  always @(negedge clk) if (rst_n && out_valid && frame_start) begin
    fs_count++;
    fs_std = int'(std_id);
  end

  // Correlator value of the sent standard at the last preamble sample.
  int peak_seen;
  int mark_q [$];     // 1 at the output position of the last preamble sample
  always @(negedge clk) if (rst_n && out_valid) begin
    if (mark_q.pop_front() >= 0) peak_seen = $signed(corr_re[send_std]);
  end
  int send_std;

  task automatic smp(real si, real sq, real sigma, int mark);
    @(negedge clk);
    in_valid = 1;
    in_i = to_smp(si + sigma * gauss());
    in_q = to_smp(sq + sigma * gauss());
    mark_q.push_back(mark);
  endtask

  task automatic trial(int s, real sigma, output bit ok);
    fs_count = 0; fs_std = -1; peak_seen = -999;
    send_std = s;
    for (int k = 0; k < 50; k++) smp(0.0, 0.0, sigma, -1);
    for (int k = 0; k < 40; k++) smp($urandom_range(0,1) ? A : -A, $urandom_range(0,1) ? A : -A, sigma, -1);
    for (int k = 0; k < lens[s]; k++)
      smp(pre_i[s][k] ? A : -A, pre_q[s][k] ? A : -A, sigma, (k == lens[s]-1) ? 1 : -1);
    for (int k = 0; k < 100; k++) smp($urandom_range(0,1) ? A : -A, $urandom_range(0,1) ? A : -A, sigma, -1);
    for (int k = 0; k < 40; k++) smp(0.0, 0.0, sigma, -1);
    @(negedge clk); in_valid = 0;
    repeat (10) @(negedge clk);
    ok = (fs_count == 1 && fs_std == s);
  endtask

  initial begin
    real sigma, rate [2][8], ethr;
    int snr_db [8] = '{0, 1, 2, 3, 4, 5, 6, 10};
    int good;
    bit ok;
    in_valid = 0; in_i = 0; in_q = 0; bus_we = 0; bus_addr = 0; bus_wdata = 0;
    for (int s = 0; s < NS; s++)
      for (int k = 0; k < L; k++) begin pre_i[s][k] = 1'($urandom); pre_q[s][k] = 1'($urandom); end
    repeat (4) @(posedge clk);
    rst_n = 1;
    wr(A_ENERGY_WIN, 16);
    for (int s = 0; s < NS; s++) begin
      logic [1:0][31:0] ci, cq;
      ci = '0; cq = '0;
      for (int k = 0; k < lens[s]; k++) begin
        ci[k/32][k%32] = pre_i[s][lens[s]-1-k];
        cq[k/32][k%32] = pre_q[s][lens[s]-1-k];
      end
      wr(8'(16*(s+1)) + 8'(O_CORR_LEN), lens[s]);
      wr(8'(16*(s+1)) + 8'(O_CORR_THRESH), thr[s]);
      wr(8'(16*(s+1)) + 8'(O_PACKET_LEN), 100);
      for (int c = 0; c < 2; c++) begin
        wr(8'(16*(s+1)) + 8'(O_COEF_BASE) + 8'(2*c), ci[c]);
        wr(8'(16*(s+1)) + 8'(O_COEF_BASE) + 8'(2*c+1), cq[c]);
      end
    end
    wr(A_STD_ENABLE, 3'b111);
    for (int p = 0; p < 8; p++) begin
      // complex SNR = 2A^2 / (2 sigma^2)
      sigma = A / $pow(10.0, real'(snr_db[p]) / 20.0);
      // energy threshold a quarter of the way from the noise-only to the
      // signal-plus-noise window energy (16-sample window, energies >> 8)
      ethr = 16.0 * (0.5 * A * A + 2.0 * sigma * sigma) / 256.0;
      wr(A_ENERGY_THRESH, 32'($rtoi(ethr)));
      for (int t = 0; t < 2; t++) begin
        good = 0;
        for (int n = 0; n < TRIALS; n++) begin
          trial(t, sigma, ok);
          if (ok) good++;
          if (snr_db[p] == 10) begin
            checks++;
            if (!ok || peak_seen <= thr[t]) begin
              failures++;
              $display("10 dB trial missed: std %0d frames %0d peak %0d", t, fs_count, peak_seen);
            end
          end
        end
        rate[t][p] = real'(good) / real'(TRIALS);
      end
      $display("SNR %2d dB: correct standard detection, 32-sample preamble %.3f, 64-sample preamble %.3f",
               snr_db[p], rate[0][p], rate[1][p]);
    end
    for (int t = 0; t < 2; t++) begin
      checks++;
      if (rate[t][6] < rate[t][0] || rate[t][6] < 0.9) begin
        failures++;
        $display("preamble %0d: rate at 6 dB %.3f, at 0 dB %.3f", lens[t], rate[t][6], rate[t][0]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
