// tb_energy_detector: bursts of strong and weak random samples with random
// gaps in the strobe, window lengths changed between bursts. An integer model
// keeps the energies seen since the last window change and checks, for every
// output sample 3 clocks after its input, the sample itself, the windowed sum
// of Eq. (1) and the Energy Detect decision (sum > threshold once the window
// is full).
module tb_energy_detector;
  localparam int W = 16, MW = 64, SH = 8;
  logic clk = 0, rst_n = 0;
  logic in_valid, out_valid, energy_det;
  logic signed [W-1:0] in_i, in_q, out_i, out_q;
  logic [6:0] win_len;
  logic [31:0] threshold, energy;
  int checks = 0, failures = 0, rises = 0, falls = 0;

  energy_detector #(.SAMPLE_W(W), .MAX_WIN(MW), .E_SHIFT(SH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint hist [$];              // energies since last restart, newest last
  logic   h_v [3];
  logic signed [W-1:0] h_i [3], h_q [3];
  longint h_sum [3];
  logic   h_full [3];
  logic   prev_det = 0;

  initial begin
    int amp, wl;
    longint e, s;
    in_valid = 0; in_i = 0; in_q = 0; win_len = 16; threshold = 32'd20000;
    for (int k = 0; k < 3; k++) begin h_v[k] = 0; h_i[k] = 0; h_q[k] = 0; h_sum[k] = 0; h_full[k] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int burst = 0; burst < 24; burst++) begin
      // drain, then change the window (the sum restarts)
      in_valid = 0;
      repeat (5) @(negedge clk);
      case (burst % 4)
        0: wl = 16; 1: wl = 64; 2: wl = 1; default: wl = $urandom_range(2, 63);
      endcase
      win_len = 7'(wl);
      hist.delete();
      for (int k = 0; k < 3; k++) h_v[k] = 0;
      repeat (2) @(negedge clk);
      for (int n = 0; n < 150; n++) begin
        // check the output of three clocks ago
        if (h_v[2]) begin
          checks++;
          if (!out_valid || out_i != h_i[2] || out_q != h_q[2] ||
              energy_det != (h_full[2] && h_sum[2] > longint'(threshold)) ||
              (h_full[2] && longint'(energy) != h_sum[2])) begin
            failures++;
            $display("burst %0d n %0d: det %b exp %b energy %0d exp %0d full %b", burst, n,
                     energy_det, h_full[2] && h_sum[2] > longint'(threshold), energy, h_sum[2], h_full[2]);
          end
          if (energy_det && !prev_det) rises++;
          if (!energy_det && prev_det) falls++;
          prev_det = energy_det;
        end else begin
          checks++;
          if (out_valid) begin failures++; $display("unexpected out_valid"); end
        end
        amp = ((n / 50) % 2 == 0) ? 4000 : 300;
        in_valid = ($urandom_range(0, 3) != 0);
        in_i = W'($signed($urandom_range(0, 2*amp)) - amp);
        in_q = W'($signed($urandom_range(0, 2*amp)) - amp);
        for (int k = 2; k > 0; k--) begin
          h_v[k] = h_v[k-1]; h_i[k] = h_i[k-1]; h_q[k] = h_q[k-1]; h_sum[k] = h_sum[k-1]; h_full[k] = h_full[k-1];
        end
        h_v[0] = in_valid; h_i[0] = in_i; h_q[0] = in_q;
        if (in_valid) begin
          e = (longint'(in_i) * in_i + longint'(in_q) * in_q) >>> SH;
          hist.push_back(e);
          s = 0;
          for (int k = 0; k < wl && k < hist.size(); k++) s += hist[hist.size() - 1 - k];
          h_sum[0] = s;
          h_full[0] = (hist.size() >= wl);
        end
        @(negedge clk);
      end
    end
    checks++;
    if (rises < 10 || falls < 10) begin
      failures++;
      $display("energy detect toggled too rarely: %0d rises %0d falls", rises, falls);
    end
    $display("rises %0d falls %0d", rises, falls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
