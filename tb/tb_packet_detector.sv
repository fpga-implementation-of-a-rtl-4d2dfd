// tb_packet_detector: end-to-end run of the whole detector at its default
// size (three standards, 64-point correlators, 32-bit coefficient registers).
//
// The host side is played by bus writes: preambles of 32, 64 and 64 random
// complex samples are reduced to sign bits and loaded time reversed into the
// coefficient registers, thresholds are 50 and 100 on Re{P}. The sample stream
// is built from segments: silence, a random lead-in that wakes the energy
// detector, a preamble (sign-preserving noise added), a random payload.
// Scenarios, each counted:
//   - a packet of each standard is recognised (frame start on the last preamble
//     sample, right standard, Re{P} peak of 2L, in_packet for packet_len);
//   - 32- and 64-point correlators firing on the same sample: the 64 wins;
//   - a preamble inside a running packet is ignored (lock-out);
//   - a weak preamble below the energy threshold is not detected (gating);
//   - a standard disabled at run time is not reported; new coefficients
//     loaded at run time are detected (mode switch);
//   - read-back of the per-standard frame counters.
module tb_packet_detector;
  import pd_pkg::*;
  localparam int W = 16, NS = 3, L = 64;
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
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- preambles and host configuration ----------------
  int lens [NS] = '{32, 64, 64};
  int thr  [NS] = '{50, 100, 100};
  int plen [NS] = '{150, 200, 250};
  int pre_i [4][L], pre_q [4][L];     // preamble values; type 3 is loaded at run time

  task automatic wr(logic [7:0] a, logic [31:0] d);
    @(negedge clk); bus_we = 1; bus_addr = a; bus_wdata = d;
    @(negedge clk); bus_we = 0;
  endtask

  // Sign-map a preamble (1 for >= 0) and load it time reversed, last sample
  // of the preamble in bit 0 of the first register.
  task automatic load_std(int s, int ptype, int len, int offset);
    logic [1:0][31:0] ci, cq;
    logic [7:0] b;
    ci = '0; cq = '0;
    for (int k = 0; k < len; k++) begin
      ci[k/32][k%32] = (pre_i[ptype][offset + len-1-k] >= 0);
      cq[k/32][k%32] = (pre_q[ptype][offset + len-1-k] >= 0);
    end
    b = 8'(16 * (s + 1));
    wr(b + 8'(O_CORR_LEN), len);
    wr(b + 8'(O_CORR_THRESH), thr[s]);
    for (int c = 0; c < 2; c++) begin
      wr(b + 8'(O_COEF_BASE) + 8'(2*c), ci[c]);
      wr(b + 8'(O_COEF_BASE) + 8'(2*c + 1), cq[c]);
    end
  endtask

  // ---------------- stream generation ----------------
  typedef struct { logic signed [W-1:0] i, q; int tag; int peak_std; } smp_t;
  smp_t seg [$];    // samples of the segment being built
  smp_t expq [$];   // expectations of everything sent, in order

  function automatic logic signed [W-1:0] rnd(int amp);
    return W'($signed($urandom_range(0, 2*amp)) - amp);
  endfunction

  task automatic add_silence(int n);
    for (int k = 0; k < n; k++) seg.push_back('{0, 0, -1, -1});
  endtask
  task automatic add_random(int n);
    for (int k = 0; k < n; k++) seg.push_back('{rnd(2000), rnd(2000), -1, -1});
  endtask
  // Preamble of type ptype, amplitude amp, noise below the amplitude.
  // tag: standard expected to start a frame on the last sample (-1: none).
  task automatic add_preamble(int ptype, int len, int amp, int tag, int peak_std);
    for (int k = 0; k < len; k++) begin
      smp_t x;
      x.i = W'((pre_i[ptype][k] >= 0 ? amp : -amp) + rnd(amp * 3 / 10));
      x.q = W'((pre_q[ptype][k] >= 0 ? amp : -amp) + rnd(amp * 3 / 10));
      x.tag = (k == len - 1) ? tag : -1;
      x.peak_std = (k == len - 1) ? peak_std : -1;
      seg.push_back(x);
    end
  endtask

  // Send the segment with random strobe gaps.
  task automatic send();
    while (seg.size() > 0) begin
      smp_t x;
      @(negedge clk);
      if ($urandom_range(0, 5) == 0) begin
        in_valid = 0;
      end else begin
        x = seg.pop_front();
        in_valid = 1; in_i = x.i; in_q = x.q;
        expq.push_back(x);
      end
    end
    @(negedge clk); in_valid = 0;
    repeat (12) @(negedge clk);   // drain the pipeline
  endtask

  // ---------------- output monitor ----------------
  int frames [NS], conflicts = 0, locked = 0, gated_ok = 0, disabled_seen = 0, energy_rises = 0;
  int inpkt_run = 0, inpkt_checks = 0, mode_switch_ok = 0;
  logic prev_e = 0, prev_inpkt = 0;
  int   last_std = 0;
  logic [NS-1:0] en_mask = 3'b111;

  always @(negedge clk) if (rst_n) begin
    if (energy_det && !prev_e) energy_rises++;
    prev_e = energy_det;
    if (out_valid) begin
      smp_t x;
      x = expq.pop_front();
      checks++;
      if (out_i != x.i || out_q != x.q) begin failures++; $display("output sample out of order"); end
      if (x.tag >= 0) begin
        checks++;
        if (!frame_start || int'(std_id) != x.tag || int'(active.packet_len) != plen[x.tag]) begin
          failures++;
          $display("missed frame: fs %b std %0d expected %0d (detect %b re %0d %0d %0d)", frame_start,
                   std_id, x.tag, detect, $signed(corr_re[0]), $signed(corr_re[1]), $signed(corr_re[2]));
        end else begin
          frames[x.tag]++;
          last_std = x.tag;
        end
      end else begin
        checks++;
        if (frame_start) begin failures++; $display("unexpected frame start, std %0d", std_id); end
      end
      if (x.peak_std >= 0) begin
        checks++;
        if (int'($signed(corr_re[x.peak_std])) != 2 * lens[x.peak_std]) begin
          failures++;
          $display("peak of std %0d is %0d, expected %0d", x.peak_std, $signed(corr_re[x.peak_std]), 2 * lens[x.peak_std]);
        end
      end
      if (frame_start && $countones(detect & en_mask) > 1) conflicts++;
      if (!frame_start && in_packet && (detect & en_mask) != 0) locked++;
      if (!frame_start && !in_packet && (detect & ~en_mask) != 0) disabled_seen++;
      // in_packet must stay high for exactly packet_len output samples
      if (in_packet) inpkt_run++;
      if (!in_packet && prev_inpkt) begin
        checks++; inpkt_checks++;
        if (inpkt_run != plen[last_std]) begin
          failures++; $display("in_packet lasted %0d samples, expected %0d", inpkt_run, plen[last_std]);
        end
        inpkt_run = 0;
      end
      prev_inpkt = in_packet;
    end
  end

  task automatic rd_expect(logic [7:0] a, logic [31:0] exp);
    @(negedge clk); bus_addr = a; #1;
    checks++;
    if (bus_rdata != exp) begin failures++; $display("register %h reads %0d, expected %0d", a, bus_rdata, exp); end
  endtask

  task automatic packet(int ptype, int s, int tag);
    add_silence(40);
    add_random(40);
    add_preamble(ptype, lens[s], 2000, tag, tag);
    add_random(plen[s] + 20);
    add_silence(40);
    send();
  endtask

  initial begin
    int f0;
    in_valid = 0; in_i = 0; in_q = 0; bus_we = 0; bus_addr = 0; bus_wdata = 0;
    for (int s = 0; s < NS; s++) frames[s] = 0;
    for (int p = 0; p < 4; p++)
      for (int k = 0; k < L; k++) begin pre_i[p][k] = rnd(1000); pre_q[p][k] = rnd(1000); end
    repeat (4) @(posedge clk);
    rst_n = 1;
    // host configuration
    wr(A_ENERGY_WIN, 16);
    wr(A_ENERGY_THRESH, 20000);
    for (int s = 0; s < NS; s++) begin
      load_std(s, s, lens[s], 0);
      wr(8'(16 * (s + 1)) + 8'(O_PACKET_LEN), plen[s]);
      wr(8'(16 * (s + 1)) + 8'(O_SYMBOL_SIZE), 64);
      wr(8'(16 * (s + 1)) + 8'(O_TRAINING_LEN), 160);
    end
    wr(A_STD_ENABLE, 3'b111);

    // 1. one packet of each standard, the 64-point type 2 first
    packet(1, 1, 1);
    packet(0, 0, 0);
    packet(2, 2, 2);

    // 2. same-sample conflict: standard 0 loaded with the last 32 samples of
    //    preamble type 1, so the 32- and 64-point correlators peak together
    load_std(0, 1, 32, 32);
    packet(1, 1, 1);
    checks++;
    if (conflicts < 1) begin failures++; $display("priority conflict never happened"); end
    load_std(0, 0, 32, 0);

    // 3. a standard-0 preamble inside a running standard-2 packet is ignored
    add_silence(40); add_random(40);
    add_preamble(2, 64, 2000, 2, 2);
    add_random(50);
    add_preamble(0, 32, 2000, -1, 0);
    add_random(plen[2]);
    add_silence(40);
    send();
    checks++;
    if (locked < 1) begin failures++; $display("lock-out never happened"); end

    // 4. weak preamble below the energy threshold: never reaches the correlators
    f0 = frames[1];
    add_silence(60);
    add_preamble(1, 64, 40, -1, -1);
    add_silence(60);
    send();
    checks++;
    if (frames[1] == f0) gated_ok++; else begin failures++; $display("weak preamble detected"); end

    // 5. run-time mode switch: disable standard 1, then reload standard 2 with
    //    a new preamble (type 3)
    wr(A_STD_ENABLE, 3'b101); en_mask = 3'b101;
    packet(1, 1, -1);
    checks++;
    if (disabled_seen < 1) begin failures++; $display("disabled standard never fired"); end
    wr(A_STD_ENABLE, 3'b111); en_mask = 3'b111;
    load_std(2, 3, 64, 0);
    f0 = frames[2];
    packet(3, 2, 2);
    if (frames[2] == f0 + 1) mode_switch_ok++;
    packet(1, 1, 1);

    // 6. host read-back of the frame counters
    rd_expect(8'h10 + 8'(O_COUNT), 32'(frames[0]));
    rd_expect(8'h20 + 8'(O_COUNT), 32'(frames[1]));
    rd_expect(8'h30 + 8'(O_COUNT), 32'(frames[2]));

    // every mechanism must have happened
    checks++;
    if (frames[0] < 1 || frames[1] < 3 || frames[2] < 2 || gated_ok < 1 || mode_switch_ok < 1 ||
        energy_rises < 5 || inpkt_checks < 5 || expq.size() != 0) begin
      failures++;
      $display("a mechanism was not exercised");
    end
    $display("frames %0d %0d %0d, energy rises %0d, conflicts %0d, ignored in packet %0d, gated %0d, disabled %0d, mode switch %0d, packet lengths checked %0d",
             frames[0], frames[1], frames[2], energy_rises, conflicts, locked, gated_ok, disabled_seen,
             mode_switch_ok, inpkt_checks);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
