// tb_standard_detection: random Packet Detect patterns on a sample stream with
// random strobe gaps. A model of the selection rule (longest enabled preamble,
// lowest index on a tie) and of the packet lock-out checks frame_start, std_id,
// the active parameter set, in_packet and the one-clock sample delay. Counts
// frame starts, same-cycle conflicts resolved by length, and detections ignored
// inside a packet or because the standard is disabled.
module tb_standard_detection;
  import pd_pkg::*;
  localparam int NS = 3, W = 16;
  logic clk = 0, rst_n = 0;
  logic in_valid, out_valid, frame_start, in_packet;
  logic signed [W-1:0] in_i, in_q, out_i, out_q;
  logic [NS-1:0] detect, std_enable;
  logic [NS-1:0][7:0] corr_len;
  std_params_t [NS-1:0] params;
  logic [1:0] std_id;
  std_params_t active;
  int checks = 0, failures = 0, starts = 0, conflicts = 0, locked = 0, disabled = 0;

  standard_detection #(.NUM_STD(NS), .SAMPLE_W(W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int remain, win, nc;
    logic exp_fs, exp_inp;
    logic [1:0] exp_id;
    std_params_t exp_act;
    logic signed [W-1:0] ei, eq;
    logic ev;
    in_valid = 0; in_i = 0; in_q = 0; detect = 0;
    corr_len = {8'd64, 8'd64, 8'd32};
    std_enable = 3'b111;
    for (int s = 0; s < NS; s++) begin
      params[s].packet_len = 16'(20 + 7 * s);
      params[s].symbol_size = 16'(64 << s);
      params[s].training_len = 16'(160 + s);
    end
    remain = 0; exp_id = 0; exp_act = '0; exp_inp = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 6000; n++) begin
      @(negedge clk);
      if (n == 2000) corr_len = {8'd16, 8'd64, 8'd64};       // run-time length change
      if (n == 3000) params[0].packet_len = 0;                // no lock-out for standard 0
      if (n >= 4000) std_enable = 3'($urandom);              // standards switched on and off
      in_valid = ($urandom_range(0, 4) != 0);
      in_i = W'($urandom); in_q = W'($urandom);
      detect = ($urandom_range(0, 9) == 0) ? 3'($urandom) : 3'b000;
      // model
      exp_fs = 0;
      win = -1;
      nc = 0;
      for (int s = 0; s < NS; s++)
        if (detect[s] && std_enable[s]) begin
          nc++;
          if (win < 0 || corr_len[s] > corr_len[win]) win = s;
        end
      if (in_valid && (detect & ~std_enable) != 0) disabled++;
      if (remain > 0) begin
        if (in_valid) begin
          if (win >= 0) locked++;
          remain--;
        end
        exp_inp = 1;
      end else if (in_valid && win >= 0) begin
        exp_fs = 1;
        exp_id = 2'(win);
        exp_act = params[win];
        exp_inp = (params[win].packet_len != 0);
        remain = (params[win].packet_len != 0) ? int'(params[win].packet_len) - 1 : 0;
        if (nc > 1) conflicts++;
        starts++;
      end else exp_inp = 0;
      ei = in_i; eq = in_q; ev = in_valid;
      @(posedge clk); #1;
      checks++;
      if (frame_start != exp_fs || (exp_fs && (std_id != exp_id || active != exp_act)) ||
          in_packet != exp_inp || out_valid != ev || out_i != ei || out_q != eq) begin
        failures++;
        $display("n %0d: fs %b exp %b id %0d exp %0d inp %b exp %b", n, frame_start, exp_fs,
                 std_id, exp_id, in_packet, exp_inp);
      end
    end
    checks++;
    if (starts < 50 || conflicts < 10 || locked < 10 || disabled < 10) begin
      failures++;
    end
    $display("frame starts %0d, conflicts %0d, ignored in packet %0d, disabled %0d", starts, conflicts, locked, disabled);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
