// tb_shared_regs: writes random values to every mapped register through the
// host bus, then checks both the configuration outputs and the read-back
// against a model, checks the reset values, that unmapped addresses read 0,
// and that frame_start events are counted per standard.
module tb_shared_regs;
  import pd_pkg::*;
  localparam int NS = 3, NC = 2, TAPS = 32, CW = 9;
  logic clk = 0, rst_n = 0;
  logic bus_we, frame_start;
  logic [7:0] bus_addr;
  logic [31:0] bus_wdata, bus_rdata, energy_thresh;
  logic [6:0] energy_win;
  logic [NS-1:0] std_enable;
  logic [NS-1:0][7:0] corr_len;
  logic [NS-1:0][CW-1:0] corr_thresh;
  logic [NS-1:0][NC-1:0][TAPS-1:0] coef_i, coef_q;
  std_params_t [NS-1:0] params;
  logic [1:0] std_id;
  int checks = 0, failures = 0;

  shared_regs #(.NUM_STD(NS), .N_CORES(NC), .TAPS(TAPS)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(logic [7:0] a, logic [31:0] d);
    @(negedge clk); bus_we = 1; bus_addr = a; bus_wdata = d;
    @(negedge clk); bus_we = 0;
  endtask

  task automatic rd_check(logic [7:0] a, logic [31:0] exp);
    @(negedge clk); bus_addr = a; #1;
    checks++;
    if (bus_rdata !== exp) begin
      failures++; $display("read %h: %h expected %h", a, bus_rdata, exp);
    end
  endtask

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("mismatch: %s", what); end
  endtask

  initial begin
    logic [31:0] v [256];
    logic [31:0] mask;
    logic [7:0] a;
    int cnt [NS];
    bus_we = 0; bus_addr = 0; bus_wdata = 0; frame_start = 0; std_id = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    chk(energy_win == 7'd16 && std_enable == 0 && coef_i == '0 && corr_thresh[1] == 9'sd255, "reset values");
    // random configuration
    for (int r = 0; r < 4; r++) begin
      v[A_ENERGY_WIN] = $urandom_range(1, 64); wr(A_ENERGY_WIN, v[A_ENERGY_WIN]);
      v[A_ENERGY_THRESH] = $urandom; wr(A_ENERGY_THRESH, v[A_ENERGY_THRESH]);
      v[A_STD_ENABLE] = $urandom_range(0, 7); wr(A_STD_ENABLE, v[A_STD_ENABLE]);
      for (int s = 0; s < NS; s++) begin
        for (int o = 0; o < 16; o++) begin
          a = 8'(16 * (s + 1) + o);
          v[a] = $urandom;
          wr(a, v[a]);
        end
      end
      // outputs
      chk(energy_win == v[A_ENERGY_WIN][6:0], "energy_win");
      chk(energy_thresh == v[A_ENERGY_THRESH], "energy_thresh");
      chk(std_enable == v[A_STD_ENABLE][2:0], "std_enable");
      for (int s = 0; s < NS; s++) begin
        a = 8'(16 * (s + 1));
        chk(corr_len[s] == v[a][7:0], "corr_len");
        chk(corr_thresh[s] == v[a+1][CW-1:0], "corr_thresh");
        chk(params[s].packet_len == v[a+2][15:0], "packet_len");
        chk(params[s].symbol_size == v[a+3][15:0], "symbol_size");
        chk(params[s].training_len == v[a+4][15:0], "training_len");
        for (int c = 0; c < NC; c++) begin
          chk(coef_i[s][c] == v[a+8+2*c], "coef_i");
          chk(coef_q[s][c] == v[a+9+2*c], "coef_q");
        end
        // read-back
        rd_check(a, {24'd0, v[a][7:0]});
        rd_check(a+1, {{23{v[a+1][CW-1]}}, v[a+1][CW-1:0]});
        rd_check(a+2, {16'd0, v[a+2][15:0]});
        rd_check(a+3, {16'd0, v[a+3][15:0]});
        rd_check(a+4, {16'd0, v[a+4][15:0]});
        rd_check(a+6, 32'd0);
        for (int c = 0; c < 2*NC; c++) rd_check(a+8+8'(c), v[a+8+c]);
      end
      rd_check(A_ENERGY_WIN, {25'd0, v[A_ENERGY_WIN][6:0]});
      rd_check(A_ENERGY_THRESH, v[A_ENERGY_THRESH]);
      rd_check(A_STD_ENABLE, {29'd0, v[A_STD_ENABLE][2:0]});
      rd_check(8'h04, 32'd0);
      rd_check(8'h50, 32'd0);
    end
    // frame counters
    for (int s = 0; s < NS; s++) cnt[s] = 0;
    for (int n = 0; n < 40; n++) begin
      @(negedge clk);
      frame_start = 1; std_id = 2'($urandom_range(0, 2));
      cnt[std_id]++;
      @(negedge clk);
      frame_start = 0;
    end
    for (int s = 0; s < NS; s++) rd_check(8'(16 * (s + 1) + 5), 32'(cnt[s]));
    rd_check(A_STATUS, {16'd40, 14'd0, std_id});
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
