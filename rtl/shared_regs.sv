// shared_regs: configuration registers shared between the host and the detector.
//
// The host processor writes here what makes the detector run-time adaptable:
// the energy window length and threshold, which standards are searched for,
// and for every standard its correlation length, its detection threshold, its
// 32-bit I and Q coefficient registers (one sign bit per preamble sample, see
// window_core for the bit order) and the parameter set the standard detector
// hands out. The host can read back everything it wrote, plus the index of the
// last detected standard and a frame counter per standard.
//
// Bus: one 32-bit word per address. A write takes effect at the clock edge
// where bus_we is high; bus_rdata is combinational from bus_addr. Address map
// in pd_pkg (A_* and O_*). Unmapped addresses read as 0 and ignore writes.
//
// Reset: coefficients and parameters 0, all standards disabled, energy window
// 16 samples, thresholds at their largest value (nothing detected).
//
// Coefficient registers of 32 bits written by the processor follow the paper;
// the bus, the address map, the read-back and the reset values are this
// design's own.
module shared_regs
#(
  parameter int unsigned NUM_STD = pd_pkg::NUM_STD,
  parameter int unsigned N_CORES = pd_pkg::N_CORES,
  parameter int unsigned TAPS    = pd_pkg::CORE_TAPS,
  parameter int unsigned MAX_WIN = pd_pkg::MAX_WIN,
  parameter int unsigned LEN_W   = pd_pkg::LEN_W,
  localparam int unsigned CORR_W = $clog2(2 * N_CORES * TAPS + 1) + 1,
  localparam int unsigned WL_W   = $clog2(MAX_WIN) + 1,
  localparam int unsigned ID_W   = (NUM_STD > 1) ? $clog2(NUM_STD) : 1
) (
  input  logic                                       clk,
  input  logic                                       rst_n,
  // host bus
  input  logic                                       bus_we,
  input  logic [7:0]                                 bus_addr,
  input  logic [31:0]                                bus_wdata,
  output logic [31:0]                                bus_rdata,
  // configuration
  output logic [WL_W-1:0]                            energy_win,
  output logic [31:0]                                energy_thresh,
  output logic [NUM_STD-1:0]                         std_enable,
  output logic [NUM_STD-1:0][LEN_W-1:0]              corr_len,
  output logic [NUM_STD-1:0][CORR_W-1:0]             corr_thresh,
  output logic [NUM_STD-1:0][N_CORES-1:0][TAPS-1:0]  coef_i,
  output logic [NUM_STD-1:0][N_CORES-1:0][TAPS-1:0]  coef_q,
  output pd_pkg::std_params_t [NUM_STD-1:0]                  params,
  // detection events
  input  logic                                       frame_start,
  input  logic [ID_W-1:0]                            std_id
);

  logic [ID_W-1:0]               last_std;
  logic [15:0]                   frame_cnt;
  logic [NUM_STD-1:0][15:0]      std_cnt;

  // Address decode of the per-standard block.
  logic [3:0] blk, off;
  assign blk = bus_addr[7:4];
  assign off = bus_addr[3:0];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      energy_win    <= WL_W'(16);
      energy_thresh <= '1;
      std_enable    <= '0;
      corr_len      <= '0;
      coef_i        <= '0;
      coef_q        <= '0;
      params        <= '0;
      for (int s = 0; s < NUM_STD; s++) corr_thresh[s] <= {1'b0, {(CORR_W-1){1'b1}}};
    end else if (bus_we) begin
      if (bus_addr == pd_pkg::A_ENERGY_WIN)    energy_win    <= bus_wdata[WL_W-1:0];
      if (bus_addr == pd_pkg::A_ENERGY_THRESH) energy_thresh <= bus_wdata;
      if (bus_addr == pd_pkg::A_STD_ENABLE)    std_enable    <= bus_wdata[NUM_STD-1:0];
      for (int s = 0; s < NUM_STD; s++) begin
        if (32'(blk) == 32'(pd_pkg::A_STD_BASE[7:4]) + 32'(s)) begin
          if (off == pd_pkg::O_CORR_LEN)     corr_len[s]              <= bus_wdata[LEN_W-1:0];
          if (off == pd_pkg::O_CORR_THRESH)  corr_thresh[s]           <= bus_wdata[CORR_W-1:0];
          if (off == pd_pkg::O_PACKET_LEN)   params[s].packet_len     <= bus_wdata[15:0];
          if (off == pd_pkg::O_SYMBOL_SIZE)  params[s].symbol_size    <= bus_wdata[15:0];
          if (off == pd_pkg::O_TRAINING_LEN) params[s].training_len   <= bus_wdata[15:0];
          for (int c = 0; c < N_CORES; c++) begin
            if (32'(off) == 32'(pd_pkg::O_COEF_BASE) + 32'(2 * c))     coef_i[s][c] <= bus_wdata[TAPS-1:0];
            if (32'(off) == 32'(pd_pkg::O_COEF_BASE) + 32'(2 * c + 1)) coef_q[s][c] <= bus_wdata[TAPS-1:0];
          end
        end
      end
    end
  end

  // Detection statistics for the host.
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      last_std  <= '0;
      frame_cnt <= '0;
      std_cnt   <= '0;
    end else if (frame_start) begin
      last_std          <= std_id;
      frame_cnt         <= frame_cnt + 16'd1;
      std_cnt[std_id]   <= std_cnt[std_id] + 16'd1;
    end
  end

  always_comb begin
    bus_rdata = '0;
    if (bus_addr == pd_pkg::A_ENERGY_WIN)    bus_rdata = 32'(energy_win);
    if (bus_addr == pd_pkg::A_ENERGY_THRESH) bus_rdata = energy_thresh;
    if (bus_addr == pd_pkg::A_STD_ENABLE)    bus_rdata = 32'(std_enable);
    if (bus_addr == pd_pkg::A_STATUS)        bus_rdata = {frame_cnt, 16'(last_std)};
    for (int s = 0; s < NUM_STD; s++) begin
      if (32'(blk) == 32'(pd_pkg::A_STD_BASE[7:4]) + 32'(s)) begin
        if (off == pd_pkg::O_CORR_LEN)     bus_rdata = 32'(corr_len[s]);
        if (off == pd_pkg::O_CORR_THRESH)  bus_rdata = 32'(signed'(corr_thresh[s]));
        if (off == pd_pkg::O_PACKET_LEN)   bus_rdata = 32'(params[s].packet_len);
        if (off == pd_pkg::O_SYMBOL_SIZE)  bus_rdata = 32'(params[s].symbol_size);
        if (off == pd_pkg::O_TRAINING_LEN) bus_rdata = 32'(params[s].training_len);
        if (off == pd_pkg::O_COUNT)        bus_rdata = 32'(std_cnt[s]);
        for (int c = 0; c < N_CORES; c++) begin
          if (32'(off) == 32'(pd_pkg::O_COEF_BASE) + 32'(2 * c))     bus_rdata = 32'(coef_i[s][c]);
          if (32'(off) == 32'(pd_pkg::O_COEF_BASE) + 32'(2 * c + 1)) bus_rdata = 32'(coef_q[s][c]);
        end
      end
    end
  end

endmodule
