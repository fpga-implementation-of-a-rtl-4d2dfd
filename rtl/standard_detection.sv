// standard_detection: picks the detected standard and hands out its parameters.
//
// Several correlators may fire on the same sample. Among the enabled standards
// that report Packet Detect, the one with the longest programmed preamble wins,
// because a long preamble is the less likely false alarm; equal lengths go to
// the lower index. The winner's parameter set (packet length, symbol size,
// training length), loaded beforehand by the host into shared registers, is
// latched onto `active`, frame_start pulses for one clock and std_id names
// the standard.
//
// After a frame start the block stays in PACKET for packet_len received
// samples (in_packet high, counting the frame-start sample as the first) and
// ignores further detections; packet_len = 0 gives no lock-out.
//
// Timing: one register stage. frame_start is high in the same cycle as the
// sample on out_i/out_q that completed the preamble.
//
// Priority of the longer preamble and host-loaded parameter registers follow
// the paper; the tie rule, the lock-out and the field widths are this design's
// choices.
module standard_detection
#(
  parameter int unsigned NUM_STD  = pd_pkg::NUM_STD,
  parameter int unsigned SAMPLE_W = pd_pkg::SAMPLE_W,
  parameter int unsigned LEN_W    = pd_pkg::LEN_W,
  localparam int unsigned ID_W    = (NUM_STD > 1) ? $clog2(NUM_STD) : 1
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           in_valid,
  input  logic signed [SAMPLE_W-1:0]     in_i,
  input  logic signed [SAMPLE_W-1:0]     in_q,
  input  logic [NUM_STD-1:0]             detect,
  input  logic [NUM_STD-1:0]             std_enable,
  input  logic [NUM_STD-1:0][LEN_W-1:0]  corr_len,
  input  pd_pkg::std_params_t [NUM_STD-1:0]      params,
  output logic                           out_valid,
  output logic signed [SAMPLE_W-1:0]     out_i,
  output logic signed [SAMPLE_W-1:0]     out_q,
  output logic                           frame_start,
  output logic [ID_W-1:0]                std_id,
  output logic                           in_packet,
  output pd_pkg::std_params_t                    active
);

  typedef enum logic {S_IDLE, S_PACKET} state_t;
  state_t state;

  logic [NUM_STD-1:0] cand;
  logic               found;
  logic [ID_W-1:0]    win_id;
  logic [LEN_W-1:0]   win_len;
  logic [15:0]        remain;   // samples of the packet still to come

  // Longest enabled candidate, lowest index on a tie.
  always_comb begin
    cand    = detect & std_enable;
    found   = 1'b0;
    win_id  = '0;
    win_len = '0;
    for (int s = 0; s < NUM_STD; s++) begin
      if (cand[s] && (!found || corr_len[s] > win_len)) begin
        found   = 1'b1;
        win_id  = ID_W'(s);
        win_len = corr_len[s];
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      frame_start <= 1'b0;
      std_id      <= '0;
      in_packet   <= 1'b0;
      active      <= '0;
      remain      <= '0;
      out_valid   <= 1'b0;
      out_i       <= '0;
      out_q       <= '0;
    end else begin
      out_valid   <= in_valid;
      out_i       <= in_i;
      out_q       <= in_q;
      frame_start <= 1'b0;
      unique case (state)
        S_IDLE: begin
          in_packet <= 1'b0;
          if (in_valid && found) begin
            frame_start <= 1'b1;
            std_id      <= win_id;
            active      <= params[win_id];
            if (params[win_id].packet_len != '0) begin
              in_packet <= 1'b1;
              remain    <= params[win_id].packet_len - 16'd1;
              state     <= (params[win_id].packet_len == 16'd1) ? S_IDLE : S_PACKET;
            end
          end
        end
        S_PACKET: begin
          if (in_valid) begin
            remain <= remain - 16'd1;
            if (remain == 16'd1) state <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // A frame start only happens on a received sample.
  a_start_on_sample: assert property (@(posedge clk) disable iff (!rst_n)
    frame_start |-> out_valid);

endmodule
