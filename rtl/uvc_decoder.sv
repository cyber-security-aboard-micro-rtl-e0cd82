// uvc_decoder: receiver side of the LED visual link.
//
// A camera on the observing drone delivers one frame at a time; a CNN turns
// each frame into a score, the estimated probability that the other drone's
// LEDs are on (8-bit, 0..255 standing for 0..1). This block turns that score
// stream back into messages:
//   1. Bit clock: in HUNT, the first frame whose score reaches THRESHOLD
//      after a frame below it is taken as the first frame of the first start
//      bit. From then on every FRAMES_PER_BIT frames form one bit.
//   2. Bit decision: the scores of the FRAMES_PER_BIT frames of a bit are
//      summed and compared with FRAMES_PER_BIT*THRESHOLD, i.e. the mean score
//      is compared with 0.5.
//   3. Framing: after 12 bits the start and stop flags are checked. A match
//      gives msg_valid_o with the payload on msg_o, a mismatch frame_err_o.
//      Either way the decoder returns to HUNT. The edge detector then starts
//      from the averaged value of the last bit rather than from the last
//      frame, so a packet that follows straight after the stop flag (which
//      ends dark) is caught even if that final frame was misclassified.
// Interface: score_valid_i/score_i, one score per pulse; msg_valid_o and
// frame_err_o are one-cycle pulses the cycle after the last frame of the
// packet; msg_o holds its value until the next packet. state_o = 0 HUNT,
// 1 COLLECT.
// Follows the paper: 12 frames per bit, averaging and thresholding at 0.5,
// 2+8+2 framing, decoding from a start flag. Own choices: the edge-based bit
// clock recovery, the flag values and doing it in hardware (the paper runs it
// as software next to the CNN).
module uvc_decoder
  import uvc_pkg::*;
#(
  parameter int unsigned FRAMES_PER_BIT = UVC_FRAMES_PER_BIT,
  parameter int unsigned SCORE_W        = 8,
  parameter int unsigned THRESHOLD      = 128
) (
  input  logic               clk_i,
  input  logic               rst_ni,
  input  logic               score_valid_i,
  input  logic [SCORE_W-1:0] score_i,
  output logic               msg_valid_o,
  output payload_t           msg_o,
  output logic               frame_err_o,
  output logic [1:0]         state_o
);

  localparam int unsigned SUM_W = SCORE_W + $clog2(FRAMES_PER_BIT + 1);
  localparam int unsigned FW    = $clog2(FRAMES_PER_BIT + 1);
  localparam int unsigned BW    = $clog2(PACKET_BITS + 1);
  localparam logic [SUM_W-1:0] BIT_THRESHOLD = SUM_W'(FRAMES_PER_BIT * THRESHOLD);

  typedef enum logic [1:0] {HUNT = 2'd0, COLLECT = 2'd1} state_e;

  state_e           state_q;
  logic             prev_on_q;
  logic [SUM_W-1:0] acc_q;
  logic [FW-1:0]    fcnt_q;
  logic [BW-1:0]    bcnt_q;
  packet_t          bits_q;

  logic             frame_on;
  logic [SUM_W-1:0] acc_next;
  logic             bit_val;
  packet_t          pkt_next;

  assign frame_on = score_i >= SCORE_W'(THRESHOLD);
  assign acc_next = acc_q + SUM_W'(score_i);
  assign bit_val  = acc_next >= BIT_THRESHOLD;
  assign pkt_next = {bits_q[PACKET_BITS-2:0], bit_val};

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q     <= HUNT;
      prev_on_q   <= 1'b1;   // needs one dark frame before the first start
      acc_q       <= '0;
      fcnt_q      <= '0;
      bcnt_q      <= '0;
      bits_q      <= '0;
      msg_valid_o <= 1'b0;
      msg_o       <= '0;
      frame_err_o <= 1'b0;
    end else begin
      msg_valid_o <= 1'b0;
      frame_err_o <= 1'b0;
      if (score_valid_i) begin
        prev_on_q <= frame_on;
        unique case (state_q)
          HUNT: begin
            if (frame_on && !prev_on_q) begin
              state_q <= COLLECT;
              acc_q   <= SUM_W'(score_i);
              fcnt_q  <= FW'(1);
              bcnt_q  <= '0;
            end
          end
          COLLECT: begin
            if (fcnt_q == FW'(FRAMES_PER_BIT - 1)) begin
              acc_q  <= '0;
              fcnt_q <= '0;
              bits_q <= pkt_next;
              if (bcnt_q == BW'(PACKET_BITS - 1)) begin
                state_q   <= HUNT;
                // the edge detector continues from the averaged last bit, so a
                // misclassified final frame cannot hide the next start edge
                prev_on_q <= bit_val;
                if (pkt_next[PACKET_BITS-1 -: START_BITS] == START_FLAG &&
                    pkt_next[STOP_BITS-1:0] == STOP_FLAG) begin
                  msg_valid_o <= 1'b1;
                  msg_o       <= pkt_next[STOP_BITS +: PAYLOAD_BITS];
                end else begin
                  frame_err_o <= 1'b1;
                end
              end else begin
                bcnt_q <= bcnt_q + 1'b1;
              end
            end else begin
              acc_q  <= acc_next;
              fcnt_q <= fcnt_q + 1'b1;
            end
          end
          default: state_q <= HUNT;
        endcase
      end
    end
  end

  assign state_o = state_q;

endmodule
