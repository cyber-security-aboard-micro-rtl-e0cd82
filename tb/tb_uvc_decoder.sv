// tb_uvc_decoder: self-checking test of the LED-message decoder.
// Plays the end-to-end experiment of the LED link: the 256 payloads 0x00 to
// 0xFF, each sent as a 12-bit packet (on/off start flag, payload MSB first,
// on/off stop flag), 12 frames per bit, with noisy CNN-like scores (on frames
// 160..255, off frames 0..90, and in most bits one frame misclassified), idle
// gaps of 0 to 20 dark frames between packets and random gaps between frames.
// Every tenth packet is sent with a corrupted stop flag and must give a
// framing error instead of a message. Checks every decoded payload, the
// number of errors, and that each result comes exactly one cycle after the
// packet's last frame.
module tb_uvc_decoder;
  import uvc_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic       sv;
  logic [7:0] score;
  logic       mvalid, ferr;
  logic [7:0] msg;
  logic [1:0] st;
  int checks = 0, failures = 0;
  int exp_q[$];          // expected payload, or -1 for a framing error
  int n_msg = 0, n_err = 0, late = 0;
  bit last_frame_sent = 0;

  uvc_decoder dut (.clk_i(clk), .rst_ni(rst_n), .score_valid_i(sv), .score_i(score),
                   .msg_valid_o(mvalid), .msg_o(msg), .frame_err_o(ferr), .state_o(st));

  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Result monitor
  always @(posedge clk) begin
    if (rst_n && (mvalid || ferr)) begin
      int e;
      checks++;
      if (exp_q.size() == 0) begin
        failures++; $display("FAIL: unexpected result");
      end else begin
        e = exp_q.pop_front();
        if (e < 0) begin
          if (!ferr || mvalid) begin failures++; $display("FAIL: expected framing error"); end
          else n_err++;
        end else if (!mvalid || msg != 8'(e)) begin
          failures++; $display("FAIL: expected %02h got valid=%0b msg=%02h", e, mvalid, msg);
        end else n_msg++;
      end
      checks++;
      if (!last_frame_sent) begin failures++; late++; $display("FAIL: result not one cycle after last frame"); end
    end
  end

  task automatic frame(input bit on, input bit flip);
    int s;
    // occasional idle cycles between frames
    if ($urandom_range(3) == 0) begin sv = 1'b0; @(posedge clk); #1; end
    if (on ^ flip) s = $urandom_range(255, 160); else s = $urandom_range(90, 0);
    sv = 1'b1; score = 8'(s);
    @(posedge clk); #1;
    sv = 1'b0;
  endtask

  task automatic send(input logic [7:0] p, input bit corrupt);
    bit b[12];
    b[0] = 1; b[1] = 0;
    for (int i = 0; i < 8; i++) b[2+i] = p[7-i];
    b[10] = corrupt ? 1'b0 : 1'b1; b[11] = 0;
    exp_q.push_back(corrupt ? -1 : int'(p));
    for (int i = 0; i < 12; i++) begin
      int bad;
      bad = ($urandom_range(3) != 0) ? $urandom_range(11, 1) : -1;
      for (int f = 0; f < 12; f++) begin
        if (i == 11 && f == 11) begin
          // last frame: result expected at the next edge
          if ($urandom_range(3) == 0) begin sv = 1'b0; @(posedge clk); #1; end
          sv = 1'b1; score = 8'($urandom_range(90, 0));
          last_frame_sent = 1;
          @(posedge clk); #1;
          sv = 1'b0;
          // the result is registered: visible during this cycle
          @(posedge clk); #1;
          last_frame_sent = 0;
        end else begin
          frame(b[i], f == bad);
        end
      end
    end
    // dark gap to the next packet (may be empty)
    for (int g = $urandom_range(20); g > 0; g--) frame(1'b0, 1'b0);
  endtask

  initial begin
    sv = 1'b0; score = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk); #1;
    for (int g = 0; g < 5; g++) frame(1'b0, 1'b0);
    for (int p = 0; p < 256; p++) begin
      if (p % 10 == 9) send(8'(p), 1'b1);
      send(8'(p), 1'b0);
    end
    repeat (5) @(posedge clk);
    checks++;
    if (n_msg != 256) begin failures++; $display("FAIL: %0d of 256 messages decoded", n_msg); end
    checks++;
    if (n_err != 25) begin failures++; $display("FAIL: %0d of 25 framing errors", n_err); end
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL: %0d results missing", exp_q.size()); end
    $display("decoded %0d messages, %0d framing errors", n_msg, n_err);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
