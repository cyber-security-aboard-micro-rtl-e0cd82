// tb_uvc_link_256: the 256-message link experiment through the top level.
// The secure core (played by this test) sends the payloads 0x00 to 0xFF one
// after the other through the LED packet sender, starting each packet as soon
// as the done interrupt of the previous one arrives, so packets follow each
// other with no dark gap. A camera model samples the LEDs 12 times per bit,
// at a random phase, and turns each sample into a noisy CNN-like score
// (on: 150..255, off: 0..100, and one frame in 16 misclassified). Every
// payload must come out of the decoder, in order, with no framing error.
// The bit time is shortened to 96 cycles (frame every 8 cycles); everything
// else is at its default.
module tb_uvc_link_256;
  import uvc_pkg::*;

  localparam int unsigned FRAME = 8;
  localparam int unsigned BITC  = 12 * FRAME;
  localparam logic [31:0] GPIO  = 32'h0000_1000;

  logic clk = 1'b0, rst_n = 1'b0;
  logic        h_gnt, h_rvalid, x_gnt, x_rvalid;
  logic [63:0] h_rdata, x_rdata;
  reg_req_t    s_req;
  reg_rsp_t    s_rsp;
  logic        irq_sec, irq_host, tx_busy;
  logic [3:0]  led;
  logic [8:0]  t_gnt, t_rvalid;
  logic [8:0][31:0] t_rdata;
  logic        sc_valid, m_valid, f_err;
  logic [7:0]  sc, m;
  logic [1:0]  rx_state;
  int checks = 0, failures = 0, n_msgs = 0, n_flip = 0;
  int expected = 0;

  mav_soc #(.BIT_CYCLES(BITC)) dut (
    .clk_i(clk), .rst_ni(rst_n),
    .host_req_i(1'b0), .host_we_i(1'b0), .host_addr_i('0), .host_be_i('0),
    .host_wdata_i('0), .host_gnt_o(h_gnt), .host_rvalid_o(h_rvalid), .host_rdata_o(h_rdata),
    .s2h_req_i(1'b0), .s2h_we_i(1'b0), .s2h_addr_i('0), .s2h_be_i('0), .s2h_wdata_i('0),
    .s2h_gnt_o(x_gnt), .s2h_rvalid_o(x_rvalid), .s2h_rdata_o(x_rdata),
    .sec_req_i(s_req), .sec_rsp_o(s_rsp),
    .irq_sec_o(irq_sec), .irq_host_o(irq_host),
    .led_o(led), .uvc_tx_busy_o(tx_busy),
    .tcdm_req_i('0), .tcdm_gnt_o(t_gnt), .tcdm_we_i('0), .tcdm_addr_i('0),
    .tcdm_be_i('0), .tcdm_wdata_i('0), .tcdm_rvalid_o(t_rvalid), .tcdm_rdata_o(t_rdata),
    .score_valid_i(sc_valid), .score_i(sc),
    .msg_valid_o(m_valid), .msg_o(m), .frame_err_o(f_err), .uvc_rx_state_o(rx_state));

  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // camera + CNN model, random phase against the bit clock
  initial begin
    sc_valid = 0; sc = '0;
    wait (rst_n);
    repeat ($urandom_range(FRAME - 1)) @(posedge clk);
    forever begin
      bit on;
      repeat (FRAME - 1) @(posedge clk);
      #1;
      on = led[0];
      // keep the very first lit frame of a packet clean so the edge is found
      if (rx_state == 2'd1 && $urandom_range(15) == 0) begin on = !on; n_flip++; end
      sc_valid = 1;
      sc = on ? 8'($urandom_range(255, 150)) : 8'($urandom_range(100, 0));
      @(posedge clk); #1;
      sc_valid = 0;
    end
  end

  always @(posedge clk) begin
    if (rst_n && m_valid) begin
      n_msgs++;
      checks++;
      if (int'(m) != expected) begin failures++; $display("FAIL: decoded %02h, expected %02h", m, expected); end
      expected++;
    end
    if (rst_n && f_err) begin
      checks++; failures++; $display("FAIL: framing error after payload %02h", expected - 1);
    end
  end

  task automatic s_write(input logic [31:0] a, input logic [31:0] d);
    s_req = '{valid: 1'b1, we: 1'b1, addr: a, wdata: d};
    @(posedge clk); #1; s_req = '0;
  endtask

  initial begin
    s_req = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (3 * FRAME) @(posedge clk);
    #1;
    s_write(GPIO + 32'h0, 32'h3);
    for (int p = 0; p < 256; p++) begin
      s_write(GPIO + 32'h8, 32'(p));
      while (!irq_sec) begin @(posedge clk); #1; end
      // clear done; the next loop iteration writes the next payload
      s_req = '{valid: 1'b1, we: 1'b1, addr: GPIO + 32'hC, wdata: 32'h2};
      @(posedge clk); #1; s_req = '0;
    end
    repeat (3 * BITC) @(posedge clk);
    checks++;
    if (n_msgs != 256) begin failures++; $display("FAIL: %0d of 256 messages decoded", n_msgs); end
    $display("decoded %0d of 256 messages, %0d frames misclassified on purpose", n_msgs, n_flip);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
