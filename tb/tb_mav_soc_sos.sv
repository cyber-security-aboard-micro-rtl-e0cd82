// tb_mav_soc_sos: one complete SOS exchange through the top level with full
// size memories and interconnect and the real frame/bit ratio, but with the
// bit time cut 100-fold: BIT_CYCLES = 1,400,000 instead of 140,000,000
// (2.5 bit/s at 350 MHz). At the real bit time the same exchange is about
// 1.7e9 cycles, too long for routine simulation; only the two counter
// constants below and BIT_CYCLES differ from that case.
// The host writes an SOS command into the mailbox and rings the doorbell; the
// secure core (played by this test) reads it, starts the LED packet and, on
// the packet-done interrupt, posts a reply and sets completion. A camera
// model samples the LEDs 12 times per bit time (one frame every 116,667
// cycles, the 30 frames/s of the real link scaled alike) and feeds noisy CNN
// scores to the decoder, which must return the payload. Checks the payload,
// the packet length (exactly 12 bit times) and both interrupts. About 1.7e7
// cycles are simulated; the clock period is 10 time units.
module tb_mav_soc_sos;
  import uvc_pkg::*;

  localparam longint unsigned BITC  = 1_400_000;
  localparam longint unsigned FRAME = 116_667;
  localparam logic [31:0] MB   = 32'h1040_0000;
  localparam logic [31:0] GPIO = 32'h0000_1000;
  localparam logic [7:0]  PAYLOAD = 8'd211;

  logic clk = 1'b0, rst_n = 1'b0;
  logic        h_req, h_we, h_rvalid, h_gnt;
  logic        x_req, x_we, x_gnt, x_rvalid;
  logic [31:0] x_addr;
  logic [7:0]  x_be;
  logic [63:0] x_wdata, x_rdata;
  logic [31:0] h_addr;
  logic [7:0]  h_be;
  logic [63:0] h_wdata, h_rdata;
  reg_req_t    s_req;
  reg_rsp_t    s_rsp;
  logic        irq_sec, irq_host, tx_busy;
  logic [3:0]  led;
  logic [8:0]  t_req, t_gnt, t_we, t_rvalid;
  logic [8:0][31:0] t_addr, t_wdata, t_rdata;
  logic [8:0][3:0]  t_be;
  logic        sc_valid, m_valid, f_err;
  logic [7:0]  sc, m;
  logic [1:0]  rx_state;
  int checks = 0, failures = 0, n_msgs = 0;
  longint unsigned t_start, t_done;

  mav_soc #(.BIT_CYCLES(1_400_000)) dut (
    .clk_i(clk), .rst_ni(rst_n),
    .host_req_i(h_req), .host_we_i(h_we), .host_addr_i(h_addr), .host_be_i(h_be),
    .host_wdata_i(h_wdata), .host_gnt_o(h_gnt), .host_rvalid_o(h_rvalid), .host_rdata_o(h_rdata),
    .s2h_req_i(x_req), .s2h_we_i(x_we), .s2h_addr_i(x_addr), .s2h_be_i(x_be), .s2h_wdata_i(x_wdata),
    .s2h_gnt_o(x_gnt), .s2h_rvalid_o(x_rvalid), .s2h_rdata_o(x_rdata),
    .sec_req_i(s_req), .sec_rsp_o(s_rsp),
    .irq_sec_o(irq_sec), .irq_host_o(irq_host),
    .led_o(led), .uvc_tx_busy_o(tx_busy),
    .tcdm_req_i(t_req), .tcdm_gnt_o(t_gnt), .tcdm_we_i(t_we), .tcdm_addr_i(t_addr),
    .tcdm_be_i(t_be), .tcdm_wdata_i(t_wdata), .tcdm_rvalid_o(t_rvalid), .tcdm_rdata_o(t_rdata),
    .score_valid_i(sc_valid), .score_i(sc),
    .msg_valid_o(m_valid), .msg_o(m), .frame_err_o(f_err), .uvc_rx_state_o(rx_state));

  always #5 clk = ~clk;

  // watchdog: 16 bit times
  initial begin
    #(longint'(16) * BITC * 10);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // camera + CNN model: one score per frame
  initial begin
    sc_valid = 0; sc = '0;
    wait (rst_n);
    forever begin
      #(FRAME * 10 - 10);
      @(posedge clk); #1;
      sc_valid = 1;
      sc = led[0] ? 8'($urandom_range(255, 150)) : 8'($urandom_range(100, 0));
      @(posedge clk); #1;
      sc_valid = 0;
    end
  end

  // result pulses (event driven, so the monitor does not wake every cycle)
  always @(posedge m_valid) begin
    n_msgs++;
    checks++;
    if (m != PAYLOAD) begin failures++; $display("FAIL: decoded %02h", m); end
  end
  always @(posedge f_err) begin
    checks++; failures++; $display("FAIL: framing error");
  end

  task automatic h_write(input logic [31:0] a, input logic [63:0] d, input logic [7:0] b);
    h_req = 1; h_we = 1; h_addr = a; h_wdata = d; h_be = b;
    #1;
    if (!h_gnt) begin failures++; $display("FAIL: host not granted on an idle bus"); end
    @(posedge clk); #1; h_req = 0;
  endtask
  task automatic s_write(input logic [31:0] a, input logic [31:0] d);
    s_req = '{valid: 1'b1, we: 1'b1, addr: a, wdata: d};
    @(posedge clk); #1; s_req = '0;
  endtask
  task automatic s_read(input logic [31:0] a, output logic [31:0] d);
    s_req = '{valid: 1'b1, we: 1'b0, addr: a, wdata: '0};
    #1; d = s_rsp.rdata; s_req = '0;
  endtask

  initial begin
    logic [31:0] v;
    logic [63:0] hv;
    h_req = 0; h_we = 0; h_addr = '0; h_be = '0; h_wdata = '0; s_req = '0;
    x_req = 0; x_we = 0; x_addr = '0; x_be = '0; x_wdata = '0;
    t_req = '0; t_we = '0; t_addr = '0; t_be = '0; t_wdata = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (FRAME + 5) @(posedge clk);   // let the camera see a dark frame first
    #1;
    h_write(MB + 32'h0, {32'h0, 32'h505}, 8'h0F);            // word 0: command
    h_write(MB + 32'h4, {24'h0, PAYLOAD, 32'h0}, 8'hF0);     // word 1: payload
    h_write(MB + 32'h80, 64'h1, 8'h0F);                     // doorbell
    check(irq_sec, "doorbell interrupt");
    s_read(32'h0, v); check(v == 32'h505, "command word");
    s_read(32'h4, v); check(v == {24'h0, PAYLOAD}, "payload word");
    s_write(GPIO + 32'h0, 32'h3);
    s_write(GPIO + 32'h8, {24'h0, PAYLOAD});
    t_start = longint'($time) - 1;   // edge of the TX write
    s_write(32'h80, 32'h1);
    @(posedge irq_sec);
    t_done = longint'($time);
    check((t_done - t_start) / 10 == 12 * BITC, $sformatf("packet took %0d cycles", (t_done - t_start) / 10));
    s_write(32'h8, 32'hC0DE_00D3);
    s_write(32'h84, 32'h1);
    check(irq_host, "completion interrupt");
    h_req = 1; h_we = 0; h_addr = MB + 32'h8; @(posedge clk); #1; h_req = 0;
    hv = h_rdata;
    check(hv[31:0] == 32'hC0DE_00D3, "host reads reply");
    #(FRAME * 10 * 3);
    check(n_msgs == 1, $sformatf("%0d messages decoded", n_msgs));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
