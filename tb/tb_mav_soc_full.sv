// tb_mav_soc_full: the top level with every parameter at its default.
// One complete mailbox service exchange plus the start of an SOS packet at
// the real bit time (140,000,000 cycles = 0.4 s at 350 MHz):
//   1. the host writes an SOS command and payload into the mailbox and rings
//      the doorbell; the secure core (played by this test) takes the
//      interrupt and reads the command;
//   2. it starts the LED packet; the test checks that the LEDs light in the
//      next cycle and go dark exactly BIT_CYCLES cycles later (the on/off
//      start flag), and that the camera-fed decoder has locked on the start
//      edge (state COLLECT);
//   3. the secure core writes its reply and sets completion; the host takes
//      the interrupt and reads the reply.
// Host L2 and cluster TCDM accesses at full memory size are checked too. The
// remaining 10 bit times of the packet (1.4e9 cycles) are not simulated here;
// a whole packet through the top is covered at shorter bit times by the other
// top-level tests. About 1.6e8 cycles; clock period 10 time units.
module tb_mav_soc_full;
  import uvc_pkg::*;

  localparam longint unsigned BITC  = 140_000_000;
  localparam longint unsigned FRAME = 11_666_667;   // 30 frames/s at 350 MHz
  localparam logic [31:0] L2   = 32'h1C00_0000;
  localparam logic [31:0] MB   = 32'h1040_0000;
  localparam logic [31:0] GPIO = 32'h0000_1000;
  localparam logic [7:0]  PAYLOAD = 8'd211;

  logic clk = 1'b0, rst_n = 1'b0;
  logic        h_req, h_we, h_rvalid, h_gnt;
  logic [31:0] h_addr;
  logic [7:0]  h_be;
  logic [63:0] h_wdata, h_rdata;
  logic        x_gnt, x_rvalid;
  logic [63:0] x_rdata;
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
  int checks = 0, failures = 0;
  longint unsigned t_on, t_off;

  mav_soc dut (
    .clk_i(clk), .rst_ni(rst_n),
    .host_req_i(h_req), .host_we_i(h_we), .host_addr_i(h_addr), .host_be_i(h_be),
    .host_wdata_i(h_wdata), .host_gnt_o(h_gnt), .host_rvalid_o(h_rvalid), .host_rdata_o(h_rdata),
    .s2h_req_i(1'b0), .s2h_we_i(1'b0), .s2h_addr_i('0), .s2h_be_i('0), .s2h_wdata_i('0),
    .s2h_gnt_o(x_gnt), .s2h_rvalid_o(x_rvalid), .s2h_rdata_o(x_rdata),
    .sec_req_i(s_req), .sec_rsp_o(s_rsp),
    .irq_sec_o(irq_sec), .irq_host_o(irq_host),
    .led_o(led), .uvc_tx_busy_o(tx_busy),
    .tcdm_req_i(t_req), .tcdm_gnt_o(t_gnt), .tcdm_we_i(t_we), .tcdm_addr_i(t_addr),
    .tcdm_be_i(t_be), .tcdm_wdata_i(t_wdata), .tcdm_rvalid_o(t_rvalid), .tcdm_rdata_o(t_rdata),
    .score_valid_i(sc_valid), .score_i(sc),
    .msg_valid_o(m_valid), .msg_o(m), .frame_err_o(f_err), .uvc_rx_state_o(rx_state));

  always #5 clk = ~clk;

  // watchdog: 2 bit times
  initial begin
    #(longint'(2) * BITC * 10);
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

  task automatic h_access(input bit w, input logic [31:0] a, input logic [63:0] d,
                          input logic [7:0] b, output logic [63:0] rd);
    h_req = 1; h_we = w; h_addr = a; h_wdata = d; h_be = b;
    #1;
    check(h_gnt, "host granted on an idle bus");
    @(posedge clk); #1; h_req = 0;
    if (!w) check(h_rvalid, "host read data valid");
    rd = h_rdata;
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
    t_req = '0; t_we = '0; t_addr = '0; t_be = '0; t_wdata = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk); #1;
    // host L2 at both ends of the 512 KiB
    h_access(1, L2, 64'h1111_2222_3333_4444, 8'hFF, hv);
    h_access(1, L2 + 32'h7FFF8, 64'h5555_6666_7777_8888, 8'hFF, hv);
    h_access(0, L2, '0, '0, hv);           check(hv == 64'h1111_2222_3333_4444, "L2 first word");
    h_access(0, L2 + 32'h7FFF8, '0, '0, hv); check(hv == 64'h5555_6666_7777_8888, "L2 last word");
    // cluster: DMA port writes the last TCDM word, core 0 reads it back
    t_req[8] = 1; t_we[8] = 1; t_be[8] = 4'hF; t_addr[8] = 32'h1FFFC; t_wdata[8] = 32'hCAFE_F00D;
    #1; check(t_gnt[8], "TCDM DMA port granted");
    @(posedge clk); #1; t_req[8] = 0;
    t_req[0] = 1; t_we[0] = 0; t_addr[0] = 32'h1FFFC;
    @(posedge clk); #1; t_req[0] = 0;
    check(t_rvalid[0] && t_rdata[0] == 32'hCAFE_F00D, "TCDM read-back through another port");
    // let the camera see dark frames first
    #(FRAME * 10 * 2);
    @(posedge clk); #1;
    // 1. service request
    h_access(1, MB + 32'h0, {32'h0, 32'h505}, 8'h0F, hv);
    h_access(1, MB + 32'h4, {24'h0, PAYLOAD, 32'h0}, 8'hF0, hv);
    h_access(1, MB + 32'h80, 64'h1, 8'h0F, hv);
    check(irq_sec, "doorbell interrupt");
    s_read(32'h0, v); check(v == 32'h505, "command word");
    s_read(32'h4, v); check(v == {24'h0, PAYLOAD}, "payload word");
    // 2. start the packet
    s_write(GPIO + 32'h0, 32'h3);
    s_write(GPIO + 32'h8, {24'h0, PAYLOAD});
    t_on = longint'($time) - 1;       // edge of the TX write
    check(led == 4'hF && tx_busy, "LEDs on for the first start bit");
    s_write(32'h80, 32'h1);           // clear doorbell
    @(negedge led[0]);
    t_off = longint'($time);
    check((t_off - t_on) / 10 == BITC, $sformatf("first start bit lasted %0d cycles", (t_off - t_on) / 10));
    check(rx_state == 2'd1, "decoder locked on the start edge");
    // 3. reply and completion
    s_write(32'h8, 32'hC0DE_00D3);
    s_write(32'h84, 32'h1);
    check(irq_host, "completion interrupt");
    h_access(0, MB + 32'h8, '0, '0, hv);
    check(hv[31:0] == 32'hC0DE_00D3, "host reads reply");
    h_access(1, MB + 32'h84, {32'h1, 32'h0}, 8'hF0, hv);   // odd word: upper lane
    check(!irq_host, "host clears completion");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
