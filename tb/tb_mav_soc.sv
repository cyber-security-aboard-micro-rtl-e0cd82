// tb_mav_soc: end-to-end test of the top level at a short bit time.
// The test plays the roles of the parts outside the RTL: the host core (on
// the host bus), the secure core (on the secure bus), the cluster cores and
// DMA (on the TCDM ports) and the camera plus LED-state CNN (it samples the
// LED pins once per frame and turns them into a noisy score). The bit time is
// BITC = 12 * FRAME cycles, so the camera sees 12 frames per bit as in the
// real link.
// Scenario, repeated for several payloads:
//   1. the host writes an "SOS" command with a payload into the mailbox
//      shared memory and rings the doorbell;
//   2. the secure core takes the interrupt, reads the command, switches the
//      GPIO to packet mode and starts the packet; on the done interrupt it
//      clears the doorbell, writes a reply and sets completion;
//   3. the observing decoder must report the payload; the host takes the
//      completion interrupt and reads the reply.
// One round has the secure core blink a damaged packet by hand in direct
// LED mode, which must end in a framing error. In parallel, host L2 traffic,
// a secure-side scan of host memory through the bridge (competing with the
// host for the bus) and cluster TCDM traffic with bank conflicts are checked. Every mechanism
// (doorbell, completion, packet sent, message decoded, framing error, mode
// switch, TCDM stall, host-bus contention, secure scan, L2 and mailbox
// reads over the host bus) is counted and
// must occur at least once.
module tb_mav_soc;
  import uvc_pkg::*;

  localparam int unsigned FRAME = 4;
  localparam int unsigned BITC  = 12 * FRAME;
  localparam int unsigned NP    = 9;
  localparam logic [31:0] L2    = 32'h1C00_0000;
  localparam logic [31:0] MB    = 32'h1040_0000;
  localparam logic [31:0] GPIO  = 32'h0000_1000;
  localparam logic [31:0] DOORBELL = 32'h80, COMPLETION = 32'h84;

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
  logic [NP-1:0] t_req, t_gnt, t_we, t_rvalid;
  logic [NP-1:0][31:0] t_addr, t_wdata, t_rdata;
  logic [NP-1:0][3:0]  t_be;
  logic        sc_valid, m_valid, f_err;
  logic [7:0]  sc, m;
  logic [1:0]  rx_state;

  int checks = 0, failures = 0;
  int n_doorbell = 0, n_completion = 0, n_packets = 0, n_msgs = 0, n_ferr = 0;
  int n_mode = 0, n_stall = 0, n_l2rd = 0, n_mbrd = 0, n_hstall = 0, n_scan = 0;
  bit scan_go = 0;
  bit sim_done = 0;
  int exp_msgs[$];

  mav_soc #(.BIT_CYCLES(BITC)) dut (
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

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---------------- camera + CNN model ----------------
  initial begin
    sc_valid = 0; sc = '0;
    wait (rst_n);
    forever begin
      repeat (FRAME - 1) @(posedge clk);
      #1;
      sc_valid = 1;
      sc = led[0] ? 8'($urandom_range(255, 150)) : 8'($urandom_range(100, 0));
      @(posedge clk); #1;
      sc_valid = 0;
    end
  end

  // decoder results
  always @(posedge clk) begin
    if (rst_n && m_valid) begin
      n_msgs++;
      checks++;
      if (exp_msgs.size() == 0 || exp_msgs[0] != int'(m)) begin
        failures++; $display("FAIL: decoded %02h unexpected", m);
      end
      if (exp_msgs.size() != 0) void'(exp_msgs.pop_front());
    end
    if (rst_n && f_err) n_ferr++;
  end

  // ---------------- host bus ----------------
  // host accesses hold the request until granted
  task automatic h_write(input logic [31:0] a, input logic [63:0] d, input logic [7:0] b);
    bit g;
    h_req = 1; h_we = 1; h_addr = a; h_wdata = d; h_be = b;
    do begin
      #1; g = h_gnt; if (!g) n_hstall++;
      @(posedge clk); #1;
    end while (!g);
    h_req = 0;
  endtask
  task automatic h_read(input logic [31:0] a, output logic [63:0] d);
    bit g;
    h_req = 1; h_we = 0; h_addr = a; h_be = '0;
    do begin
      #1; g = h_gnt; if (!g) n_hstall++;
      @(posedge clk); #1;
    end while (!g);
    h_req = 0;
    if (!h_rvalid) begin failures++; $display("FAIL: no host rvalid"); end
    d = h_rdata;
  endtask
  // mailbox word i through the 64-bit host bus
  task automatic h_mb_write(input int i, input logic [31:0] d);
    h_write(MB + 32'(4 * i), (i % 2) ? {d, 32'h0} : {32'h0, d}, (i % 2) ? 8'hF0 : 8'h0F);
  endtask
  task automatic h_mb_read(input int i, output logic [31:0] d);
    logic [63:0] v;
    h_read(MB + 32'(4 * i), v);
    d = (i % 2) ? v[63:32] : v[31:0];
    n_mbrd++;
  endtask

  // ---------------- secure bus ----------------
  task automatic s_write(input logic [31:0] a, input logic [31:0] d);
    s_req = '{valid: 1'b1, we: 1'b1, addr: a, wdata: d};
    @(posedge clk); #1; s_req = '0;
  endtask
  task automatic s_read(input logic [31:0] a, output logic [31:0] d);
    s_req = '{valid: 1'b1, we: 1'b0, addr: a, wdata: '0};
    #1; d = s_rsp.rdata; s_req = '0;
  endtask

  // One service request: command word 0 = 0x505 ("SOS"), word 1 = payload.
  task automatic sos_round(input logic [7:0] payload);
    logic [31:0] v;
    int t;
    h_mb_write(0, 32'h0000_0505);
    h_mb_write(1, {24'h0, payload});
    h_mb_write(32 + 0, 32'h1);              // doorbell (word 32 = offset 0x80)
    check(irq_sec, "doorbell interrupt to secure core");
    if (irq_sec) n_doorbell++;
    // secure core: read the command
    s_read(32'h0, v); check(v == 32'h505, "secure core reads command");
    s_read(32'h4, v); check(v[7:0] == payload, "secure core reads payload");
    s_write(GPIO + 32'h0, 32'h3);           // packet mode, done interrupt on
    n_mode++;
    exp_msgs.push_back(int'(payload));
    s_write(GPIO + 32'h8, {24'h0, payload});
    check(tx_busy, "packet sender busy");
    s_write(DOORBELL, 32'h1);               // clear doorbell
    t = 0;
    while (!irq_sec && t < 20 * BITC) begin @(posedge clk); #1; t++; end
    check(irq_sec && !tx_busy, "packet done interrupt");
    check(t >= 12 * BITC - 4 && t <= 12 * BITC, $sformatf("packet length %0d cycles", t));
    if (irq_sec) n_packets++;
    s_write(GPIO + 32'hC, 32'h2);           // clear done
    s_write(32'h8, 32'hC0DE_0000 | {24'h0, payload});   // reply word 2
    s_write(COMPLETION, 32'h1);
    check(irq_host, "completion interrupt to host");
    if (irq_host) n_completion++;
    h_mb_read(2, v); check(v == (32'hC0DE_0000 | {24'h0, payload}), "host reads reply");
    h_mb_write(33, 32'h1);                  // clear completion
    check(!irq_host, "host clears completion");
    // let the decoder see the trailing dark bit time
    repeat (2 * BITC) @(posedge clk);
    #1;
  endtask

  // Secure core blinks a packet by hand with a wrong stop flag.
  task automatic bad_packet();
    bit b[12];
    logic [7:0] p;
    p = 8'h5A;
    b[0] = 1; b[1] = 0;
    for (int i = 0; i < 8; i++) b[2+i] = p[7-i];
    b[10] = 0; b[11] = 0;
    s_write(GPIO + 32'h0, 32'h0);           // direct mode
    n_mode++;
    for (int i = 0; i < 12; i++) begin
      s_write(GPIO + 32'h4, {28'h0, {4{b[i]}}});
      repeat (BITC - 1) @(posedge clk);
      #1;
    end
    s_write(GPIO + 32'h4, 32'h0);
    repeat (2 * BITC) @(posedge clk);
    #1;
  endtask

  // ---------------- secure-side memory scan over the host bus ----------------
  // The secure core reads back the L2 words the host wrote (anomaly check),
  // competing with the host for the bus.
  initial begin
    x_req = 0; x_we = 0; x_addr = '0; x_be = '0; x_wdata = '0;
    wait (scan_go);
    for (int i = 2; i < 16; i++) begin
      x_req = 1; x_addr = L2 + 32'(8 * i);
      @(negedge clk);
      while (!x_gnt) begin @(posedge clk); @(negedge clk); end
      @(posedge clk); #1;
      x_req = 0;
      checks++;
      if (!x_rvalid || x_rdata != {32'(i), ~32'(i)}) begin
        failures++; $display("FAIL: secure scan of L2 word %0d read %h", i, x_rdata);
      end
      n_scan++;
    end
  end

  // ---------------- cluster traffic ----------------
  logic [31:0] tmodel [bit [31:0]];
  initial begin
    t_req = '0; t_we = '0; t_addr = '0; t_be = '0; t_wdata = '0;
    wait (rst_n);
    // each port writes then reads 64 words; ports 0..3 all use bank 0
    for (int round = 0; round < 2; round++) begin
      for (int k = 0; k < 64; k++) begin
        bit [NP-1:0] pend;
        for (int p = 0; p < NP; p++) begin
          t_req[p] = 1; t_we[p] = (round == 0); t_be[p] = 4'hF;
          t_addr[p] = (p < 4) ? 32'(32'h8000 + (k * 4 + p) * 64) : 32'((k * NP + p) * 4);
          t_wdata[p] = 32'(k * 1000 + p);
        end
        pend = '1;
        while (pend != 0) begin
          @(negedge clk);
          for (int p = 0; p < NP; p++) if (pend[p] && !t_gnt[p]) n_stall++;
          @(posedge clk); #1;
          for (int p = 0; p < NP; p++) begin
            if (pend[p] && t_rvalid[p]) begin
              pend[p] = 0; t_req[p] = 0;
              if (round == 1) begin
                checks++;
                if (t_rdata[p] !== 32'(k * 1000 + p)) begin
                  failures++; $display("FAIL: TCDM port %0d read %h", p, t_rdata[p]);
                end
              end
            end
          end
        end
      end
    end
  end

  initial begin
    logic [63:0] v;
    h_req = 0; h_we = 0; h_addr = '0; h_be = '0; h_wdata = '0; s_req = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk); #1;
    // host L2 traffic
    for (int i = 0; i < 16; i++) h_write(L2 + 32'(8 * i), {32'(i), ~32'(i)}, 8'hFF);
    h_write(L2 + 32'h8, 64'hAB, 8'h01);
    scan_go = 1;
    for (int i = 0; i < 16; i++) begin
      h_read(L2 + 32'(8 * i), v); n_l2rd++;
      check(v == ((i == 1) ? {32'(1), ~32'(1)} & 64'hFFFF_FFFF_FFFF_FF00 | 64'hAB : {32'(i), ~32'(i)}),
            $sformatf("L2 word %0d", i));
    end
    sos_round(8'd211);
    sos_round(8'h00);
    bad_packet();
    sos_round(8'hFF);
    sos_round(8'($urandom));
    repeat (4 * BITC) @(posedge clk);
    check(exp_msgs.size() == 0, "all payloads decoded");
    check(n_msgs == 4, $sformatf("%0d messages decoded", n_msgs));
    check(n_ferr == 1, $sformatf("%0d framing errors", n_ferr));
    $display("doorbells=%0d completions=%0d packets=%0d msgs=%0d frame_errs=%0d mode_switches=%0d tcdm_stalls=%0d l2_reads=%0d mbox_reads=%0d host_bus_stalls=%0d secure_scans=%0d",
             n_doorbell, n_completion, n_packets, n_msgs, n_ferr, n_mode, n_stall, n_l2rd, n_mbrd, n_hstall, n_scan);
    check(n_doorbell > 0, "doorbell happened");
    check(n_completion > 0, "completion happened");
    check(n_packets > 0, "packet sent");
    check(n_msgs > 0, "message decoded");
    check(n_ferr > 0, "framing error happened");
    check(n_mode > 1, "mode switch happened");
    check(n_stall > 0, "TCDM stall happened");
    check(n_l2rd > 0 && n_mbrd > 0, "host bus reads happened");
    check(n_scan == 14, "secure scan of host memory completed");
    check(n_hstall > 0, "host waited for the secure bridge (bus contention)");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
