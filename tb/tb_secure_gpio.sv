// tb_secure_gpio: self-checking test of the secure LED GPIO and its packet sender.
// Uses a 5-cycle bit time. Checks register read-back, direct LED mode, and in
// packet mode the LED waveform of several payloads cycle by cycle against a
// packet built here bit by bit (on/off start flag, payload MSB first, on/off
// stop flag), the packet length of 12 bit times, the busy flag, that a TX
// write while busy is ignored, and the done interrupt with its clear.
module tb_secure_gpio;
  import uvc_pkg::*;

  localparam int unsigned BITC = 5;
  logic clk = 1'b0, rst_n = 1'b0;
  reg_req_t req;
  reg_rsp_t rsp;
  logic [3:0] led;
  logic busy, irq;
  int checks = 0, failures = 0;

  secure_gpio #(.NUM_LEDS(4), .BIT_CYCLES(BITC)) dut (
    .clk_i(clk), .rst_ni(rst_n), .reg_req_i(req), .reg_rsp_o(rsp),
    .led_o(led), .busy_o(busy), .done_irq_o(irq));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic wr(input logic [31:0] a, input logic [31:0] d);
    req = '{valid: 1'b1, we: 1'b1, addr: a, wdata: d};
    @(posedge clk); #1;
    req = '0;
  endtask

  task automatic rd(input logic [31:0] a, output logic [31:0] d);
    req = '{valid: 1'b1, we: 1'b0, addr: a, wdata: '0};
    #1;
    d = rsp.rdata;
    req = '0;
  endtask
  logic [31:0] rv;

  task automatic send_and_check(input logic [7:0] p);
    bit expbits[12];
    int errs = 0;
    expbits[0] = 1; expbits[1] = 0;
    for (int i = 0; i < 8; i++) expbits[2+i] = p[7-i];
    expbits[10] = 1; expbits[11] = 0;
    wr(32'h8, {24'b0, p});
    // now in the cycle after the write edge: first bit on the LEDs
    for (int b = 0; b < 12; b++) begin
      for (int c = 0; c < BITC; c++) begin
        if (led !== {4{expbits[b]}}) errs++;
        if (!busy) errs++;
        if (b == 3 && c == 0) begin
          // a second TX write while busy must be ignored
          req = '{valid: 1'b1, we: 1'b1, addr: 32'h8, wdata: 32'hAA};
        end
        @(posedge clk); #1;
        req = '0;
      end
    end
    check(errs == 0, $sformatf("LED waveform of payload %02h (%0d bad cycles)", p, errs));
    check(!busy && led == 4'h0, "idle after 12 bit times, LEDs off");
    check(irq, "done interrupt raised");
    rd(32'hC, rv); check(rv == 32'h2, "status shows done, not busy");
    wr(32'hC, 32'h2);
    check(!irq, "done interrupt cleared");
  endtask

  initial begin
    req = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk); #1;
    check(led == 4'h0 && !busy && !irq, "reset state");
    // direct LED mode
    wr(32'h4, 32'h5);
    check(led == 4'h5, "direct LED drive");
    rd(32'h4, rv); check(rv == 32'h5, "LED register read-back");
    wr(32'h4, 32'hA);
    check(led == 4'hA, "direct LED drive 2");
    // packet mode with interrupt enabled
    wr(32'h0, 32'h3);
    rd(32'h0, rv); check(rv == 32'h3, "CTRL read-back");
    check(led == 4'h0, "packet mode idles with LEDs off");
    send_and_check(8'd211);
    send_and_check(8'h00);
    send_and_check(8'hFF);
    for (int i = 0; i < 5; i++) send_and_check(8'($urandom));
    // back to direct mode
    wr(32'h0, 32'h0);
    check(led == 4'hA, "direct mode restored");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
