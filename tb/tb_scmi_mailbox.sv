// tb_scmi_mailbox: self-checking test of the host/secure command mailbox.
// Runs full request/response exchanges: the host fills the shared memory and
// rings the doorbell, the secure side sees the interrupt, reads and checks
// the message, writes a reply, clears the doorbell and sets completion, the
// host sees its interrupt, reads the reply and clears completion. Also checks
// that each side can only set or clear its own flags as documented and that
// a same-cycle write of both sides to one word keeps the secure value.
module tb_scmi_mailbox;
  import uvc_pkg::*;

  localparam int unsigned W = 32;
  logic clk = 1'b0, rst_n = 1'b0;
  reg_req_t hreq, sreq;
  reg_rsp_t hrsp, srsp;
  logic irq_sec, irq_host;
  int checks = 0, failures = 0;
  logic [31:0] msg [W];
  logic [31:0] v;

  scmi_mailbox #(.SHMEM_WORDS(W)) dut (.clk_i(clk), .rst_ni(rst_n),
    .host_req_i(hreq), .host_rsp_o(hrsp), .sec_req_i(sreq), .sec_rsp_o(srsp),
    .irq_sec_o(irq_sec), .irq_host_o(irq_host));

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

  task automatic hwr(input logic [31:0] a, input logic [31:0] d);
    hreq = '{valid: 1'b1, we: 1'b1, addr: a, wdata: d}; @(posedge clk); #1; hreq = '0;
  endtask
  task automatic swr(input logic [31:0] a, input logic [31:0] d);
    sreq = '{valid: 1'b1, we: 1'b1, addr: a, wdata: d}; @(posedge clk); #1; sreq = '0;
  endtask
  task automatic hrd(input logic [31:0] a, output logic [31:0] d);
    hreq = '{valid: 1'b1, we: 1'b0, addr: a, wdata: '0}; #1; d = hrsp.rdata; hreq = '0;
  endtask
  task automatic srd(input logic [31:0] a, output logic [31:0] d);
    sreq = '{valid: 1'b1, we: 1'b0, addr: a, wdata: '0}; #1; d = srsp.rdata; sreq = '0;
  endtask

  initial begin
    hreq = '0; sreq = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk); #1;
    check(!irq_sec && !irq_host, "no interrupts after reset");

    for (int round = 0; round < 4; round++) begin
      int len;
      len = $urandom_range(W, 1);
      for (int i = 0; i < len; i++) begin
        msg[i] = $urandom;
        hwr(32'(4 * i), msg[i]);
      end
      check(!irq_sec, "no doorbell before ring");
      // ring the doorbell
      hwr(32'(4 * W), 32'h1);
      check(irq_sec, "doorbell raises secure interrupt");
      srd(32'(4 * W), v); check(v == 32'h1, "doorbell visible to secure side");
      for (int i = 0; i < len; i++) begin
        srd(32'(4 * i), v);
        check(v == msg[i], $sformatf("secure side reads word %0d", i));
      end
      // reply
      for (int i = 0; i < len; i++) swr(32'(4 * i), ~msg[i]);
      hwr(32'(4 * W + 4), 32'h1);   // host may not set completion
      check(!irq_host, "host cannot set completion");
      swr(32'(4 * W), 32'h1);       // clear doorbell
      check(!irq_sec, "secure side clears doorbell");
      swr(32'(4 * W + 4), 32'h1);   // set completion
      check(irq_host, "completion raises host interrupt");
      hrd(32'(4 * W + 4), v); check(v == 32'h1, "completion visible to host");
      for (int i = 0; i < len; i++) begin
        hrd(32'(4 * i), v);
        check(v == ~msg[i], $sformatf("host reads reply word %0d", i));
      end
      hwr(32'(4 * W + 4), 32'h1);
      check(!irq_host, "host clears completion");
    end

    // same-cycle writes to one word: secure wins
    hreq = '{valid: 1'b1, we: 1'b1, addr: 32'h8, wdata: 32'h1111_1111};
    sreq = '{valid: 1'b1, we: 1'b1, addr: 32'h8, wdata: 32'h2222_2222};
    @(posedge clk); #1; hreq = '0; sreq = '0;
    hrd(32'h8, v); check(v == 32'h2222_2222, "secure write wins");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
