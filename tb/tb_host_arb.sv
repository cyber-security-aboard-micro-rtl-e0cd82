// tb_host_arb: self-checking test of the two-master host-bus arbiter.
// Both masters issue random reads and writes and hold each request until
// granted. A target model answers every read one cycle later with data
// derived from the address. Each cycle the test checks that exactly the
// expected master is granted (the only requester, or under contention the
// one not served last), that the target sees the granted master's request,
// and that read data return to the right master one cycle after its grant.
// Contention stalls are counted and must occur.
module tb_host_arb;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [1:0] req, gnt, we, rvalid;
  logic [1:0][31:0] addr;
  logic [1:0][7:0]  be;
  logic [1:0][63:0] wdata, rdata;
  logic t_req, t_we;
  logic [31:0] t_addr;
  logic [7:0] t_be;
  logic [63:0] t_wdata, t_rdata;
  int checks = 0, failures = 0, stalls = 0, reads = 0;
  int last = 0;
  bit exp_rv [2];
  logic [63:0] exp_rd [2];
  bit granted [2];

  host_arb dut (.clk_i(clk), .rst_ni(rst_n), .m_req_i(req), .m_gnt_o(gnt), .m_we_i(we),
                .m_addr_i(addr), .m_be_i(be), .m_wdata_i(wdata), .m_rvalid_o(rvalid),
                .m_rdata_o(rdata), .t_req_o(t_req), .t_we_o(t_we), .t_addr_o(t_addr),
                .t_be_o(t_be), .t_wdata_o(t_wdata), .t_rdata_i(t_rdata));

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [63:0] fdata(input logic [31:0] a);
    return {a ^ 32'hDEAD_BEEF, ~a};
  endfunction

  // target: read data one cycle after the request
  always_ff @(posedge clk) if (t_req && !t_we) t_rdata <= fdata(t_addr);

  always @(negedge clk) begin
    if (rst_n) begin
      int w;
      for (int m = 0; m < 2; m++) begin
        if (exp_rv[m]) begin
          checks++;
          if (!rvalid[m] || rdata[m] !== exp_rd[m]) begin
            failures++; $display("FAIL: master %0d read data", m);
          end
          reads++;
        end else begin
          checks++;
          if (rvalid[m]) begin failures++; $display("FAIL: master %0d spurious rvalid", m); end
        end
        exp_rv[m] = 0;
      end
      w = (req == 2'b11) ? 1 - last : (req[1] ? 1 : 0);
      checks++;
      if (req == 2'b00) begin
        if (gnt != 2'b00) begin failures++; $display("FAIL: grant without request"); end
      end else begin
        if (gnt != 2'(1 << w)) begin failures++; $display("FAIL: grant %b for req %b", gnt, req); end
        checks++;
        if (!t_req || t_we != we[w] || t_addr != addr[w] || t_be != be[w] || t_wdata != wdata[w]) begin
          failures++; $display("FAIL: target does not see master %0d", w);
        end
        if (req == 2'b11) stalls++;
        last = w;
        granted[w] = 1;
        if (!we[w]) begin exp_rv[w] = 1; exp_rd[w] = fdata(addr[w]); end
      end
    end
  end

  task automatic new_req(input int m);
    req[m] = $urandom_range(2) != 0;
    we[m] = $urandom_range(1);
    addr[m] = $urandom;
    be[m] = 8'($urandom);
    wdata[m] = {$urandom, $urandom};
  endtask

  initial begin
    req = '0; we = '0; addr = '0; be = '0; wdata = '0;
    exp_rv[0] = 0; exp_rv[1] = 0; granted[0] = 0; granted[1] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int c = 0; c < 5000; c++) begin
      @(posedge clk); #1;
      for (int m = 0; m < 2; m++) begin
        if (granted[m] || !req[m]) new_req(m);
        granted[m] = 0;
      end
    end
    @(posedge clk); #1; req = '0;
    repeat (2) @(posedge clk);
    checks++;
    if (stalls == 0 || reads == 0) begin failures++; $display("FAIL: no contention or no reads"); end
    $display("contention cycles: %0d, reads: %0d", stalls, reads);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
