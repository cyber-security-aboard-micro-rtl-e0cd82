// tb_l2spm: self-checking test of the 512 KiB host scratchpad at full size.
// Random byte-enabled writes and reads over the whole address range, checked
// against a sparse reference model; reads must return data exactly one
// cycle after the request and hold it while no read is issued. Also
// fills the first and last words to check the address decode at both ends.
module tb_l2spm;
  localparam int unsigned SIZE = 512 * 1024;
  logic clk = 1'b0;
  logic req, we;
  logic [31:0] addr;
  logic [7:0] be;
  logic [63:0] wdata, rdata;
  int checks = 0, failures = 0;
  logic [63:0] model [int unsigned];

  l2spm dut (.clk_i(clk), .req_i(req), .we_i(we), .addr_i(addr), .be_i(be),
             .wdata_i(wdata), .rdata_o(rdata));

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic write(input int unsigned w, input logic [63:0] d, input logic [7:0] b);
    logic [63:0] old;
    old = model.exists(w) ? model[w] : 64'h0;
    for (int i = 0; i < 8; i++) if (b[i]) old[8*i +: 8] = d[8*i +: 8];
    model[w] = old;
    req = 1; we = 1; addr = w * 8; be = b; wdata = d;
    @(posedge clk); #1; req = 0;
  endtask

  task automatic read_check(input int unsigned w);
    req = 1; we = 0; addr = w * 8 + $urandom_range(7); be = '0;
    @(posedge clk); #1; req = 0;
    checks++;
    if (rdata !== model[w]) begin
      failures++; $display("FAIL: word %0d read %h expected %h", w, rdata, model[w]);
    end
  endtask

  initial begin
    int unsigned ws[$];
    req = 0; we = 0; addr = '0; be = '0; wdata = '0;
    @(posedge clk); #1;
    write(0, 64'h0123_4567_89AB_CDEF, 8'hFF);
    write(SIZE / 8 - 1, 64'hFEDC_BA98_7654_3210, 8'hFF);
    read_check(0);
    read_check(SIZE / 8 - 1);
    // hold: rdata stays while idle and while writing
    write(5, 64'h5, 8'hFF);
    checks++;
    if (rdata !== 64'hFEDC_BA98_7654_3210) begin failures++; $display("FAIL: read data not held"); end
    for (int i = 0; i < 2000; i++) begin
      int unsigned w;
      w = $urandom_range(SIZE / 8 - 1);
      if (!model.exists(w)) write(w, {$urandom, $urandom}, 8'hFF);
      ws.push_back(w);
      write(w, {$urandom, $urandom}, 8'($urandom));
    end
    foreach (ws[i]) read_check(ws[i]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
