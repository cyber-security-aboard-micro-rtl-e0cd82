// tb_l1_tcdm: self-checking test of the cluster L1 scratchpad and its
// interconnect at full size (9 masters, 16 banks of 8 KiB).
// Phase 1: each master writes and reads back its own region while all run
// concurrently. Phase 2: random reads and writes with byte enables to random
// addresses from all masters, each master holding its request until granted.
// Every cycle the test checks that no bank serves two masters, that a master
// alone on its bank is granted, and that no master waits more than N_PORTS-1
// cycles (round-robin fairness); read data one cycle after the grant are
// compared with a reference memory. Phase 3 makes all masters hit bank 0 to
// force stalls, and the number of conflict stalls is reported.
module tb_l1_tcdm;
  localparam int unsigned NP = 9, NB = 16, BB = 8192;
  localparam int unsigned WORDS = NB * BB / 4;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [NP-1:0] req, gnt, we, rvalid;
  logic [NP-1:0][31:0] addr, wdata, rdata;
  logic [NP-1:0][3:0] be;
  int checks = 0, failures = 0, stalls = 0;
  logic [31:0] model [WORDS];
  logic [31:0] exp_rd [NP];
  bit          exp_rd_v [NP];
  int          wait_cnt [NP];
  int          phase = 0;
  bit          granted [NP];   // grant seen in the current cycle

  l1_tcdm dut (.clk_i(clk), .rst_ni(rst_n), .req_i(req), .gnt_o(gnt), .we_i(we),
               .addr_i(addr), .be_i(be), .wdata_i(wdata), .rvalid_o(rvalid), .rdata_o(rdata));

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int bank_of(input logic [31:0] a);
    return int'(a[5:2]);
  endfunction

  // new random request for master p
  task automatic new_req(input int p);
    int unsigned w;
    case (phase)
      1: w = ($urandom_range(WORDS / NP - 1) / NB) * NB * NP + p * NB + $urandom_range(NB - 1);
      3: w = $urandom_range(WORDS / NB - 1) * NB;
      default: w = $urandom_range(WORDS - 1);
    endcase
    w = w % WORDS;
    req[p] = ($urandom_range(4) != 0);
    we[p] = $urandom_range(1);
    addr[p] = 32'(w * 4);
    be[p] = (phase == 2) ? 4'($urandom) : 4'hF;
    wdata[p] = $urandom;
  endtask

  // checker and model update in the middle of each cycle, on stable values
  always @(negedge clk) begin
    if (rst_n) begin
      int served [NB];
      for (int b = 0; b < NB; b++) served[b] = 0;
      // responses for grants of the previous cycle
      for (int p = 0; p < NP; p++) begin
        if (exp_rd_v[p]) begin
          checks++;
          if (!rvalid[p] || rdata[p] !== exp_rd[p]) begin
            failures++; $display("FAIL: port %0d read %h expected %h", p, rdata[p], exp_rd[p]);
          end
        end
        exp_rd_v[p] = 0;
      end
      for (int p = 0; p < NP; p++) begin
        if (gnt[p]) begin
          int unsigned w;
          served[bank_of(addr[p])]++;
          w = addr[p] / 4;
          if (we[p]) begin
            for (int i = 0; i < 4; i++) if (be[p][i]) model[w][8*i +: 8] = wdata[p][8*i +: 8];
          end else begin
            exp_rd[p] = model[w]; exp_rd_v[p] = 1;
          end
          wait_cnt[p] = 0;
          granted[p] = 1;
        end else if (req[p]) begin
          bit alone;
          alone = 1;
          for (int q = 0; q < NP; q++) if (q != p && req[q] && bank_of(addr[q]) == bank_of(addr[p])) alone = 0;
          checks++;
          if (alone) begin failures++; $display("FAIL: port %0d alone on its bank but not granted", p); end
          stalls++;
          wait_cnt[p]++;
          checks++;
          if (wait_cnt[p] > NP - 1) begin failures++; $display("FAIL: port %0d starved", p); end
        end
      end
      for (int b = 0; b < NB; b++) begin
        checks++;
        if (served[b] > 1) begin failures++; $display("FAIL: bank %0d served %0d masters", b, served[b]); end
      end
    end
  end

  // drivers: after the edge, replace granted or idle requests
  task automatic run(input int cycles);
    for (int c = 0; c < cycles; c++) begin
      @(posedge clk); #1;
      for (int p = 0; p < NP; p++) if (granted[p] || !req[p]) new_req(p);
      for (int p = 0; p < NP; p++) granted[p] = 0;
      #1;
    end
  endtask

  initial begin
    req = '0; we = '0; addr = '0; be = '0; wdata = '0;
    for (int p = 0; p < NP; p++) begin exp_rd_v[p] = 0; wait_cnt[p] = 0; granted[p] = 0; end
    // known contents: the reference model and the banks start from zero
    for (int i = 0; i < WORDS; i++) model[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // zero-fill through port 0 so the memory matches the model
    for (int i = 0; i < WORDS; i++) begin
      req[0] = 1; we[0] = 1; be[0] = 4'hF; addr[0] = 32'(i * 4); wdata[0] = '0;
      @(posedge clk); #1;
    end
    req = '0;
    phase = 1; run(5000);
    phase = 2; run(20000);
    phase = 3; run(3000);
    // drain
    @(posedge clk); #1; req = '0;
    repeat (3) @(posedge clk);
    checks++;
    if (stalls == 0) begin failures++; $display("FAIL: no bank conflict ever stalled a master"); end
    $display("bank-conflict stalls: %0d", stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
