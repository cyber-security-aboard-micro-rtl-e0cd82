// l1_tcdm: cluster L1 scratchpad (TCDM) with its interconnect.
//
// The accelerator's eight cores and its DMA share N_BANKS single-port SRAM
// banks of BANK_BYTES each (16 x 8 KiB = 128 KiB by default). Consecutive
// 32-bit words sit in consecutive banks (word interleaving), so cores that
// walk through an array spread over all banks. Each cycle every bank serves
// at most one master; when several masters want the same bank, a per-bank
// round-robin pointer picks one and the others see gnt_o low and must keep
// their request (a stall). Masters that hit different banks are all served
// in the same cycle.
// Interface per master p: req_i[p], we_i[p], addr_i[p] (byte address),
// be_i[p], wdata_i[p]; gnt_o[p] in the same cycle; rvalid_o[p] and, for a
// read, rdata_o[p] one cycle after the grant. Port N_PORTS-1 is meant for
// the DMA.
// The bank count and size follow the paper; interleaving, round-robin
// arbitration, the 32-bit bank width and single-cycle latency are this
// design's own choices.
module l1_tcdm #(
  parameter int unsigned N_PORTS    = 9,
  parameter int unsigned N_BANKS    = 16,
  parameter int unsigned BANK_BYTES = 8192
) (
  input  logic                       clk_i,
  input  logic                       rst_ni,
  input  logic [N_PORTS-1:0]         req_i,
  output logic [N_PORTS-1:0]         gnt_o,
  input  logic [N_PORTS-1:0]         we_i,
  input  logic [N_PORTS-1:0][31:0]   addr_i,
  input  logic [N_PORTS-1:0][3:0]    be_i,
  input  logic [N_PORTS-1:0][31:0]   wdata_i,
  output logic [N_PORTS-1:0]         rvalid_o,
  output logic [N_PORTS-1:0][31:0]   rdata_o
);

  localparam int unsigned BANK_WORDS = BANK_BYTES / 4;
  localparam int unsigned BSW = $clog2(N_BANKS);
  localparam int unsigned RW  = $clog2(BANK_WORDS);
  localparam int unsigned PW  = $clog2(N_PORTS);

  logic [N_PORTS-1:0][BSW-1:0] bank_sel;
  logic [N_PORTS-1:0][RW-1:0]  row_sel;
  logic [N_BANKS-1:0][PW-1:0]  rr_q;        // highest-priority port of each bank
  logic [N_BANKS-1:0]          bank_act;
  logic [N_BANKS-1:0][PW-1:0]  bank_win;
  logic [N_BANKS-1:0][31:0]    bank_rdata;
  logic [N_PORTS-1:0][BSW-1:0] resp_bank_q; // bank that serves each port's response

  for (genvar p = 0; p < N_PORTS; p++) begin : g_dec
    assign bank_sel[p] = addr_i[p][2 +: BSW];
    assign row_sel[p]  = addr_i[p][2 + BSW +: RW];
  end

  // Round-robin choice per bank: first requesting port at or after rr_q.
  always_comb begin
    for (int b = 0; b < N_BANKS; b++) begin
      bank_act[b] = 1'b0;
      bank_win[b] = '0;
      for (int k = 0; k < N_PORTS; k++) begin
        int p;
        p = (int'(rr_q[b]) + k) % N_PORTS;
        if (!bank_act[b] && req_i[p] && bank_sel[p] == BSW'(b)) begin
          bank_act[b] = 1'b1;
          bank_win[b] = PW'(p);
        end
      end
    end
    for (int p = 0; p < N_PORTS; p++) begin
      gnt_o[p] = bank_act[bank_sel[p]] && bank_win[bank_sel[p]] == PW'(p) && req_i[p];
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rr_q        <= '0;
      rvalid_o    <= '0;
      resp_bank_q <= '0;
    end else begin
      rvalid_o <= gnt_o;
      for (int p = 0; p < N_PORTS; p++) begin
        if (gnt_o[p]) resp_bank_q[p] <= bank_sel[p];
      end
      for (int b = 0; b < N_BANKS; b++) begin
        if (bank_act[b]) rr_q[b] <= (bank_win[b] == PW'(N_PORTS - 1)) ? '0 : bank_win[b] + 1'b1;
      end
    end
  end

  // One single-port SRAM per bank, driven by the winning port.
  for (genvar b = 0; b < N_BANKS; b++) begin : g_bank
    logic [31:0] mem_q [BANK_WORDS];
    logic        we;
    logic [RW-1:0] row;
    logic [3:0]  be;
    logic [31:0] wdata;

    assign we    = we_i[bank_win[b]];
    assign row   = row_sel[bank_win[b]];
    assign be    = be_i[bank_win[b]];
    assign wdata = wdata_i[bank_win[b]];

    always_ff @(posedge clk_i) begin
      if (bank_act[b]) begin
        if (we) begin
          for (int by = 0; by < 4; by++) begin
            if (be[by]) mem_q[row][8*by +: 8] <= wdata[8*by +: 8];
          end
        end else begin
          bank_rdata[b] <= mem_q[row];
        end
      end
    end
  end

  for (genvar p = 0; p < N_PORTS; p++) begin : g_resp
    assign rdata_o[p] = bank_rdata[resp_bank_q[p]];
  end

endmodule
