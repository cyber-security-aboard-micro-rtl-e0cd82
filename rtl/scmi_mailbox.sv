// scmi_mailbox: command mailbox between the host domain and the secure subsystem.
//
// The host may not see the secure subsystem's address map. To ask it for a
// service (for example a cryptographic operation) the host writes an SCMI
// message into the mailbox's shared memory and sets the doorbell; the
// doorbell is a level interrupt to the secure core. The secure core reads the
// message, does the work, may write a reply into the same shared memory,
// clears the doorbell and sets the completion flag, which interrupts the host.
// The host clears completion when it has read the reply.
// Both sides see the same map (byte offsets):
//   0 .. 4*SHMEM_WORDS-4   shared memory, 32-bit words, read/write from both sides
//   4*SHMEM_WORDS          DOORBELL   bit 0; host write 1 sets, secure write 1 clears
//   4*SHMEM_WORDS+4        COMPLETION bit 0; secure write 1 sets, host write 1 clears
// Writes take effect at the next clock edge; reads are combinational. If both
// sides write the same shared word in one cycle the secure side wins.
// From the paper: shared memory, doorbell interrupt to the secure core through
// a memory-mapped register, completion interrupt back to the host. Own
// choices: 32 words (128 bytes) of shared memory, the register layout,
// one common clock (the clock-domain crossing is outside this block) and the
// SCMI message format being left to software.
module scmi_mailbox
  import uvc_pkg::*;
#(
  parameter int unsigned SHMEM_WORDS = 32
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  reg_req_t host_req_i,
  output reg_rsp_t host_rsp_o,
  input  reg_req_t sec_req_i,
  output reg_rsp_t sec_rsp_o,
  output logic     irq_sec_o,
  output logic     irq_host_o
);

  localparam int unsigned IW = $clog2(SHMEM_WORDS);
  localparam int unsigned AW = IW + 3;  // covers shared memory plus the flag words
  localparam logic [AW-1:0] OFS_DOORBELL   = AW'(4 * SHMEM_WORDS);
  localparam logic [AW-1:0] OFS_COMPLETION = AW'(4 * SHMEM_WORDS + 4);

  logic [31:0] shmem_q [SHMEM_WORDS];
  logic        doorbell_q, completion_q;

  logic [AW-1:0] h_ofs, s_ofs;
  logic          h_wr, s_wr, h_mem, s_mem;
  logic [IW-1:0] h_idx, s_idx;

  assign h_ofs = host_req_i.addr[AW-1:0];
  assign s_ofs = sec_req_i.addr[AW-1:0];
  assign h_wr  = host_req_i.valid && host_req_i.we;
  assign s_wr  = sec_req_i.valid && sec_req_i.we;
  assign h_mem = h_ofs < OFS_DOORBELL;
  assign s_mem = s_ofs < OFS_DOORBELL;
  assign h_idx = h_ofs[IW+1:2];
  assign s_idx = s_ofs[IW+1:2];

  always_ff @(posedge clk_i) begin
    if (h_wr && h_mem) shmem_q[h_idx] <= host_req_i.wdata;
    if (s_wr && s_mem) shmem_q[s_idx] <= sec_req_i.wdata;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      doorbell_q   <= 1'b0;
      completion_q <= 1'b0;
    end else begin
      if (h_wr && h_ofs == OFS_DOORBELL && host_req_i.wdata[0]) doorbell_q <= 1'b1;
      else if (s_wr && s_ofs == OFS_DOORBELL && sec_req_i.wdata[0]) doorbell_q <= 1'b0;
      if (s_wr && s_ofs == OFS_COMPLETION && sec_req_i.wdata[0]) completion_q <= 1'b1;
      else if (h_wr && h_ofs == OFS_COMPLETION && host_req_i.wdata[0]) completion_q <= 1'b0;
    end
  end

  function automatic logic [31:0] rd(logic [AW-1:0] ofs, logic [IW-1:0] idx);
    if (ofs < OFS_DOORBELL)  return shmem_q[idx];
    if (ofs == OFS_DOORBELL) return {31'b0, doorbell_q};
    if (ofs == OFS_COMPLETION) return {31'b0, completion_q};
    return '0;
  endfunction

  assign host_rsp_o.rdata = rd(h_ofs, h_idx);
  assign sec_rsp_o.rdata  = rd(s_ofs, s_idx);

  assign irq_sec_o  = doorbell_q;
  assign irq_host_o = completion_q;

endmodule
