// l2spm: host-domain L2 scratchpad memory (512 KiB).
//
// The host core, the peripheral DMA and the bridges from the cluster and the
// secure subsystem keep their working data here. It is a single-port SRAM of
// SIZE_BYTES bytes organised as DATA_W-bit words, with one byte enable per
// byte. A request (req_i) with we_i writes the enabled bytes of wdata_i at
// the clock edge; without we_i it reads, and the word appears on rdata_o one
// cycle later (rdata_o holds until the next read). Addresses are byte
// addresses; the low bits below the word size and bits above the memory size
// are ignored. Size (512 KiB) and 64-bit width follow the paper; the
// one-cycle latency and single port are this design's own. The contents are
// not reset.
module l2spm #(
  parameter int unsigned SIZE_BYTES = 512 * 1024,
  parameter int unsigned DATA_W     = 64,
  parameter int unsigned AW         = 32
) (
  input  logic                clk_i,
  input  logic                req_i,
  input  logic                we_i,
  input  logic [AW-1:0]       addr_i,
  input  logic [DATA_W/8-1:0] be_i,
  input  logic [DATA_W-1:0]   wdata_i,
  output logic [DATA_W-1:0]   rdata_o
);

  localparam int unsigned NB    = DATA_W / 8;
  localparam int unsigned WORDS = SIZE_BYTES / NB;
  localparam int unsigned OW    = $clog2(NB);
  localparam int unsigned IW    = $clog2(WORDS);

  logic [DATA_W-1:0] mem_q [WORDS];
  logic [IW-1:0]     idx;

  assign idx = addr_i[OW +: IW];

  always_ff @(posedge clk_i) begin
    if (req_i) begin
      if (we_i) begin
        for (int b = 0; b < NB; b++) begin
          if (be_i[b]) mem_q[idx][8*b +: 8] <= wdata_i[8*b +: 8];
        end
      end else begin
        rdata_o <= mem_q[idx];
      end
    end
  end

endmodule
