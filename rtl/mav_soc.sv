// mav_soc: top level of the secure nano-drone mission computer, as far as it is given here.
//
// The chip couples a 64-bit host core, an 8-core accelerator cluster and a
// secure subsystem acting as root of trust. Third-party parts (host core,
// cluster cores, secure core and its crypto, bus crossbars, peripherals) are
// not inside this module; their bus ports are the ports of this top:
//   * host bus (64-bit), two masters: the host crossbar (host_*) and the
//     secure subsystem's bridge onto the host bus (s2h_*), merged by
//     host_arb. Targets: L2 scratchpad at HOST_L2_BASE (512 KiB) and the host
//     side of the SCMI mailbox at HOST_MBOX_BASE (one 32-bit word per access,
//     even words on bits 31:0, odd words on 63:32). A master holds req until
//     gnt; rvalid and rdata follow a granted read by one cycle. Unmapped
//     reads return 0.
//   * secure bus (32-bit, from the secure interconnect): mailbox at
//     SEC_MBOX_BASE and the LED GPIO with the packet sender at SEC_GPIO_BASE.
//     Reads are combinational.
//   * cluster TCDM ports: the eight cores and the DMA of the accelerator.
//   * CNN score stream in, decoded messages out: the LED-state network runs on
//     the cluster cores; its per-frame score drives the message decoder.
// Interrupts: irq_sec_o (mailbox doorbell, and packet-done of the LED
// sender) to the secure core, irq_host_o (mailbox completion) to the host.
// The partition into domains and the connections follow the paper's block
// diagram; the address map and bus widths of the secure side are this
// design's own.
module mav_soc
  import uvc_pkg::*;
#(
  parameter int unsigned L2_BYTES        = 512 * 1024,
  parameter int unsigned TCDM_PORTS      = 9,
  parameter int unsigned TCDM_BANKS      = 16,
  parameter int unsigned TCDM_BANK_BYTES = 8192,
  parameter int unsigned MBOX_WORDS      = 32,
  parameter int unsigned NUM_LEDS        = 4,
  parameter int unsigned BIT_CYCLES      = 140_000_000,
  parameter int unsigned FRAMES_PER_BIT  = UVC_FRAMES_PER_BIT,
  parameter logic [31:0] HOST_L2_BASE    = 32'h1C00_0000,
  parameter logic [31:0] HOST_MBOX_BASE  = 32'h1040_0000,
  parameter logic [31:0] SEC_MBOX_BASE   = 32'h0000_0000,
  parameter logic [31:0] SEC_GPIO_BASE   = 32'h0000_1000
) (
  input  logic                            clk_i,
  input  logic                            rst_ni,
  // host bus
  input  logic                            host_req_i,
  input  logic                            host_we_i,
  input  logic [31:0]                     host_addr_i,
  input  logic [7:0]                      host_be_i,
  input  logic [63:0]                     host_wdata_i,
  output logic                            host_gnt_o,
  output logic                            host_rvalid_o,
  output logic [63:0]                     host_rdata_o,
  // secure subsystem's bridge onto the host bus (second host-bus master)
  input  logic                            s2h_req_i,
  input  logic                            s2h_we_i,
  input  logic [31:0]                     s2h_addr_i,
  input  logic [7:0]                      s2h_be_i,
  input  logic [63:0]                     s2h_wdata_i,
  output logic                            s2h_gnt_o,
  output logic                            s2h_rvalid_o,
  output logic [63:0]                     s2h_rdata_o,
  // secure bus
  input  reg_req_t                        sec_req_i,
  output reg_rsp_t                        sec_rsp_o,
  // interrupts
  output logic                            irq_sec_o,
  output logic                            irq_host_o,
  // secure LEDs
  output logic [NUM_LEDS-1:0]             led_o,
  output logic                            uvc_tx_busy_o,
  // cluster TCDM
  input  logic [TCDM_PORTS-1:0]           tcdm_req_i,
  output logic [TCDM_PORTS-1:0]           tcdm_gnt_o,
  input  logic [TCDM_PORTS-1:0]           tcdm_we_i,
  input  logic [TCDM_PORTS-1:0][31:0]     tcdm_addr_i,
  input  logic [TCDM_PORTS-1:0][3:0]      tcdm_be_i,
  input  logic [TCDM_PORTS-1:0][31:0]     tcdm_wdata_i,
  output logic [TCDM_PORTS-1:0]           tcdm_rvalid_o,
  output logic [TCDM_PORTS-1:0][31:0]     tcdm_rdata_o,
  // CNN scores and decoded messages
  input  logic                            score_valid_i,
  input  logic [7:0]                      score_i,
  output logic                            msg_valid_o,
  output payload_t                        msg_o,
  output logic                            frame_err_o,
  output logic [1:0]                      uvc_rx_state_o
);

  localparam int unsigned L2_AW = $clog2(L2_BYTES);

  // ---------------- host bus: arbitration and decode ----------------
  logic        tx_done_irq, irq_mbox_sec;
  reg_req_t    mb_host_req, mb_sec_req, gpio_req;
  reg_rsp_t    mb_host_rsp, mb_sec_rsp, gpio_rsp;
  logic        t_req, t_we;
  logic [31:0] t_addr;
  logic [7:0]  t_be;
  logic [63:0] t_wdata, t_rdata;
  logic        t_l2_hit, t_mb_hit;
  logic        l2_rd_q, mb_rd_q;
  logic [31:0] mb_rdata_q;
  logic [63:0] l2_rdata;

  host_arb #(.AW(32), .DW(64)) u_host_arb (
    .clk_i, .rst_ni,
    .m_req_i    ({s2h_req_i,   host_req_i}),
    .m_gnt_o    ({s2h_gnt_o,   host_gnt_o}),
    .m_we_i     ({s2h_we_i,    host_we_i}),
    .m_addr_i   ({s2h_addr_i,  host_addr_i}),
    .m_be_i     ({s2h_be_i,    host_be_i}),
    .m_wdata_i  ({s2h_wdata_i, host_wdata_i}),
    .m_rvalid_o ({s2h_rvalid_o, host_rvalid_o}),
    .m_rdata_o  ({s2h_rdata_o, host_rdata_o}),
    .t_req_o    (t_req),
    .t_we_o     (t_we),
    .t_addr_o   (t_addr),
    .t_be_o     (t_be),
    .t_wdata_o  (t_wdata),
    .t_rdata_i  (t_rdata)
  );

  assign t_l2_hit = t_addr[31:L2_AW] == HOST_L2_BASE[31:L2_AW];
  assign t_mb_hit = t_addr[31:12] == HOST_MBOX_BASE[31:12];

  l2spm #(.SIZE_BYTES(L2_BYTES), .DATA_W(64), .AW(32)) u_l2spm (
    .clk_i,
    .req_i   (t_req && t_l2_hit),
    .we_i    (t_we),
    .addr_i  (t_addr),
    .be_i    (t_be),
    .wdata_i (t_wdata),
    .rdata_o (l2_rdata)
  );

  assign mb_host_req.valid = t_req && t_mb_hit;
  assign mb_host_req.we    = t_we;
  assign mb_host_req.addr  = {20'b0, t_addr[11:0]};
  assign mb_host_req.wdata = t_addr[2] ? t_wdata[63:32] : t_wdata[31:0];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      l2_rd_q    <= 1'b0;
      mb_rd_q    <= 1'b0;
      mb_rdata_q <= '0;
    end else begin
      l2_rd_q    <= t_req && !t_we && t_l2_hit;
      mb_rd_q    <= t_req && !t_we && t_mb_hit;
      mb_rdata_q <= mb_host_rsp.rdata;
    end
  end

  always_comb begin
    t_rdata = '0;
    if (l2_rd_q)      t_rdata = l2_rdata;
    else if (mb_rd_q) t_rdata = {mb_rdata_q, mb_rdata_q};
  end

  // ---------------- secure bus decode ----------------
  logic sec_mb_hit, sec_gpio_hit;
  assign sec_mb_hit   = sec_req_i.addr[31:12] == SEC_MBOX_BASE[31:12];
  assign sec_gpio_hit = sec_req_i.addr[31:12] == SEC_GPIO_BASE[31:12];

  always_comb begin
    mb_sec_req       = sec_req_i;
    mb_sec_req.valid = sec_req_i.valid && sec_mb_hit;
    mb_sec_req.addr  = {20'b0, sec_req_i.addr[11:0]};
    gpio_req         = sec_req_i;
    gpio_req.valid   = sec_req_i.valid && sec_gpio_hit;
    gpio_req.addr    = {20'b0, sec_req_i.addr[11:0]};
    sec_rsp_o.rdata  = sec_mb_hit ? mb_sec_rsp.rdata : (sec_gpio_hit ? gpio_rsp.rdata : '0);
  end

  scmi_mailbox #(.SHMEM_WORDS(MBOX_WORDS)) u_mbox (
    .clk_i, .rst_ni,
    .host_req_i (mb_host_req), .host_rsp_o (mb_host_rsp),
    .sec_req_i  (mb_sec_req),  .sec_rsp_o  (mb_sec_rsp),
    .irq_sec_o  (irq_mbox_sec),
    .irq_host_o (irq_host_o)
  );

  secure_gpio #(.NUM_LEDS(NUM_LEDS), .BIT_CYCLES(BIT_CYCLES)) u_gpio (
    .clk_i, .rst_ni,
    .reg_req_i  (gpio_req),
    .reg_rsp_o  (gpio_rsp),
    .led_o,
    .busy_o     (uvc_tx_busy_o),
    .done_irq_o (tx_done_irq)
  );

  assign irq_sec_o = irq_mbox_sec | tx_done_irq;

  // ---------------- accelerator cluster ----------------
  l1_tcdm #(.N_PORTS(TCDM_PORTS), .N_BANKS(TCDM_BANKS), .BANK_BYTES(TCDM_BANK_BYTES)) u_tcdm (
    .clk_i, .rst_ni,
    .req_i    (tcdm_req_i),
    .gnt_o    (tcdm_gnt_o),
    .we_i     (tcdm_we_i),
    .addr_i   (tcdm_addr_i),
    .be_i     (tcdm_be_i),
    .wdata_i  (tcdm_wdata_i),
    .rvalid_o (tcdm_rvalid_o),
    .rdata_o  (tcdm_rdata_o)
  );

  uvc_decoder #(.FRAMES_PER_BIT(FRAMES_PER_BIT)) u_dec (
    .clk_i, .rst_ni,
    .score_valid_i,
    .score_i,
    .msg_valid_o,
    .msg_o,
    .frame_err_o,
    .state_o (uvc_rx_state_o)
  );

endmodule
