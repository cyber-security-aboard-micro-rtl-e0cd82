// secure_gpio: LED GPIO owned by the secure subsystem, with a UVC packet sender.
//
// When the root of trust decides that the radio link or the rest of the chip
// can no longer be trusted, it signals this to other drones by blinking the
// four LEDs. This block is the only driver of those LEDs and is reachable
// only from the secure-side register bus. It has two modes:
//   * direct:  LED pins follow the LED register (software blinking);
//   * UVC:     a write to TX frames the 8-bit payload as a 12-bit packet
//              (start flag, payload MSB first, stop flag, see uvc_pkg) and
//              shifts it out, one bit every BIT_CYCLES clocks. All LEDs show
//              the same bit; between packets the LEDs are off.
// Registers (word offsets): 0x0 CTRL {irq_en, uvc_mode}, 0x4 LED, 0x8 TX
// (write payload to start; ignored while busy), 0xC STATUS {done, busy}
// (write 1 to bit 1 clears done). done_irq_o = done & irq_en.
// Timing: the first packet bit appears on led_o the cycle after the TX write
// and each bit lasts exactly BIT_CYCLES cycles, so a packet takes
// 12*BIT_CYCLES cycles. The default, 140e6 cycles, is 2.5 bit/s at the
// 350 MHz of the secure subsystem as given in the paper; the register map and
// the hardware sender itself are this design's own (the paper blinks the LEDs
// from software on the secure core).
module secure_gpio
  import uvc_pkg::*;
#(
  parameter int unsigned NUM_LEDS   = 4,
  parameter int unsigned BIT_CYCLES = 140_000_000
) (
  input  logic                clk_i,
  input  logic                rst_ni,
  input  reg_req_t            reg_req_i,
  output reg_rsp_t            reg_rsp_o,
  output logic [NUM_LEDS-1:0] led_o,
  output logic                busy_o,
  output logic                done_irq_o
);

  localparam int unsigned CW = (BIT_CYCLES > 1) ? $clog2(BIT_CYCLES) : 1;
  localparam int unsigned BW = $clog2(PACKET_BITS + 1);

  localparam logic [3:0] OFS_CTRL = 4'h0, OFS_LED = 4'h4, OFS_TX = 4'h8, OFS_STATUS = 4'hC;

  logic                uvc_mode_q, irq_en_q, done_q, busy_q;
  logic [NUM_LEDS-1:0] led_q;
  packet_t             shreg_q;
  logic [CW-1:0]       cyc_q;
  logic [BW-1:0]       bits_left_q;

  logic wr;
  assign wr = reg_req_i.valid && reg_req_i.we;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      uvc_mode_q  <= 1'b0;
      irq_en_q    <= 1'b0;
      done_q      <= 1'b0;
      busy_q      <= 1'b0;
      led_q       <= '0;
      shreg_q     <= '0;
      cyc_q       <= '0;
      bits_left_q <= '0;
    end else begin
      if (wr && reg_req_i.addr[3:0] == OFS_CTRL) begin
        uvc_mode_q <= reg_req_i.wdata[0];
        irq_en_q   <= reg_req_i.wdata[1];
      end
      if (wr && reg_req_i.addr[3:0] == OFS_LED) led_q <= reg_req_i.wdata[NUM_LEDS-1:0];
      if (wr && reg_req_i.addr[3:0] == OFS_STATUS && reg_req_i.wdata[1]) done_q <= 1'b0;

      if (busy_q) begin
        if (cyc_q == CW'(BIT_CYCLES - 1)) begin
          cyc_q       <= '0;
          shreg_q     <= shreg_q << 1;
          bits_left_q <= bits_left_q - 1'b1;
          if (bits_left_q == BW'(1)) begin
            busy_q <= 1'b0;
            done_q <= 1'b1;
          end
        end else begin
          cyc_q <= cyc_q + 1'b1;
        end
      end else if (wr && reg_req_i.addr[3:0] == OFS_TX) begin
        busy_q      <= 1'b1;
        shreg_q     <= frame_packet(reg_req_i.wdata[PAYLOAD_BITS-1:0]);
        cyc_q       <= '0;
        bits_left_q <= BW'(PACKET_BITS);
      end
    end
  end

  always_comb begin
    reg_rsp_o.rdata = '0;
    unique case (reg_req_i.addr[3:0])
      OFS_CTRL:   reg_rsp_o.rdata[1:0] = {irq_en_q, uvc_mode_q};
      OFS_LED:    reg_rsp_o.rdata[NUM_LEDS-1:0] = led_q;
      OFS_TX:     reg_rsp_o.rdata[PACKET_BITS-1:0] = shreg_q;
      OFS_STATUS: reg_rsp_o.rdata[1:0] = {done_q, busy_q};
      default:    reg_rsp_o.rdata = '0;
    endcase
  end

  assign led_o      = uvc_mode_q ? {NUM_LEDS{busy_q & shreg_q[PACKET_BITS-1]}} : led_q;
  assign busy_o     = busy_q;
  assign done_irq_o = done_q & irq_en_q;

endmodule
