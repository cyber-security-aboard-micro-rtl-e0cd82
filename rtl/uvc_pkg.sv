// uvc_pkg: shared constants and types of the secure visual-communication path.
//
// A UVC (unconventional visual communication) packet is 12 bits on the LED
// line: a 2-bit start flag, the 8-bit payload and a 2-bit stop flag. The
// transmitter holds every bit for one bit time (0.4 s at 2.5 bit/s); a camera
// at 30 frames/s sees each bit in 12 consecutive frames. The packet size, the
// bit rate and the frames per bit follow the paper; the flag values, the bit
// order (payload MSB first) and the LED-on = 1 polarity are this design's own
// choice. The package also holds the small register-bus structs used by the
// memory-mapped blocks (a request is served in the cycle it is valid, read
// data is combinational).
package uvc_pkg;

  localparam int unsigned START_BITS     = 2;
  localparam int unsigned PAYLOAD_BITS   = 8;
  localparam int unsigned STOP_BITS      = 2;
  localparam int unsigned PACKET_BITS    = START_BITS + PAYLOAD_BITS + STOP_BITS;
  localparam int unsigned UVC_FRAMES_PER_BIT = 12;

  // Start flag "on, off" and stop flag "on, off", sent left bit first.
  localparam logic [START_BITS-1:0] START_FLAG = 2'b10;
  localparam logic [STOP_BITS-1:0]  STOP_FLAG  = 2'b10;

  typedef logic [PAYLOAD_BITS-1:0] payload_t;
  typedef logic [PACKET_BITS-1:0]  packet_t;

  // Packet as sent, leftmost (MSB) bit first.
  function automatic packet_t frame_packet(payload_t p);
    return {START_FLAG, p, STOP_FLAG};
  endfunction

  // Register bus: one access per cycle, always accepted.
  typedef struct packed {
    logic        valid;
    logic        we;
    logic [31:0] addr;   // byte address, word aligned
    logic [31:0] wdata;
  } reg_req_t;

  typedef struct packed {
    logic [31:0] rdata;  // valid in the same cycle as the request
  } reg_rsp_t;

endpackage
