// denoise_pkg -- types and constants shared by the frame-subtraction and
// averaging kernel.
//
// The kernel works on 128-bit stream beats that carry eight 16-bit pixels
// (mono12 pixels held in 16-bit containers), so a 256 x 80 frame is 2560
// beats. All pixel arithmetic is modulo 2^16, as in the reference kernel.
// The stream and AXI4 channel structs below are bundles used between the
// blocks and at the top-level ports; the AXI4 subset is the one a simple
// INCR-burst master needs (no IDs, locks, caches or QoS).
package denoise_pkg;

  localparam int unsigned PIX_W      = 16;   // pixel container width
  localparam int unsigned BEAT_W     = 128;  // CustomLogic stream / AXI data width
  localparam int unsigned PPB        = BEAT_W / PIX_W; // pixels per beat (8)
  localparam int unsigned AXI_ADDR_W = 32;
  localparam int unsigned BEAT_BYTES = BEAT_W / 8;

  typedef logic [PIX_W-1:0]      pix_t;
  typedef pix_t [PPB-1:0]        beat_t;   // lane k = pixel k of the beat
  typedef logic [AXI_ADDR_W-1:0] addr_t;

  // CustomLogic-side pixel stream (input and output)
  typedef struct packed {
    beat_t data;
    logic  sof;   // first beat of a frame
    logic  eof;   // last beat of a frame
  } pix_stream_t;

  // AXI4 read address channel (master -> slave payload)
  typedef struct packed {
    addr_t      addr;
    logic [7:0] len;    // beats - 1
    logic [2:0] size;   // log2(bytes per beat)
    logic [1:0] burst;  // 2'b01 = INCR
  } axi_ax_t;

  // AXI4 read data channel payload
  typedef struct packed {
    logic [BEAT_W-1:0] data;
    logic [1:0]        resp;
    logic              last;
  } axi_r_t;

  // AXI4 write data channel payload
  typedef struct packed {
    logic [BEAT_W-1:0]     data;
    logic [BEAT_BYTES-1:0] strb;
    logic                  last;
  } axi_w_t;

  localparam logic [1:0] AXI_BURST_INCR = 2'b01;
  localparam logic [2:0] AXI_SIZE_BEAT  = 3'($clog2(BEAT_BYTES));

  // Per-frame work of the kernel, selected by the frame/group counters
  typedef enum logic [2:0] {
    PH_IDLE,     // waiting for a frame
    PH_READ,     // burst-read running sum of this frame pair into sumFrame
    PH_PROC,     // stream the frame through subtraction / accumulation
    PH_WRITE,    // burst-write sumFrame back to DRAM
    PH_RECIP     // computing 2^32/G after a configuration load
  } phase_e;

endpackage
