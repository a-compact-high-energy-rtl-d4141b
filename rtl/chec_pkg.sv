// chec_pkg: constants and types shared by the camera's digital logic.
//
// The camera has 2048 pixels read by 32 front-end (FEE) modules. Each module
// carries four 16-channel sampling ASICs (12-bit, 1 GSa/s, 4096-cell storage
// ring) and forms 16 first-level trigger patches (analogue sum of four
// pixels), giving 512 trigger lines into the backplane trigger FPGA. These
// numbers follow the published camera description. Everything on the digital
// side runs on one 125 MHz clock (8 ns per cycle), the backplane clock of the
// camera.
//
// The trigger FPGA talks to the modules over one serial line carrying two
// kinds of message: a readout request (event number and trigger time) and a
// re-sync (the camera time at the moment the message was sent). The message
// layout, the link latency, the event descriptor and the packet format are
// this design's own choices; the camera description names these links but does not define them.
package chec_pkg;

  // Clock: 125 MHz backplane clock
  localparam int unsigned CLK_NS = 8;

  // Camera geometry
  localparam int unsigned N_MODULES          = 32;
  localparam int unsigned PATCHES_PER_MODULE = 16;
  localparam int unsigned N_TRIG_LINES       = N_MODULES * PATCHES_PER_MODULE;  // 512

  // Sampling ASICs per module
  localparam int unsigned ASICS_PER_MODULE = 4;
  localparam int unsigned CH_PER_ASIC      = 16;
  localparam int unsigned ADC_BITS         = 12;
  localparam int unsigned STORAGE_CELLS    = 4096;  // 4096 ns at 1 GSa/s
  localparam int unsigned BLOCK_CELLS      = 32;    // readout window granule, ns
  localparam int unsigned NOMINAL_BLOCKS   = 3;     // 96 ns window

  // Serial readout / re-sync message
  typedef enum logic [1:0] {
    MSG_NONE    = 2'd0,
    MSG_READOUT = 2'd1,
    MSG_RESYNC  = 2'd2
  } msg_type_e;

  typedef struct packed {
    msg_type_e   mtype;
    logic [15:0] event_id;
    logic [31:0] ns;
  } msg_t;

  localparam int unsigned MSG_PAYLOAD_BITS = $bits(msg_t);       // 50
  localparam int unsigned MSG_FRAME_BITS   = MSG_PAYLOAD_BITS + 1;  // plus start bit
  // Cycles from the transmitter accepting a message to the receiver's
  // msg_valid pulse.
  localparam int unsigned LINK_LAT_CYCLES  = MSG_FRAME_BITS + 1;  // 52

  // Event packet
  localparam int unsigned HDR_WORDS  = 6;
  localparam logic [3:0]  HDR_MAGIC  = 4'hC;

  // Event descriptor passed from the capture controller to the packer
  typedef struct packed {
    logic        stale;       // window lost: header-only packet
    logic [15:0] event_id;
    logic [31:0] trig_ns;
    logic [11:0] start_cell;
    logic [15:0] win;         // window length in cells
  } evhdr_t;

  // Readout request queued in a module
  typedef struct packed {
    logic [15:0] event_id;
    logic [31:0] trig_ns;
  } rdreq_t;

endpackage
