// sieca_pkg: constants and types shared by the camera readout logic.
//
// The camera has 256 photon-counting channels (four 64-channel SiPM arrays
// read by eight 32-channel front-end ASICs). The readout counts, per channel,
// the discriminator pulses in each Gate Time Unit (GTU, 2.5 us), keeps the
// last 1024 GTU in a ring buffer and, on a trigger, ships 128 consecutive GTU
// as one packet. Those numbers come from the camera's description; the clock
// rate, counter width, memory word width and packet layout are this design's
// own choices and are marked as such below.
package sieca_pkg;

  // Camera geometry (from the camera description).
  localparam int unsigned N_CH        = 256;   // photon-counting channels
  localparam int unsigned N_ASIC      = 8;     // 32-channel front-end ASICs
  localparam int unsigned N_ARRAY     = 4;     // 64-channel SiPM arrays
  localparam int unsigned N_TSENS     = 4;     // temperature sensors
  localparam int unsigned RING_GTUS   = 1024;  // GTU bins held in the ring buffer
  localparam int unsigned EVENT_GTUS  = 128;   // GTU per event (default depth)

  // Design choices.
  localparam int unsigned CLK_HZ      = 100_000_000; // system clock
  localparam int unsigned GTU_CYCLES  = 250;   // 2.5 us at 100 MHz
  localparam int unsigned CNT_W       = 8;     // per-channel count width (saturating)
  localparam int unsigned WORD_W      = 64;    // ring buffer / FIFO word width
  localparam int unsigned CH_PER_WORD = WORD_W / CNT_W;      // 8 channels per word
  localparam int unsigned TRIG_LAT    = 64;    // default post-trigger GTUs
  localparam int unsigned TEMP_W      = 12;    // ADC resolution
  localparam int unsigned SC_BITS     = 1144;  // slow-control chain length of one ASIC

  // Packet framing words (design choice).
  localparam logic [15:0] HDR_MAGIC = 16'h5ECA;
  localparam logic [15:0] FTR_MAGIC = 16'hF00D;

  // Run-time configuration written by the host.
  typedef struct packed {
    logic [15:0] gtu_len;    // clock cycles per GTU
    logic [10:0] depth;      // GTU bins per event, 1..1024
    logic [10:0] latency;    // GTU bins recorded after the trigger GTU
    logic        run;        // counting and triggering enabled
  } cfg_t;

  // Readout request from the trigger controller to the packet builder.
  typedef struct packed {
    logic [31:0] event_num;  // running event number
    logic [31:0] trig_gtu;   // GTU number in which the trigger arrived
    logic [31:0] first_gtu;  // GTU number of the first bin to read
    logic [10:0] depth;      // number of bins to read
  } readout_req_t;

endpackage
