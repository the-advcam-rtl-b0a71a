// advcam_pkg: sizes and shared types of the front-end board (FEB) digital logic
// of one camera module.
//
// One module holds 49 pixels in 7 flowers of 7 pixels (a "super-flower"), and
// its FEB exchanges flower sums with the FEBs of its 6 neighbouring modules.
// Each pixel is digitised with 12 bits at 1 GS/s; the FEB logic processes one
// sample of every pixel per clock. These numbers follow the described camera;
// the widths derived from them (sum widths, timestamp, event counters) and the
// layout of the configuration and readout records are this design's choice.
package advcam_pkg;

  // Geometry of one module.
  localparam int unsigned PIX_PER_FLOWER = 7;   // a central pixel and its six neighbours
  localparam int unsigned N_FLOWER       = 7;   // flowers per module (super-flower)
  localparam int unsigned N_PIX          = PIX_PER_FLOWER * N_FLOWER;  // 49
  localparam int unsigned N_NEIGH        = 6;   // directly neighbouring modules

  // Digitisation.
  localparam int unsigned ADC_W   = 12;         // FADC resolution
  localparam int unsigned N_SAR   = 8;          // time-interleaved SARs per channel

  // Sample buffer: 6 us at 1 GS/s.
  localparam int unsigned BUF_DEPTH = 6000;

  // Flower sums arriving at a FEB: its own 7 and 7 from each neighbour.
  localparam int unsigned N_FSRC  = N_FLOWER * (1 + N_NEIGH);  // 49
  // L1 trigger regions evaluated by one FEB (one per local flower).
  localparam int unsigned N_REGION = N_FLOWER;

  // Sum widths: 7 pixels and 7 flowers of unsigned ADC words.
  localparam int unsigned FSUM_W = ADC_W + $clog2(PIX_PER_FLOWER + 1);   // 15
  localparam int unsigned RSUM_W = FSUM_W + $clog2(N_FLOWER + 1);        // 18

  localparam int unsigned TS_W   = 48;          // sample timestamp
  localparam int unsigned EVID_W = 32;          // event number
  localparam int unsigned WIN_W  = 16;          // readout window length
  localparam int unsigned RATE_W = 32;          // rate counter width

  typedef logic [ADC_W-1:0]  adc_t;
  typedef logic [FSUM_W-1:0] fsum_t;
  typedef logic [RSUM_W-1:0] rsum_t;

  // One sample of all pixels of the module, as stored in the buffer.
  typedef logic [N_PIX*ADC_W-1:0] frame_t;

  // One beat of the event stream sent to the network (RDMA) core.
  // The first beat (sof) is a header, the others carry one frame each;
  // err on the last beat (eof) says that part of the window had already
  // been overwritten in the buffer when it was read.
  typedef struct packed {
    logic   sof;
    logic   eof;
    logic   err;
    frame_t data;
  } ev_beat_t;

  // Header layout inside ev_beat_t.data (low bits, rest zero).
  typedef struct packed {
    logic [EVID_W-1:0] event_id;
    logic [TS_W-1:0]   first_ts;   // timestamp of the first sample of the window
    logic [WIN_W-1:0]  win_len;    // number of frames that follow
  } ev_header_t;

  localparam int unsigned HDR_W = $bits(ev_header_t);

  // Run-time settings of the board (slow-control registers).
  typedef struct packed {
    rsum_t                           l1_thr;       // L1 region threshold
    fsum_t                           flower_thr;   // flower threshold of the binary stream
    logic [N_REGION-1:0][N_FSRC-1:0] region_mask;  // flower sources of each L1 region
    logic [RATE_W-1:0]               rate_window;  // rate counter gate, in clocks
    logic [$clog2(BUF_DEPTH)-1:0]    lookback;     // readout start, samples before the trigger
    logic [WIN_W-1:0]                win_len;      // readout window, in samples
  } feb_cfg_t;

endpackage
