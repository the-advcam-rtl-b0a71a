// advcam_feb: digital logic of the front-end board (FEB) of one camera module.
//
// A module has 49 pixels, grouped in 7 flowers of 7 pixels. Each pixel's
// converter delivers its samples through eight time-interleaved SARs; the
// board's logic:
//   * interleaves the SAR words of every pixel into one 12-bit sample per
//     clock (fadc_ti_mux, one per pixel; one clock = one 1 GS/s sample);
//   * sums the seven pixels of each flower (flower_sum) and sends these sums to
//     the six neighbouring boards (fsum_out);
//   * builds the L1 trigger from regions of seven flowers chosen among its own
//     and the neighbours' flower sums (l1_trigger) and signals it to the
//     central trigger processor (l1_trig);
//   * produces the per-flower binary stream for the second-level trigger
//     against a separate flower threshold (flower_stream);
//   * counts the rate of the L1 trigger and of every flower bit (rate_counter);
//   * keeps the last 6 us of all samples in a circular buffer (event_buffer)
//     and, on a trigger from the central trigger processor (ctpb_trig), sends
//     a window of them as one event to the network core (readout_ctrl).
//
// Latencies, from the SAR words of sample n being selected: pix at +1,
// flower sums (fsum_out) at +2, flower bits at +3, l1_trig at +2+NB_LAT+2 for
// local flowers (neighbour sums are expected NB_LAT clocks after the local
// ones). The buffer stores the sample as it leaves the muxes.
//
// The block structure follows the board as described (digital flower sums,
// neighbour exchange, L1 discrimination, binary stream, rate counters, 6 us
// buffer, trigger-prompted transfer); every interface format, timing and
// setting listed in the sub-blocks is this design's choice. The converters'
// analogue parts, the central trigger processor, the network (RDMA) core and
// the board-to-board link are outside: their signals are ports.
module advcam_feb
  import advcam_pkg::*;
#(
  parameter int unsigned DEPTH  = BUF_DEPTH,
  parameter int unsigned NB_LAT = 2
) (
  input  logic                                   clk,
  input  logic                                   rst,
  input  feb_cfg_t                               cfg,
  // converters
  input  logic                                   fadc_sync,
  input  logic [N_PIX-1:0][N_SAR-1:0][ADC_W-1:0] sar_data,
  // neighbour boards
  input  logic [N_NEIGH-1:0][N_FLOWER-1:0][FSUM_W-1:0] nb_fsum,
  output logic [N_FLOWER-1:0][FSUM_W-1:0]        fsum_out,
  // central trigger processor
  output logic                                   l1_trig,
  output logic [N_REGION-1:0]                    region_hit,
  output logic [N_REGION-1:0][RSUM_W-1:0]        region_sum,
  output logic [N_FLOWER-1:0]                    flower_bits,
  input  logic                                   ctpb_trig,
  // event stream to the network core
  output logic                                   ev_valid,
  input  logic                                   ev_ready,
  output ev_beat_t                               ev_beat,
  // monitoring
  output logic [N_FLOWER:0][RATE_W-1:0]          rates,      // [0] L1, [1+f] flower f
  output logic                                   rate_valid,
  output logic [TS_W-1:0]                        ts_now,
  output logic                                   busy,
  output logic [EVID_W-1:0]                      n_accepted,
  output logic [31:0]                            n_dropped,
  output logic [31:0]                            n_overrun
);

  localparam int unsigned AW = $clog2(DEPTH);

  // ---- converter output muxes ----
  logic [N_PIX-1:0][ADC_W-1:0] pix;
  for (genvar p = 0; p < N_PIX; p++) begin : g_fadc
    fadc_ti_mux u_mux (
      .clk, .rst, .sync(fadc_sync), .sar_data(sar_data[p]), .dout(pix[p]), .phase()
    );
  end

  // ---- flower sums ----
  flower_sum u_fsum (.clk, .rst, .pix, .fsum(fsum_out));

  // ---- L1 trigger ----
  l1_trigger #(.NB_LAT(NB_LAT)) u_l1 (
    .clk, .rst, .fsum(fsum_out), .nb_fsum, .region_mask(cfg.region_mask),
    .l1_thr(cfg.l1_thr), .region_sum, .region_hit, .l1_trig
  );

  // ---- binary stream for L2 ----
  flower_stream u_fstream (.clk, .rst, .fsum(fsum_out), .thr(cfg.flower_thr), .bits(flower_bits));

  // ---- rate counters ----
  rate_counter #(.NCH(N_FLOWER + 1), .CW(RATE_W)) u_rate (
    .clk, .rst, .trig({flower_bits, l1_trig}), .window_len(cfg.rate_window),
    .rate(rates), .rate_valid
  );

  // ---- sample buffer and readout ----
  logic [AW-1:0] wr_addr, rd_addr;
  logic          rd_en;
  frame_t        rd_data;

  event_buffer #(.DEPTH(DEPTH)) u_buf (
    .clk, .rst, .wr_data(frame_t'(pix)), .wr_addr, .rd_en, .rd_addr, .rd_data
  );

  readout_ctrl #(.DEPTH(DEPTH)) u_ro (
    .clk, .rst, .trig(ctpb_trig), .lookback(AW'(cfg.lookback)), .win_len(cfg.win_len),
    .wr_addr, .rd_en, .rd_addr, .rd_data,
    .out_valid(ev_valid), .out_ready(ev_ready), .out_beat(ev_beat),
    .ts_now, .busy, .n_accepted, .n_dropped, .n_overrun
  );

endmodule
