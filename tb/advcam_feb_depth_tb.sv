// advcam_feb_depth_tb: the board at its default size with central trigger
// decisions that arrive close to the full 6 us buffer depth.
//
// Pixel samples follow a known pattern with a light pulse in flower 5. The
// central trigger is sent 5900 clocks (5.9 us at 1 GS/s) after the pulse,
// with a look-back that reaches 16 samples before the pulse, then for a second
// pulse with the largest look-back (5999). The first event must come out
// intact and contain the pulse at the expected frame. The second event must be
// flagged as overrun, because its oldest frame is overwritten before it can
// be read.
module advcam_feb_depth_tb;
  import advcam_pkg::*;

  localparam int LAT = 5900;
  localparam int WIN = 40;

  logic clk = 1'b0;
  logic rst;
  feb_cfg_t cfg;
  logic fadc_sync;
  logic [N_PIX-1:0][N_SAR-1:0][ADC_W-1:0] sar_data;
  logic [N_NEIGH-1:0][N_FLOWER-1:0][FSUM_W-1:0] nb_fsum;
  logic [N_FLOWER-1:0][FSUM_W-1:0] fsum_out;
  logic l1_trig;
  logic [N_REGION-1:0] region_hit;
  logic [N_REGION-1:0][RSUM_W-1:0] region_sum;
  logic [N_FLOWER-1:0] flower_bits;
  logic ctpb_trig;
  logic ev_valid, ev_ready;
  ev_beat_t ev_beat;
  logic [N_FLOWER:0][RATE_W-1:0] rates;
  logic rate_valid;
  logic [TS_W-1:0] ts_now;
  logic busy;
  logic [EVID_W-1:0] n_accepted;
  logic [31:0] n_dropped, n_overrun;

  advcam_feb dut (
    .clk, .rst, .cfg, .fadc_sync, .sar_data, .nb_fsum, .fsum_out, .l1_trig, .region_hit,
    .region_sum, .flower_bits, .ctpb_trig, .ev_valid, .ev_ready, .ev_beat, .rates, .rate_valid,
    .ts_now, .busy, .n_accepted, .n_dropped, .n_overrun
  );

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  initial begin : watchdog
    repeat (30000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int P1 = 500, P2 = 8000;

  function automatic int v(int p, int t);
    int a = 0;
    if (p / PIX_PER_FLOWER == 5 && ((t >= P1 && t < P1 + 3) || (t >= P2 && t < P2 + 3))) a = 500;
    return 40 + int'((32'(p) * 32'h27d4eb2f + 32'(t) * 32'h165667b1) >> 28) + a;
  endfunction

  int cyc, mphase;
  always @(posedge clk) begin
    if (rst) begin cyc <= 0; mphase <= 0; end
    else begin cyc <= cyc + 1; mphase <= (mphase + 1) % N_SAR; end
  end
  always @(negedge clk)
    if (!rst) for (int p = 0; p < N_PIX; p++) sar_data[p][mphase] <= ADC_W'(v(p, cyc));

  // event checker: frame with timestamp ts holds sample ts-1
  int n_ev = 0, n_err = 0, pulse_frame = -1;
  initial begin
    int beat_i = -1, first = 0;
    logic bad;
    forever begin
      @(negedge clk);
      #1;
      if (!rst && ev_valid && ev_ready) begin
        if (ev_beat.sof) begin
          ev_header_t h;
          h = ev_beat.data[HDR_W-1:0];
          first = int'(h.first_ts);
          beat_i = 0;
          bad = 1'b0;
          checks++;
          if (int'(h.win_len) != WIN || int'(h.event_id) != n_ev) begin
            failures++; $display("header id %0d len %0d", h.event_id, h.win_len);
          end
        end else begin
          logic ok;
          ok = 1'b1;
          for (int p = 0; p < N_PIX; p++)
            if (int'(ev_beat.data[ADC_W*p +: ADC_W]) != v(p, first + beat_i - 1)) ok = 1'b0;
          if (!ok) bad = 1'b1;
          if (n_ev == 0 && int'(ev_beat.data[ADC_W*35 +: ADC_W]) > 400 && pulse_frame < 0) pulse_frame = beat_i;
          if (ev_beat.eof) begin
            checks++;
            if (ev_beat.err != bad) begin failures++; $display("event %0d err %b expected %b", n_ev, ev_beat.err, bad); end
            if (ev_beat.err) n_err++;
            n_ev++;
          end
          beat_i++;
        end
      end
    end
  end

  initial begin
    int tl1;
    rst = 1'b1; fadc_sync = 1'b0; sar_data = '0; nb_fsum = '0; ctpb_trig = 1'b0; ev_ready = 1'b1;
    cfg = '0;
    cfg.l1_thr = RSUM_W'(4000);
    cfg.flower_thr = FSUM_W'(1500);
    cfg.rate_window = RATE_W'(1000);
    for (int f = 0; f < N_FLOWER; f++) cfg.region_mask[0][f] = 1'b1;
    cfg.win_len = WIN_W'(WIN);
    repeat (4) @(negedge clk);
    rst = 1'b0;
    // first pulse: trigger 5.9 us after the L1 trigger
    wait (l1_trig);
    @(negedge clk);
    tl1 = cyc;                          // clock in which l1_trig rose
    cfg.lookback = 13'(LAT + 6 + 16);   // 6 = sample-to-L1 latency
    repeat (LAT) @(negedge clk);        // trigger in clock tl1 + LAT
    ctpb_trig = 1'b1;
    @(negedge clk);
    ctpb_trig = 1'b0;
    wait (!busy);
    // second pulse: the largest look-back, whose first frame is lost
    wait (cyc == P2 + 20);
    @(negedge clk);
    cfg.lookback = 13'(5999);
    ctpb_trig = 1'b1;
    @(negedge clk);
    ctpb_trig = 1'b0;
    wait (!busy);
    repeat (10) @(negedge clk);
    checks++;
    if (n_ev != 2 || n_err != 1 || n_overrun != 1) begin
      failures++; $display("events %0d errors %0d overrun %0d", n_ev, n_err, n_overrun);
    end
    // first frame = sample P1 - 16 - 1 (frames hold the sample of the clock
    // before their timestamp), so the pulse sample P1 is frame 17
    checks++;
    if (pulse_frame != 17 || tl1 != P1 + 6) begin
      failures++; $display("pulse at frame %0d (L1 at %0d)", pulse_frame, tl1);
    end
    $display("events=%0d overrun=%0d pulse_frame=%0d", n_ev, n_err, pulse_frame);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
