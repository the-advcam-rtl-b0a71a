// advcam_feb_tb: end-to-end test of one front-end board at its full default
// size (49 pixels, 6000-sample buffer).
//
// The testbench plays the parts around the board:
//   * the converters: every pixel's sample v(p, t) (a pedestal, a small
//     pseudo-random noise and injected light pulses) is placed on the SAR
//     input of the current interleaving phase, as an eight-way interleaved
//     converter would deliver it; one re-synchronisation pulse is sent;
//   * the six neighbouring boards: their flower sums arrive NB_LAT clocks
//     after the board's own, with pulses of their own;
//   * the central trigger processor: it answers each L1 trigger with a
//     readout trigger a fixed time later, and once sends a second trigger
//     while the board is busy;
//   * the network core: it accepts the event stream freely, with random
//     back-pressure, or not at all for longer than the buffer holds.
// From v(p, t) the testbench recomputes, every clock, the flower sums sent to
// the neighbours, the binary stream, the region decisions and the L1 trigger;
// it checks the rate counters against the edges it sees, and each event's
// header and frames against v. It counts how often every mechanism happened
// (L1 from local flowers, L1 that needs a neighbour's flowers, flower bits,
// rate gates, events, dropped trigger, stalls, overrun, re-synchronisation)
// and counts a failure for each that never did.
module advcam_feb_tb;
  import advcam_pkg::*;

  localparam int NB_LAT   = 2;        // default of the board
  localparam int L_FSUM   = 2;        // sample select -> flower sums
  localparam int L_BITS   = 3;        // sample select -> flower bits
  localparam int L_L1     = 4 + NB_LAT;
  localparam int CTPB_LAT = 300;      // central trigger latency, in clocks
  localparam int PRE      = 16;       // samples kept before the trigger sample
  localparam int WIN      = 48;
  localparam int T_END    = 20000;

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
  // mechanism counters
  int m_l1_local = 0, m_l1_neigh = 0, m_fbits = 0, m_gates = 0, m_events = 0;
  int m_dropped = 0, m_stall = 0, m_overrun = 0, m_resync = 0;

  task automatic report();
    $display("l1_local=%0d l1_neigh=%0d flower_bits=%0d gates=%0d events=%0d dropped=%0d stall=%0d overrun=%0d resync=%0d",
             m_l1_local, m_l1_neigh, m_fbits, m_gates, m_events, m_dropped, m_stall, m_overrun, m_resync);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
  endtask

  initial begin : watchdog
    repeat (T_END + 20000) @(posedge clk);
    failures++;
    report();
    $finish;
  end

  // ---- stimulus model ----
  // pulses: local flower 3 at 1000, neighbour-only at 3000, local at 6000
  // (stalled readout), local at 16000 (random back-pressure)
  function automatic int pulse_local(int p, int t);
    int f = p / PIX_PER_FLOWER;
    if (f == 3 && ((t >= 1000 && t < 1004) || (t >= 6000 && t < 6004) || (t >= 16000 && t < 16004)))
      return 400;
    return 0;
  endfunction

  function automatic int v(int p, int t);
    if (t < 0) return 0;
    return 50 + int'((32'(p) * 32'h9e3779b1 ^ 32'(t) * 32'h85ebca6b) >> 29) + pulse_local(p, t);
  endfunction

  function automatic int fs(int f, int t);
    int s = 0;
    for (int i = 0; i < PIX_PER_FLOWER; i++) s += v(PIX_PER_FLOWER * f + i, t);
    return s;
  endfunction

  function automatic int nbs(int n, int f, int t);
    if (t < 0) return 0;
    if (n == 0 && f < 5 && t >= 3000 && t < 3004) return 3200;
    return 380 + (n + f) % 5;
  endfunction

  function automatic int rsum(int r, int t);
    int s = 0;
    for (int src = 0; src < N_FSRC; src++)
      if (cfg.region_mask[r][src])
        s += (src < N_FLOWER) ? fs(src, t) : nbs(src / N_FLOWER - 1, src % N_FLOWER, t);
    return (s > (1 << RSUM_W) - 1) ? (1 << RSUM_W) - 1 : s;
  endfunction

  // ---- clock count, converter and neighbour models ----
  int cyc;          // clocks since reset = ts_now
  int mphase;
  always @(posedge clk) begin
    if (rst) begin cyc <= 0; mphase <= 0; end
    else begin
      cyc <= cyc + 1;
      mphase <= fadc_sync ? 0 : (mphase + 1) % N_SAR;
    end
  end

  always @(negedge clk) begin
    if (!rst) begin
      for (int p = 0; p < N_PIX; p++) sar_data[p][mphase] <= ADC_W'(v(p, cyc));
      for (int n = 0; n < N_NEIGH; n++)
        for (int f = 0; f < N_FLOWER; f++)
          nb_fsum[n][f] <= FSUM_W'(nbs(n, f, cyc - L_FSUM - NB_LAT));
      fadc_sync <= (cyc == 3333);
      if (cyc == 3333) m_resync++;
    end
  end

  // ---- per-clock reference of the trigger outputs ----
  int rise_cnt [N_FLOWER + 1];
  logic [N_FLOWER:0] prev_tr;
  initial begin
    foreach (rise_cnt[i]) rise_cnt[i] = 0;
    prev_tr = '0;
  end

  logic l1_seen = 1'b0;
  always @(negedge clk) begin
    if (!rst && cyc > 12) begin
      logic [N_FLOWER-1:0] eb;
      logic [N_REGION-1:0] eh;
      logic el1;
      // flower sums to the neighbours
      for (int f = 0; f < N_FLOWER; f++) begin
        checks++;
        if (int'(fsum_out[f]) != fs(f, cyc - L_FSUM)) begin
          failures++;
          if (failures < 10) $display("c=%0d fsum_out[%0d] %0d expected %0d", cyc, f, fsum_out[f], fs(f, cyc - L_FSUM));
        end
      end
      for (int f = 0; f < N_FLOWER; f++) eb[f] = fs(f, cyc - L_BITS) > int'(cfg.flower_thr);
      checks++;
      if (flower_bits !== eb) begin
        failures++;
        if (failures < 10) $display("c=%0d flower_bits %b expected %b", cyc, flower_bits, eb);
      end
      if (|eb) m_fbits++;
      for (int r = 0; r < N_REGION; r++) eh[r] = rsum(r, cyc - L_L1) > int'(cfg.l1_thr);
      el1 = |eh;
      checks++;
      if (region_hit !== eh || l1_trig !== el1) begin
        failures++;
        if (failures < 10) $display("c=%0d hits %b expected %b", cyc, region_hit, eh);
      end
      if (l1_trig && !l1_seen) begin
        if (region_hit[0]) m_l1_local++;
        else if (region_hit[1]) m_l1_neigh++;
      end
      l1_seen = l1_trig;
    end
  end

  // ---- rate counters ----
  always @(negedge clk) begin
    if (!rst) begin
      logic [N_FLOWER:0] tr;
      if (rate_valid) begin
        m_gates++;
        for (int c = 0; c <= N_FLOWER; c++) begin
          checks++;
          if (int'(rates[c]) != rise_cnt[c]) begin
            failures++;
            $display("gate %0d rate[%0d] %0d expected %0d", m_gates, c, rates[c], rise_cnt[c]);
          end
          rise_cnt[c] = 0;
        end
      end
      tr = {flower_bits, l1_trig};
      for (int c = 0; c <= N_FLOWER; c++) if (tr[c] && !prev_tr[c]) rise_cnt[c]++;
      prev_tr = tr;
    end
  end

  // ---- central trigger processor model ----
  typedef struct { int id; int first; } ev_t;
  ev_t exp_q[$];
  int ctpb_pending[$];
  int n_sent = 0;
  logic l1_prev = 1'b0;
  always @(negedge clk) begin
    if (!rst) begin
      if (l1_trig && !l1_prev) ctpb_pending.push_back(cyc + CTPB_LAT);
      l1_prev <= l1_trig;
      ctpb_trig <= 1'b0;
      if (ctpb_pending.size() != 0 && ctpb_pending[0] == cyc) begin
        void'(ctpb_pending.pop_front());
        ctpb_trig <= 1'b1;
        if (!busy) begin
          ev_t e;
          e.id = n_sent; e.first = cyc - int'(cfg.lookback);
          exp_q.push_back(e);
          n_sent++;
          // the second event gets an extra trigger while busy
          if (n_sent == 2) ctpb_pending.push_front(cyc + 6);
        end else m_dropped++;
      end
    end else ctpb_trig <= 1'b0;
  end

  // ---- network core model and event checker ----
  int rmode;   // 0 free, 1 random, 2 blocked
  always_comb begin
    rmode = 0;
    if (cyc >= 6300 && cyc < 13400) rmode = 2;
    else if (cyc >= 16000) rmode = 1;
  end

  initial begin
    int beat_i = -1;
    ev_t cur;
    logic bad;
    ev_ready = 1'b1;
    forever begin
      @(negedge clk);
      #1;
      ev_ready = (rmode == 0) || (rmode == 1 && ($urandom % 3) != 0);
      #1;
      if (!rst && ev_valid && !ev_ready) m_stall++;
      if (!rst && ev_valid && ev_ready) begin
        if (beat_i < 0) begin
          ev_header_t h;
          h = ev_beat.data[HDR_W-1:0];
          checks++;
          if (exp_q.size() == 0) begin
            failures++; $display("c=%0d unexpected event", cyc);
          end else begin
            cur = exp_q.pop_front();
            if (!ev_beat.sof || int'(h.event_id) != cur.id || int'(h.first_ts) != cur.first ||
                int'(h.win_len) != WIN) begin
              failures++;
              $display("header id %0d first %0d len %0d expected %0d %0d", h.event_id, h.first_ts, h.win_len, cur.id, cur.first);
            end
            beat_i = 0;
            bad = 1'b0;
          end
        end else begin
          logic ok;
          ok = 1'b1;
          // the frame stamped ts holds the samples selected one clock earlier
          for (int p = 0; p < N_PIX; p++)
            if (int'(ev_beat.data[ADC_W*p +: ADC_W]) != v(p, cur.first + beat_i - 1)) ok = 1'b0;
          if (!ok) bad = 1'b1;
          if (!ok && cur.id != 2) begin
            failures++;
            if (failures < 10) $display("event %0d frame %0d differs", cur.id, beat_i);
          end
          if (beat_i == WIN - 1) begin
            checks++;
            if (!ev_beat.eof || ev_beat.err != bad) begin
              failures++;
              $display("event %0d eof %b err %b expected err %b", cur.id, ev_beat.eof, ev_beat.err, bad);
            end
            if (ev_beat.err) m_overrun++;
            m_events++;
            beat_i = -1;
          end else beat_i++;
        end
      end
    end
  end

  // ---- run ----
  initial begin
    rst = 1'b1;
    fadc_sync = 1'b0;
    sar_data = '0;
    nb_fsum = '0;
    cfg = '0;
    cfg.l1_thr      = RSUM_W'(4500);
    cfg.flower_thr  = FSUM_W'(1500);
    cfg.rate_window = RATE_W'(2000);
    cfg.lookback    = CTPB_LAT + L_L1 + PRE;
    cfg.win_len     = WIN_W'(WIN);
    // region 0: the module's own seven flowers
    for (int f = 0; f < N_FLOWER; f++) cfg.region_mask[0][f] = 1'b1;
    // region 1: local flowers 0 and 1 with flowers 0..4 of the first neighbour
    cfg.region_mask[1][0] = 1'b1;
    cfg.region_mask[1][1] = 1'b1;
    for (int f = 0; f < 5; f++) cfg.region_mask[1][N_FLOWER + f] = 1'b1;
    // regions 2..6: single local flowers (never above the L1 threshold)
    for (int r = 2; r < N_REGION; r++) cfg.region_mask[r][r] = 1'b1;
    repeat (4) @(negedge clk);
    rst = 1'b0;
    wait (cyc == T_END);
    checks++;
    if (int'(ts_now) != cyc) begin failures++; $display("ts_now %0d cycle %0d", ts_now, cyc); end
    checks++;
    if (int'(n_accepted) != n_sent || int'(n_dropped) != m_dropped || int'(n_overrun) != m_overrun ||
        exp_q.size() != 0) begin
      failures++;
      $display("accepted %0d sent %0d dropped %0d/%0d overrun %0d/%0d pending %0d", n_accepted, n_sent,
               n_dropped, m_dropped, n_overrun, m_overrun, exp_q.size());
    end
    if (m_l1_local == 0) failures++;
    if (m_l1_neigh == 0) failures++;
    if (m_fbits == 0)    failures++;
    if (m_gates == 0)    failures++;
    if (m_events < 4)    failures++;
    if (m_dropped == 0)  failures++;
    if (m_stall == 0)    failures++;
    if (m_overrun == 0)  failures++;
    if (m_resync == 0)   failures++;
    checks += 9;
    report();
    $finish;
  end
endmodule
