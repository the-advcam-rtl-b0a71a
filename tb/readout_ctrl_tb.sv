// readout_ctrl_tb: event readout from a reduced-depth sample buffer.
//
// The buffer (event_buffer, DEPTH = 64) is written every clock with a frame
// that encodes the clock number, so every frame read out tells which sample it
// is. The testbench sends central triggers and checks, beat by beat, the
// header (event number, first timestamp, window length), that the frames are
// the consecutive samples starting lookback clocks before the trigger, the
// end-of-event flag, and the error flag, which must be set exactly when some
// frame of the event had been overwritten before being read. It covers:
// a free-flowing event with its cycle timing, a trigger arriving while busy
// (dropped and counted), random back-pressure, a stall long enough to
// overrun the buffer, a zero-length window and a look-back above the depth.
module readout_ctrl_tb;
  import advcam_pkg::*;

  localparam int DEPTH = 64;
  localparam int AW = $clog2(DEPTH);
  logic clk = 1'b0;
  logic rst;
  logic trig;
  logic [AW-1:0] lookback;
  logic [WIN_W-1:0] win_len;
  logic [AW-1:0] wr_addr, rd_addr;
  logic rd_en;
  frame_t wr_data, rd_data;
  logic out_valid, out_ready;
  ev_beat_t out_beat;
  logic [TS_W-1:0] ts_now;
  logic busy;
  logic [EVID_W-1:0] n_accepted;
  logic [31:0] n_dropped, n_overrun;
  int checks = 0, failures = 0;

  event_buffer #(.DEPTH(DEPTH)) u_buf (.clk, .rst, .wr_data, .wr_addr, .rd_en, .rd_addr, .rd_data);
  readout_ctrl #(.DEPTH(DEPTH)) dut (
    .clk, .rst, .trig, .lookback, .win_len, .wr_addr, .rd_en, .rd_addr, .rd_data,
    .out_valid, .out_ready, .out_beat, .ts_now, .busy, .n_accepted, .n_dropped, .n_overrun
  );

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic frame_t frame_of(int n);
    frame_t f;
    for (int i = 0; i < $bits(frame_t) / 32; i++) f[32*i +: 32] = 32'(n) ^ 32'(i * 32'h9e3779b9);
    f[$bits(frame_t)-1 -: $bits(frame_t) % 32] = '1;
    return f;
  endfunction

  typedef struct { int id; int first; int len; int t0; } ev_t;
  ev_t exp_q[$];
  int n_sent = 0;

  int cyc;           // clock number since reset, = sample number written
  int mode_ready;    // 0: always ready, 1: random, 2: stalled
  int n_err_events = 0, n_events = 0, n_stall_cycles = 0;
  int last_beat_cycle, hdr_cycle, last_t0;

  // write side and ready generation
  always @(posedge clk) begin
    if (rst) cyc <= 0;
    else     cyc <= cyc + 1;
  end
  always_comb wr_data = frame_of(cyc);

  // monitor: samples each transfer just before the clock edge that takes it
  initial begin
    int beat_i;
    ev_t cur;
    logic bad;
    beat_i = -1;
    bad = 1'b0;
    forever begin
      @(negedge clk);
      #1;
      if (!rst) begin
        case (mode_ready)
          0: out_ready = 1'b1;
          1: out_ready = ($urandom % 2) == 0;
          default: out_ready = 1'b0;
        endcase
        if (out_valid && !out_ready) n_stall_cycles++;
        #1;
        if (out_valid && out_ready) begin
          if (beat_i < 0) begin
            ev_header_t h;
            h = out_beat.data[HDR_W-1:0];
            checks++;
            if (exp_q.size() == 0) begin
              failures++; $display("unexpected event at %0d", cyc);
            end else begin
              cur = exp_q.pop_front();
              if (!out_beat.sof || int'(h.event_id) != cur.id || int'(h.first_ts) != cur.first ||
                  int'(h.win_len) != cur.len || out_beat.eof != (cur.len == 0)) begin
                failures++;
                $display("header id %0d first %0d len %0d, expected %0d %0d %0d",
                         h.event_id, h.first_ts, h.win_len, cur.id, cur.first, cur.len);
              end
              hdr_cycle = cyc;
              bad = 1'b0;
              beat_i = (cur.len == 0) ? -1 : 0;
              if (cur.len == 0) n_events++;
            end
          end else begin
            logic ok, overwritten;
            int s;
            s = cur.first + beat_i;
            ok = (out_beat.data == frame_of(s));
            overwritten = 1'b0;
            for (int k = 1; k < 8; k++) if (out_beat.data == frame_of(s + k * DEPTH)) overwritten = 1'b1;
            checks++;
            if (out_beat.sof || !(ok || overwritten) || out_beat.eof != (beat_i == cur.len - 1)) begin
              failures++;
              $display("event %0d beat %0d: sample ok=%b overwritten=%b eof=%b", cur.id, beat_i, ok, overwritten, out_beat.eof);
            end
            if (!ok) bad = 1'b1;
            if (beat_i == cur.len - 1) begin
              checks++;
              if (out_beat.err != bad) begin
                failures++;
                $display("event %0d err flag %b expected %b", cur.id, out_beat.err, bad);
              end
              if (bad) n_err_events++;
              n_events++;
              last_beat_cycle = cyc;
              beat_i = -1;
            end else beat_i++;
          end
        end
      end
    end
  end

  task automatic send_trig(int lb, int len, bit expect_accept);
    @(negedge clk);
    lookback = AW'(lb);
    win_len  = WIN_W'(len);
    trig = 1'b1;
    if (expect_accept) begin
      ev_t e;
      int lbc;
      lbc = (lb > DEPTH - 1) ? DEPTH - 1 : lb;
      e.id = n_sent; e.first = cyc - lbc; e.len = len; e.t0 = cyc;
      last_t0 = cyc;
      exp_q.push_back(e);
      n_sent++;
    end
    @(negedge clk);
    trig = 1'b0;
  endtask

  task automatic wait_idle();
    while (busy || out_valid || exp_q.size() != 0) @(negedge clk);
  endtask

  initial begin
    int t0;
    rst = 1'b1; trig = 1'b0; lookback = '0; win_len = '0; out_ready = 1'b1; mode_ready = 0;
    repeat (3) @(negedge clk);
    rst = 1'b0;
    repeat (80) @(negedge clk);            // fill the buffer

    // 1. free-flowing event: header at t0+2, last frame at t0+3+len
    send_trig(10, 8, 1);
    t0 = last_t0;
    wait_idle();
    checks++;
    if (hdr_cycle != t0 + 2 || last_beat_cycle != t0 + 3 + 8) begin
      failures++;
      $display("timing: header at +%0d, last at +%0d", hdr_cycle - t0, last_beat_cycle - t0);
    end
    checks++;
    if (int'(ts_now) != cyc) begin failures++; $display("ts_now %0d cycle %0d", ts_now, cyc); end

    // 2. trigger while busy is dropped
    send_trig(20, 30, 1);
    repeat (5) @(negedge clk);
    send_trig(5, 5, 0);
    wait_idle();
    checks++;
    if (n_dropped != 1) begin failures++; $display("n_dropped %0d", n_dropped); end

    // 3. random back-pressure
    mode_ready = 1;
    for (int i = 0; i < 20; i++) begin
      send_trig(int'($urandom % 40), 1 + int'($urandom % 20), 1);
      wait_idle();
    end
    checks++;
    if (n_err_events != 0) begin failures++; $display("unexpected overrun"); end

    // 4. overrun: long look-back and a long stall
    mode_ready = 2;
    send_trig(60, 30, 1);
    repeat (40) @(negedge clk);
    mode_ready = 0;
    wait_idle();
    checks++;
    if (n_err_events != 1 || n_overrun != 1) begin
      failures++; $display("overrun events %0d counter %0d", n_err_events, n_overrun);
    end

    // 5. zero-length window and look-back clamped to DEPTH-1
    send_trig(0, 0, 1);
    wait_idle();
    send_trig(63, 4, 1);
    wait_idle();
    // with the two-clock start latency a look-back of DEPTH-1 (or more, clamped)
    // always loses its first frame: both events above and this one overrun
    send_trig(63, 4, 1);
    wait_idle();

    checks++;
    if (n_overrun != 3) begin failures++; $display("n_overrun %0d", n_overrun); end
    checks++;
    if (n_events != n_sent || int'(n_accepted) != n_sent || n_stall_cycles == 0) begin
      failures++;
      $display("events %0d sent %0d accepted %0d stalls %0d", n_events, n_sent, n_accepted, n_stall_cycles);
    end
    $display("events=%0d dropped=%0d overruns=%0d stall_cycles=%0d", n_events, n_dropped, n_overrun, n_stall_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
