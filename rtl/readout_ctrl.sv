// readout_ctrl: event readout of the sample buffer on a central trigger.
//
// When the central trigger processor validates an event it sends a trigger to
// every front-end board, which then sends its data to the acquisition servers
// over the network (RDMA) core. This block turns such a trigger into one event
// on a valid/ready stream: a header beat (event number, timestamp of the first
// sample, window length) followed by win_len frames read from the circular
// buffer, starting lookback samples before the sample being written when the
// trigger arrived. Triggers that come while an event is still being read are
// not accepted and are counted in n_dropped.
//
// The sink may stall the stream (out_ready low). The buffer keeps being
// written meanwhile, so the block tracks the age of the next frame to read;
// a frame older than DEPTH clocks has been overwritten and is sent with the
// event's error flag raised on its last beat, and n_overrun counts such events.
// Reads go through a two-entry output queue, so with out_ready high one frame
// leaves per clock.
//
// Timing: the trigger is seen in cycle t0; the header is offered from t0+2 and
// the first frame, read from the buffer in t0+2, from t0+4; with no stall the
// last beat leaves in t0+3+win_len, one frame per clock. Event format, look-back and window as
// run-time settings, dropping of triggers while busy and the overrun flag are
// this design's choices; the paper gives only the trigger-prompted transfer.
module readout_ctrl
  import advcam_pkg::*;
#(
  parameter int unsigned DEPTH = BUF_DEPTH,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic               clk,
  input  logic               rst,
  // trigger from the central trigger processor
  input  logic               trig,
  // run-time settings
  input  logic [AW-1:0]      lookback,   // clamped to DEPTH-1
  input  logic [WIN_W-1:0]   win_len,
  // buffer
  input  logic [AW-1:0]      wr_addr,    // address written in this clock
  output logic               rd_en,
  output logic [AW-1:0]      rd_addr,
  input  frame_t             rd_data,
  // event stream
  output logic               out_valid,
  input  logic               out_ready,
  output ev_beat_t           out_beat,
  // status
  output logic [TS_W-1:0]    ts_now,     // timestamp of the frame being written
  output logic               busy,
  output logic [EVID_W-1:0]  n_accepted,
  output logic [31:0]        n_dropped,
  output logic [31:0]        n_overrun
);

  typedef enum logic [1:0] {S_IDLE, S_HDR, S_DATA} state_t;

  localparam int unsigned GW = $clog2(DEPTH + 2);   // age up to DEPTH+1

  state_t            state;
  logic [AW-1:0]     rd_ptr;
  logic [WIN_W-1:0]  remaining, win_q;
  logic [TS_W-1:0]   first_ts;
  logic [GW-1:0]     age;
  logic              evt_err;

  // pending buffer read
  logic              infl;
  logic              infl_eof, infl_err;

  // two-entry output queue
  ev_beat_t          q [2];
  logic              q_head;
  logic [1:0]        q_cnt;

  logic              pop, can_issue, push_hdr, issue, stale;
  logic [AW-1:0]     lb, start_addr;
  ev_header_t        hdr;
  ev_beat_t          hdr_beat;

  assign pop       = out_valid && out_ready;
  assign can_issue = ({1'b0, q_cnt} + {2'b0, infl}) < (3'd2 + {2'b0, pop});
  assign push_hdr  = (state == S_HDR) && can_issue;
  assign issue     = (state == S_DATA) && can_issue;
  assign stale     = age > GW'(DEPTH);

  assign lb         = (lookback > AW'(DEPTH - 1)) ? AW'(DEPTH - 1) : lookback;
  assign start_addr = (wr_addr >= lb) ? wr_addr - lb : AW'(wr_addr + AW'(DEPTH) - lb);

  assign rd_en   = issue;
  assign rd_addr = rd_ptr;

  always_comb begin
    hdr.event_id   = n_accepted - 1'b1;   // number of the event being sent
    hdr.first_ts   = first_ts;
    hdr.win_len    = win_q;
    hdr_beat       = '0;
    hdr_beat.sof   = 1'b1;
    hdr_beat.eof   = (win_q == '0);
    hdr_beat.data[HDR_W-1:0] = hdr;
  end

  assign out_valid = (q_cnt != 2'd0);
  assign out_beat  = q[q_head];
  assign busy      = (state != S_IDLE);

  always_ff @(posedge clk) begin
    if (rst) begin
      ts_now <= '0;
    end else begin
      ts_now <= ts_now + 1'b1;
    end
  end

  // control
  always_ff @(posedge clk) begin
    if (rst) begin
      state      <= S_IDLE;
      rd_ptr     <= '0;
      remaining  <= '0;
      win_q      <= '0;
      first_ts   <= '0;
      age        <= '0;
      evt_err    <= 1'b0;
      infl       <= 1'b0;
      infl_eof   <= 1'b0;
      infl_err   <= 1'b0;
      n_accepted <= '0;
      n_dropped  <= '0;
      n_overrun  <= '0;
    end else begin
      infl <= issue;
      // age of the frame at rd_ptr grows with every write, and is kept when
      // the read pointer moves on with it
      if (!issue && age <= GW'(DEPTH)) age <= age + 1'b1;

      if (trig && state != S_IDLE) n_dropped <= n_dropped + 1'b1;

      unique case (state)
        S_IDLE: if (trig) begin
          state      <= S_HDR;
          rd_ptr     <= start_addr;
          remaining  <= win_len;
          win_q      <= win_len;
          first_ts   <= ts_now - TS_W'(lb);
          age        <= GW'(lb) + 1'b1;
          evt_err    <= 1'b0;
          n_accepted <= n_accepted + 1'b1;
        end
        S_HDR: if (push_hdr) begin
          state <= (win_q == '0) ? S_IDLE : S_DATA;
        end
        S_DATA: if (issue) begin
          infl_eof  <= (remaining == WIN_W'(1));
          infl_err  <= evt_err || stale;
          evt_err   <= evt_err || stale;
          rd_ptr    <= (rd_ptr == AW'(DEPTH - 1)) ? '0 : rd_ptr + 1'b1;
          remaining <= remaining - 1'b1;
          if (remaining == WIN_W'(1)) begin
            state <= S_IDLE;
            if (evt_err || stale) n_overrun <= n_overrun + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // output queue
  logic     push;
  ev_beat_t push_beat;
  always_comb begin
    push      = push_hdr || infl;
    push_beat = hdr_beat;
    if (infl) begin
      push_beat      = '0;
      push_beat.eof  = infl_eof;
      push_beat.err  = infl_err;
      push_beat.data = rd_data;
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      q_head <= 1'b0;
      q_cnt  <= '0;
      q[0]   <= '0;
      q[1]   <= '0;
    end else begin
      // tail slot; with two entries, a push only comes with a pop of the head
      if (push) q[q_head ^ q_cnt[0]] <= push_beat;
      if (pop) q_head <= ~q_head;
      q_cnt <= q_cnt + {1'b0, push} - {1'b0, pop};
    end
  end

  // stream rules
  a_stable: assert property (@(posedge clk) disable iff (rst)
    out_valid && !out_ready |=> out_valid && $stable(out_beat));
  a_qcnt: assert property (@(posedge clk) disable iff (rst) q_cnt <= 2'd2);
  a_onepush: assert property (@(posedge clk) disable iff (rst) !(push_hdr && infl));

endmodule
