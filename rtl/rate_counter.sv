// rate_counter: trigger rate counters.
//
// Counts, for each of NCH binary signals, how many times it rose from 0 to 1
// during a gate of window_len clocks. At the end of each gate the counts are
// copied to rate[], rate_valid pulses for one clock and counting restarts from
// zero, so rate[] always holds the rate of the last complete gate (in events
// per gate). Counts saturate at the counter width. That the board has rate
// counters for its trigger signals is from the described design; gate-based
// counting of rising edges and the run-time gate length are this design's
// choice.
//
// Interface: trig[c] is sampled every clock; window_len must be at least 1
// (0 is treated as 1). A change of window_len takes effect at the next gate.
module rate_counter
  import advcam_pkg::*;
#(
  parameter int unsigned NCH = N_FLOWER + 1,
  parameter int unsigned CW  = RATE_W
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic [NCH-1:0]          trig,
  input  logic [CW-1:0]           window_len,
  output logic [NCH-1:0][CW-1:0]  rate,
  output logic                    rate_valid
);

  logic [NCH-1:0]          trig_q;
  logic [NCH-1:0][CW-1:0]  cnt;
  logic [CW-1:0]           gate;
  logic [CW-1:0]           win_q;     // gate length of the running gate
  logic                    gate_end;
  logic [NCH-1:0]          rise;

  assign rise     = trig & ~trig_q;
  assign gate_end = (gate + 1'b1 >= win_q);

  always_ff @(posedge clk) begin
    if (rst) begin
      trig_q     <= '0;
      cnt        <= '0;
      gate       <= '0;
      win_q      <= window_len;
      rate       <= '0;
      rate_valid <= 1'b0;
    end else begin
      trig_q     <= trig;
      rate_valid <= 1'b0;
      if (gate_end) begin
        gate       <= '0;
        win_q      <= window_len;
        rate_valid <= 1'b1;
        for (int c = 0; c < NCH; c++) begin
          rate[c] <= (rise[c] && cnt[c] != '1) ? cnt[c] + 1'b1 : cnt[c];
          cnt[c]  <= '0;
        end
      end else begin
        gate <= gate + 1'b1;
        for (int c = 0; c < NCH; c++)
          if (rise[c] && cnt[c] != '1) cnt[c] <= cnt[c] + 1'b1;
      end
    end
  end

endmodule
