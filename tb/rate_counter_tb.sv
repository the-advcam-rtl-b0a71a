// rate_counter_tb: drives eight random binary signals with different densities
// and counts their rising edges per gate in the testbench; every rate_valid
// pulse must come exactly window_len clocks after the previous one and carry
// the counted numbers. The gate length is changed once during the run.
module rate_counter_tb;
  import advcam_pkg::*;

  localparam int NCH = N_FLOWER + 1;
  logic clk = 1'b0;
  logic rst;
  logic [NCH-1:0] trig;
  logic [RATE_W-1:0] window_len;
  logic [NCH-1:0][RATE_W-1:0] rate;
  logic rate_valid;
  int checks = 0, failures = 0;

  rate_counter dut (.clk, .rst, .trig, .window_len, .rate, .rate_valid);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cnt [NCH];
    logic [NCH-1:0] prev;
    int gate_pos, n_gates, win;
    rst = 1'b1; trig = '0; window_len = 100;
    repeat (3) @(negedge clk);
    rst = 1'b0;
    prev = '0; gate_pos = 0; n_gates = 0; win = 100;
    foreach (cnt[c]) cnt[c] = 0;
    for (int t = 0; t < 3000; t++) begin
      // channel c is high with probability (c+1)/16
      for (int c = 0; c < NCH; c++) trig[c] = ($urandom % 16) <= c;
      if (t == 1500) window_len = 37;     // applies from the next gate
      for (int c = 0; c < NCH; c++) if (trig[c] && !prev[c]) cnt[c]++;
      prev = trig;
      @(negedge clk);
      gate_pos++;
      checks++;
      if (rate_valid !== (gate_pos == win)) begin
        failures++;
        $display("t=%0d rate_valid %b at gate position %0d", t, rate_valid, gate_pos);
      end
      if (gate_pos == win) begin
        n_gates++;
        for (int c = 0; c < NCH; c++) begin
          checks++;
          if (int'(rate[c]) != cnt[c]) begin
            failures++;
            $display("gate %0d ch %0d rate %0d expected %0d", n_gates, c, rate[c], cnt[c]);
          end
          cnt[c] = 0;
        end
        gate_pos = 0;
        win = int'(window_len);
      end
    end
    checks++;
    if (n_gates < 40) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
