// flower_stream_tb: checks the per-flower threshold bits (sum > threshold)
// with random sums around the threshold, including sums equal to it, and the
// one-clock latency.
module flower_stream_tb;
  import advcam_pkg::*;

  logic clk = 1'b0;
  logic rst;
  logic [N_FLOWER-1:0][FSUM_W-1:0] fsum;
  logic [FSUM_W-1:0] thr;
  logic [N_FLOWER-1:0] bits;
  int checks = 0, failures = 0;

  flower_stream dut (.clk, .rst, .fsum, .thr, .bits);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [N_FLOWER-1:0] expect_b;
    int n_one = 0, n_zero = 0;
    rst = 1'b1; fsum = '0; thr = '0;
    repeat (3) @(negedge clk);
    rst = 1'b0;
    for (int t = 0; t < 400; t++) begin
      thr = FSUM_W'(2000 + (t % 7) * 1000);
      for (int f = 0; f < N_FLOWER; f++)
        fsum[f] = ($urandom % 4 == 0) ? thr : FSUM_W'(int'(thr) - 200 + int'($urandom % 400));
      for (int f = 0; f < N_FLOWER; f++) expect_b[f] = (int'(fsum[f]) > int'(thr));
      @(negedge clk);
      checks++;
      if (bits !== expect_b) begin
        failures++;
        $display("t=%0d bits %b expected %b", t, bits, expect_b);
      end
      n_one  += $countones(expect_b);
      n_zero += N_FLOWER - $countones(expect_b);
    end
    checks++;
    if (n_one == 0 || n_zero == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
