// flower_sum_tb: checks the seven flower sums against a sum computed in the
// testbench, for random samples and for all-maximum samples (no overflow),
// with the one-clock latency.
module flower_sum_tb;
  import advcam_pkg::*;

  logic clk = 1'b0;
  logic rst;
  logic [N_PIX-1:0][ADC_W-1:0] pix;
  logic [N_FLOWER-1:0][FSUM_W-1:0] fsum;
  int checks = 0, failures = 0;

  flower_sum dut (.clk, .rst, .pix, .fsum);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ref_sum [N_FLOWER];
    rst = 1'b1; pix = '0;
    repeat (3) @(negedge clk);
    rst = 1'b0;
    for (int t = 0; t < 300; t++) begin
      for (int p = 0; p < N_PIX; p++)
        pix[p] = (t == 5) ? '1 : ADC_W'($urandom);
      for (int f = 0; f < N_FLOWER; f++) begin
        ref_sum[f] = 0;
        for (int i = 0; i < PIX_PER_FLOWER; i++) ref_sum[f] += int'(pix[PIX_PER_FLOWER*f + i]);
      end
      @(negedge clk);
      for (int f = 0; f < N_FLOWER; f++) begin
        checks++;
        if (int'(fsum[f]) != ref_sum[f]) begin
          failures++;
          $display("t=%0d flower %0d sum %0d expected %0d", t, f, fsum[f], ref_sum[f]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
