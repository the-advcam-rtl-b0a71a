// fadc_ti_mux_tb: checks the SAR output interleaving of one converter channel.
//
// Random words are put on all eight SAR inputs every clock. A model phase,
// counted in the testbench from reset and from each sync pulse, predicts
// which SAR word must appear on dout one clock later; the phase output is
// checked too. A sync pulse in the middle of the run re-aligns the sequence.
module fadc_ti_mux_tb;
  import advcam_pkg::*;

  logic clk = 1'b0;
  logic rst, sync;
  logic [N_SAR-1:0][ADC_W-1:0] sar_data;
  logic [ADC_W-1:0] dout;
  logic [2:0] phase;
  int checks = 0, failures = 0;

  fadc_ti_mux dut (.clk, .rst, .sync, .sar_data, .dout, .phase);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int mphase;
    logic [ADC_W-1:0] expect_q;
    int n_wrap = 0;
    rst = 1'b1; sync = 1'b0; sar_data = '0;
    repeat (3) @(negedge clk);
    rst = 1'b0;
    mphase = 0;
    for (int t = 0; t < 400; t++) begin
      for (int k = 0; k < N_SAR; k++) sar_data[k] = ADC_W'($urandom);
      sync = (t == 203);
      // phase in use during this clock
      checks++;
      if (phase !== 3'(mphase)) begin
        failures++;
        $display("t=%0d phase %0d expected %0d", t, phase, mphase);
      end
      expect_q = sar_data[mphase];
      @(negedge clk);
      checks++;
      if (dout !== expect_q) begin
        failures++;
        $display("t=%0d dout %h expected %h", t, dout, expect_q);
      end
      if (mphase == 7) n_wrap++;
      mphase = (t == 203) ? 0 : (mphase + 1) % 8;
    end
    checks++;
    if (n_wrap < 40) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
