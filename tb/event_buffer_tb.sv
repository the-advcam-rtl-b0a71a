// event_buffer_tb: writes a known frame (a function of the write count) every
// clock for more than two laps of a reduced-depth buffer and reads back
// random ages from 1 to DEPTH-1, plus the same-clock address (which must
// return the frame of DEPTH clocks ago). The write address sequence and its
// wrap are checked every clock.
module event_buffer_tb;
  import advcam_pkg::*;

  localparam int DEPTH = 100;
  localparam int AW = $clog2(DEPTH);
  localparam int W = 64;
  logic clk = 1'b0;
  logic rst;
  logic [W-1:0] wr_data, rd_data;
  logic [AW-1:0] wr_addr, rd_addr;
  logic rd_en;
  int checks = 0, failures = 0;

  event_buffer #(.DEPTH(DEPTH), .W(W)) dut (.clk, .rst, .wr_data, .wr_addr, .rd_en, .rd_addr, .rd_data);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [W-1:0] frame_of(int n);
    return {32'(n * 2654435761), 32'(n)};
  endfunction

  initial begin
    int age;
    logic [W-1:0] expect_d;
    logic do_read;
    int n_wrap = 0;
    rst = 1'b1; wr_data = '0; rd_en = 1'b0; rd_addr = '0;
    repeat (3) @(negedge clk);
    rst = 1'b0;
    for (int t = 0; t < 1000; t++) begin
      checks++;
      if (int'(wr_addr) != t % DEPTH) begin
        failures++;
        $display("t=%0d wr_addr %0d", t, wr_addr);
      end
      if (wr_addr == 0 && t > 0) n_wrap++;
      wr_data = frame_of(t);
      do_read = 1'b0;
      if (t >= DEPTH) begin
        age = (t % 10 == 0) ? DEPTH : 1 + int'($urandom % (DEPTH - 1));
        rd_addr = AW'((t - age) % DEPTH);
        expect_d = frame_of(t - age);
        do_read = 1'b1;
      end
      rd_en = do_read;
      @(negedge clk);
      if (do_read) begin
        checks++;
        if (rd_data !== expect_d) begin
          failures++;
          $display("t=%0d age %0d read %h expected %h", t, age, rd_data, expect_d);
        end
      end
    end
    checks++;
    if (n_wrap < 9) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
