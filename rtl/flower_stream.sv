// flower_stream: binary stream of one module's flowers for the second-level
// trigger.
//
// For every sample and every flower one bit is produced: 1 when the sum of the
// flower's seven pixels is above the flower threshold, which is set apart from
// the L1 threshold. The seven bits per sample are what the board sends to the
// central trigger processor, where the L2 trigger clusters them in space and
// time. The per-sample, per-flower bit and the separate threshold follow the
// described camera; the ">" comparison, one common threshold for all flowers
// and the registered output are this design's choice.
//
// Interface: fsum[f] from flower_sum, thr the flower threshold, bits[f] the
// stream bit of flower f. Latency: one clock.
module flower_stream
  import advcam_pkg::*;
#(
  parameter int unsigned NF = N_FLOWER,
  parameter int unsigned SW = FSUM_W
) (
  input  logic                  clk,
  input  logic                  rst,
  input  logic [NF-1:0][SW-1:0] fsum,
  input  logic [SW-1:0]         thr,
  output logic [NF-1:0]         bits
);

  always_ff @(posedge clk) begin
    if (rst) bits <= '0;
    else
      for (int f = 0; f < NF; f++) bits[f] <= (fsum[f] > thr);
  end

endmodule
