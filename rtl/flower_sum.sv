// flower_sum: digital sum of the seven pixels of each flower of a module.
//
// Pixels are numbered so that pixels 7f .. 7f+6 form flower f (this
// numbering is this design's choice; the hexagonal layout is fixed by the
// wiring of the pixels to the channels). Each clock, the seven 12-bit samples
// of every flower are added into a 15-bit sum, which cannot overflow.
//
// Interface: pix[p] is the current sample of pixel p, fsum[f] the sum of
// flower f. Latency: one clock (registered output).
module flower_sum
  import advcam_pkg::*;
#(
  parameter int unsigned NF  = N_FLOWER,
  parameter int unsigned PPF = PIX_PER_FLOWER,
  parameter int unsigned W   = ADC_W,
  parameter int unsigned SW  = W + $clog2(PPF + 1)
) (
  input  logic                      clk,
  input  logic                      rst,
  input  logic [NF*PPF-1:0][W-1:0]  pix,
  output logic [NF-1:0][SW-1:0]     fsum
);

  logic [NF-1:0][SW-1:0] sum_c;

  always_comb begin
    for (int f = 0; f < NF; f++) begin
      sum_c[f] = '0;
      for (int p = 0; p < PPF; p++) begin
        sum_c[f] = sum_c[f] + SW'(pix[f*PPF + p]);
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst) fsum <= '0;
    else     fsum <= sum_c;
  end

endmodule
