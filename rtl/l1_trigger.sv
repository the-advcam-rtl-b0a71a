// l1_trigger: first-level camera trigger of one front-end board.
//
// An L1 trigger region is a set of 49 pixels chosen with the granularity of a
// flower, so a region is a set of flower sums. A FEB sees 49 flower sums: its
// own seven (source index 0..6) and seven from each of its six neighbouring
// FEBs (source index 7n+f for neighbour n = 1..6, flower f), so that regions
// that straddle module borders leave no dead zone. For each region r a mask
// region_mask[r] selects any combination of these sources; the selected sums
// are added (saturating at the width of a seven-flower sum) and compared with
// the L1 threshold. l1_trig is the OR of all region decisions.
//
// Neighbour sums arrive later than the local ones because of the link
// between boards; the local sums are delayed by NB_LAT clocks so that all
// sums of a region belong to the same sample. NB_LAT, the masks as run-time
// configuration, the number of regions (one per local flower) and the ">"
// comparison are this design's choices.
//
// Timing: region sums are registered one clock after the aligned inputs and
// the decisions one clock after that, so a local sample reaches l1_trig after
// NB_LAT+2 clocks and a neighbour sample after 2 clocks.
module l1_trigger
  import advcam_pkg::*;
#(
  parameter int unsigned NF     = N_FLOWER,
  parameter int unsigned NN     = N_NEIGH,
  parameter int unsigned NR     = N_REGION,
  parameter int unsigned SW     = FSUM_W,
  parameter int unsigned RW     = RSUM_W,
  parameter int unsigned NB_LAT = 2
) (
  input  logic                        clk,
  input  logic                        rst,
  input  logic [NF-1:0][SW-1:0]       fsum,          // local flower sums
  input  logic [NN-1:0][NF-1:0][SW-1:0] nb_fsum,     // from the six neighbours
  input  logic [NR-1:0][NF*(NN+1)-1:0] region_mask,  // flower sources of each region
  input  logic [RW-1:0]               l1_thr,
  output logic [NR-1:0][RW-1:0]       region_sum,
  output logic [NR-1:0]               region_hit,
  output logic                        l1_trig
);

  localparam int unsigned NS = NF * (NN + 1);
  localparam int unsigned XW = SW + $clog2(NS + 1);   // wide enough for all sources

  // Align the local sums with the neighbour sums.
  logic [NF-1:0][SW-1:0] fsum_al;
  if (NB_LAT == 0) begin : g_nodly
    assign fsum_al = fsum;
  end else begin : g_dly
    logic [NB_LAT-1:0][NF-1:0][SW-1:0] dly;
    always_ff @(posedge clk) begin
      if (rst) dly <= '0;
      else begin
        dly[0] <= fsum;
        for (int i = 1; i < NB_LAT; i++) dly[i] <= dly[i-1];
      end
    end
    assign fsum_al = dly[NB_LAT-1];
  end

  logic [NS-1:0][SW-1:0] src;
  always_comb begin
    for (int f = 0; f < NF; f++) src[f] = fsum_al[f];
    for (int n = 0; n < NN; n++)
      for (int f = 0; f < NF; f++) src[NF*(n+1) + f] = nb_fsum[n][f];
  end

  logic [NR-1:0][RW-1:0] rsum_c;
  always_comb begin
    for (int r = 0; r < NR; r++) begin
      logic [XW-1:0] acc;
      acc = '0;
      for (int s = 0; s < NS; s++)
        if (region_mask[r][s]) acc = acc + XW'(src[s]);
      rsum_c[r] = (acc > XW'({RW{1'b1}})) ? {RW{1'b1}} : acc[RW-1:0];
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      region_sum <= '0;
      region_hit <= '0;
      l1_trig    <= 1'b0;
    end else begin
      region_sum <= rsum_c;
      for (int r = 0; r < NR; r++) region_hit[r] <= (region_sum[r] > l1_thr);
      l1_trig <= 1'b0;
      for (int r = 0; r < NR; r++) if (region_sum[r] > l1_thr) l1_trig <= 1'b1;
    end
  end

endmodule
