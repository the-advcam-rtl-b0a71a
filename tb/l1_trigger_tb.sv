// l1_trigger_tb: checks region sums, region decisions and the L1 trigger.
//
// Local and neighbour flower sums are random every clock; the region masks
// are random and changed every 50 clocks. The testbench keeps the history of
// its inputs and recomputes each region sum from the local sums of NB_LAT
// clocks earlier and the neighbour sums of the same clock, saturated at the
// region width, then the decisions one clock later. The first 100 clocks use
// full-scale sums with all 49 sources selected to exercise the saturation,
// and cases of region sums equal to the threshold are counted.
module l1_trigger_tb;
  import advcam_pkg::*;

  localparam int NB_LAT = 2;
  localparam int T = 1200;
  logic clk = 1'b0;
  logic rst;
  logic [N_FLOWER-1:0][FSUM_W-1:0] fsum;
  logic [N_NEIGH-1:0][N_FLOWER-1:0][FSUM_W-1:0] nb_fsum;
  logic [N_REGION-1:0][N_FSRC-1:0] region_mask;
  logic [RSUM_W-1:0] l1_thr;
  logic [N_REGION-1:0][RSUM_W-1:0] region_sum;
  logic [N_REGION-1:0] region_hit;
  logic l1_trig;
  int checks = 0, failures = 0;

  l1_trigger #(.NB_LAT(NB_LAT)) dut (
    .clk, .rst, .fsum, .nb_fsum, .region_mask, .l1_thr, .region_sum, .region_hit, .l1_trig
  );

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (T + 1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int loc [T][N_FLOWER];
  int exp_sum [T][N_REGION];

  initial begin
    int src [N_FSRC];
    int acc;
    int n_hit = 0, n_trig = 0, n_sat = 0;
    logic [N_REGION-1:0] eh;
    rst = 1'b1; fsum = '0; nb_fsum = '0; region_mask = '0; l1_thr = '0;
    repeat (3) @(negedge clk);
    rst = 1'b0;
    for (int t = 0; t < T; t++) begin
      if (t % 50 == 0)
        for (int r = 0; r < N_REGION; r++)
          for (int s = 0; s < N_FSRC; s++)
            region_mask[r][s] = (t < 100) ? 1'b1 : (($urandom % 7) == 0);
      l1_thr = (t < 100) ? RSUM_W'(200000) : RSUM_W'(7 * 5200);
      for (int f = 0; f < N_FLOWER; f++) begin
        fsum[f] = (t < 100) ? FSUM_W'(28665) : FSUM_W'($urandom % 8000);
        loc[t][f] = int'(fsum[f]);
      end
      for (int n = 0; n < N_NEIGH; n++)
        for (int f = 0; f < N_FLOWER; f++)
          nb_fsum[n][f] = (t < 100) ? FSUM_W'(28665) : FSUM_W'($urandom % 8000);
      // expected region sums of this clock
      for (int f = 0; f < N_FLOWER; f++) src[f] = (t >= NB_LAT) ? loc[t-NB_LAT][f] : 0;
      for (int n = 0; n < N_NEIGH; n++)
        for (int f = 0; f < N_FLOWER; f++) src[N_FLOWER*(n+1) + f] = int'(nb_fsum[n][f]);
      for (int r = 0; r < N_REGION; r++) begin
        acc = 0;
        for (int s = 0; s < N_FSRC; s++) if (region_mask[r][s]) acc += src[s];
        if (acc > (1 << RSUM_W) - 1) begin acc = (1 << RSUM_W) - 1; n_sat++; end
        exp_sum[t][r] = acc;
      end
      // a region sum equal to the threshold must not trigger: force one
      if (t == 600) l1_thr = RSUM_W'(exp_sum[t-1][0]);
      for (int r = 0; r < N_REGION; r++)
        eh[r] = (t >= 1) && (exp_sum[t-1][r] > int'(l1_thr));
      @(negedge clk);
      for (int r = 0; r < N_REGION; r++) begin
        checks++;
        if (int'(region_sum[r]) != exp_sum[t][r]) begin
          failures++;
          if (failures < 10) $display("t=%0d region %0d sum %0d expected %0d", t, r, region_sum[r], exp_sum[t][r]);
        end
      end
      checks++;
      if (region_hit !== eh || l1_trig !== (|eh)) begin
        failures++;
        if (failures < 10) $display("t=%0d hits %b expected %b trig %b", t, region_hit, eh, l1_trig);
      end
      n_hit += $countones(eh);
      n_trig += int'(|eh);
    end
    checks++;
    if (n_sat == 0 || n_trig == 0 || n_trig == T) failures++;
    $display("saturated=%0d region hits=%0d triggers=%0d", n_sat, n_hit, n_trig);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
