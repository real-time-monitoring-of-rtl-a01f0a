// region_counter_unit -- the four cluster counters of one VELO half-module.
//
// Each half-module carries four counting regions: an inner and an outer
// region on each of two of its sensors. Every clock the unit receives up to
// LANES cluster centroids from the clustering stage, tests each against the
// four programmable rectangles, and adds the number of hits to each region's
// running counter. A one-cycle `snap` pulse closes the accumulation window:
// the running counts (including the clusters presented in the snap cycle)
// are copied into the `counts` output registers and the running counters
// restart from zero.
//
// Timing: matching is registered (one pipeline stage), so `counts` updates
// two clock edges after the `snap` pulse; `snap_done` pulses with the update.
// Counters saturate at their maximum value instead of wrapping.
//
// From the paper: four counters per half-module, two regions per sensor at
// different radii, regions are programmable. This design's choices: the
// rectangle form of a region, the lane count, the pipeline stage,
// saturation and synchronous active-low reset.
module region_counter_unit
  import lrm_pkg::*;
#(
  parameter int unsigned LANES   = 8,
  parameter int unsigned CNT_W = lrm_pkg::COUNT_W
) (
  input  logic                clk,
  input  logic                rst_n,
  input  cluster_t            clusters [LANES],
  input  region_t             regions  [CNT_PER_MOD],
  input  logic                snap,
  output logic [CNT_W-1:0]  counts   [CNT_PER_MOD],
  output logic                snap_done
);

  localparam int unsigned HIT_W = $clog2(LANES + 1);
  localparam logic [CNT_W-1:0] CNT_MAX = '1;

  logic [HIT_W-1:0]   hits_q [CNT_PER_MOD];
  logic               snap_q;
  logic [CNT_W-1:0] run_q  [CNT_PER_MOD];

  // Stage 1: number of lanes hitting each region.
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      snap_q <= 1'b0;
      for (int r = 0; r < CNT_PER_MOD; r++) hits_q[r] <= '0;
    end else begin
      snap_q <= snap;
      for (int r = 0; r < CNT_PER_MOD; r++) begin
        logic [HIT_W-1:0] n;
        n = '0;
        for (int l = 0; l < LANES; l++)
          n = n + HIT_W'(region_hit(regions[r], clusters[l]));
        hits_q[r] <= n;
      end
    end
  end

  // Stage 2: accumulate with saturation; snapshot and restart on snap.
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      snap_done <= 1'b0;
      for (int r = 0; r < CNT_PER_MOD; r++) begin
        run_q[r]  <= '0;
        counts[r] <= '0;
      end
    end else begin
      snap_done <= snap_q;
      for (int r = 0; r < CNT_PER_MOD; r++) begin
        logic [CNT_W:0] sum;
        logic [CNT_W-1:0] sat;
        sum = {1'b0, run_q[r]} + (CNT_W+1)'(hits_q[r]);
        sat = sum[CNT_W] ? CNT_MAX : sum[CNT_W-1:0];
        if (snap_q) begin
          counts[r] <= sat;
          run_q[r]  <= '0;
        end else begin
          run_q[r]  <= sat;
        end
      end
    end
  end

endmodule
