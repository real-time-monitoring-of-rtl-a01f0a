// cluster_counter_bank -- all 208 region counters of the VELO.
//
// One region_counter_unit per half-module (N_MODULES = 52 units of four
// counters), the configuration registers of every counting region, and a
// flat view of the latest window's counts.
//
// Configuration: a write with `cfg_addr` in the region range
// (REGION_BASE + 2k and + 2k+1, see lrm_pkg) sets the rectangle of counter k;
// other addresses are ignored here. Regions are disabled after reset.
//
// Outputs: `counts[k]` is counter k (k = 4*module + 2*slot + ring) of the last
// closed window. It changes two clock edges after `snap`, together with the
// `snap_done` pulse, and holds until the next window closes.
// `rd_addr`/`rd_data` is a combinational read port on the same values.
//
// The counter total and grouping follow the paper; the register map and the
// read port are this design's choices.
module cluster_counter_bank
  import lrm_pkg::*;
#(
  parameter int unsigned N_MOD   = lrm_pkg::N_MODULES,
  parameter int unsigned LANES   = 8,
  parameter int unsigned CNT_W = lrm_pkg::COUNT_W,
  localparam int unsigned N_CNT  = N_MOD * CNT_PER_MOD,
  localparam int unsigned IDX_W  = $clog2(N_CNT)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  cluster_t             clusters [N_MOD][LANES],
  input  logic                 snap,
  input  logic                 cfg_we,
  input  logic [CFG_AW-1:0]    cfg_addr,
  input  logic [31:0]          cfg_wdata,
  output logic [CNT_W-1:0]   counts [N_CNT],
  output logic                 snap_done,
  input  logic [IDX_W-1:0]     rd_addr,
  output logic [CNT_W-1:0]   rd_data
);

  region_t           regions_q [N_CNT];
  logic [CFG_AW-1:0] reg_off;

  assign reg_off = cfg_addr - REGION_BASE;
  logic    done_vec  [N_MOD];

  // Region configuration registers.
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int k = 0; k < N_CNT; k++) regions_q[k] <= '0;
    end else if (cfg_we && reg_off < CFG_AW'(2 * N_CNT)) begin
      automatic int unsigned k = int'(reg_off) >> 1;
      if (reg_off[0] == 1'b0) begin
        regions_q[k].col_lo <= cfg_wdata[COL_W-1:0];
        regions_q[k].col_hi <= cfg_wdata[16 +: COL_W];
      end else begin
        regions_q[k].row_lo <= cfg_wdata[ROW_W-1:0];
        regions_q[k].row_hi <= cfg_wdata[8 +: ROW_W];
        regions_q[k].sensor <= cfg_wdata[16 +: SENSOR_W];
        regions_q[k].enable <= cfg_wdata[31];
      end
    end
  end

  for (genvar m = 0; m < N_MOD; m++) begin : g_mod
    region_t            mod_regions [CNT_PER_MOD];
    logic [CNT_W-1:0] mod_counts  [CNT_PER_MOD];

    for (genvar r = 0; r < CNT_PER_MOD; r++) begin : g_r
      assign mod_regions[r]            = regions_q[m*CNT_PER_MOD + r];
      assign counts[m*CNT_PER_MOD + r] = mod_counts[r];
    end

    region_counter_unit #(
      .LANES  (LANES),
      .CNT_W(CNT_W)
    ) u_unit (
      .clk      (clk),
      .rst_n    (rst_n),
      .clusters (clusters[m]),
      .regions  (mod_regions),
      .snap     (snap),
      .counts   (mod_counts),
      .snap_done(done_vec[m])
    );
  end

  // Every unit sees the same snap, so all done pulses coincide.
  assign snap_done = done_vec[0];
  assign rd_data   = (int'(rd_addr) < N_CNT) ? counts[rd_addr] : '0;

endmodule
