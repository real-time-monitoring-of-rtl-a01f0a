// lumi_region_monitor -- trackless real-time monitor of the LHCb luminous
// region from VELO cluster counters.
//
// The VELO readout reconstructs cluster centroids on the fly. This block
// counts, for every VELO half-module, the centroids falling in four small
// programmable regions (208 counters in all), closes the counting window
// after a programmable number of collision events, and computes from each
// window a set of calibrated transverse positions of the luminous region:
// a median-based outlier replacement, the projection of the normalised
// counter vector on a precomputed principal-component weight vector, and a
// linear calibration.
//
// Blocks: cluster_counter_bank (52 x region_counter_unit), acc_window, a
// small configuration register file, position_estimator (median_select,
// weight_memory, outlier_filter, pca_score_mac, seq_divider, calib_linear).
//
// Interface:
//   clusters[m][l]  up to LANES centroids per clock for half-module m
//   evt             one-cycle strobe per collision event
//   cfg_*           32-bit word writes, address map in lrm_pkg
//   cnt_rd_*        read port on the counts of the last closed window
//   est_*           results, updated with the est_valid pulse
// Timing: the counts of a window appear two clock edges after the event that
// closes it; the estimates follow 1809 clock cycles later (defaults).
// The window must be longer than that, or the pass in progress is abandoned
// and `overruns` increments.
//
// The counter layout, the estimation method and the set of estimators follow
// the paper; the interfaces, register map, lane count, window-by-events and
// number formats are this design's choices.
module lumi_region_monitor
  import lrm_pkg::*;
#(
  parameter int unsigned N_MOD = lrm_pkg::N_MODULES,
  parameter int unsigned LANES = 8,
  parameter int unsigned N_EST = 6,
  localparam int unsigned N_CNT = N_MOD * CNT_PER_MOD,
  localparam int unsigned K_W   = $clog2(N_CNT),
  localparam int unsigned E_W   = (N_EST > 1) ? $clog2(N_EST) : 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  cluster_t                clusters [N_MOD][LANES],
  input  logic                    evt,
  input  logic                    cfg_we,
  input  logic [CFG_AW-1:0]       cfg_addr,
  input  logic [31:0]             cfg_wdata,
  input  logic [K_W-1:0]          cnt_rd_addr,
  output logic [COUNT_W-1:0]      cnt_rd_data,
  output logic                    cnt_valid,
  output logic                    est_valid,
  output logic signed [POS_W-1:0] est_pos   [N_EST],
  output logic signed [T_W-1:0]   est_score [N_EST],
  output logic                    est_div0  [N_EST],
  output logic [COUNT_W-1:0]      est_med_inner,
  output logic [COUNT_W-1:0]      est_med_outer,
  output logic [K_W:0]            est_n_outliers,
  output logic [15:0]             est_overruns,
  output logic                    est_busy,
  output logic [31:0]             events_in_window,
  output logic [31:0]             windows
);

  // Configuration registers of the estimators and of the window.
  logic signed [CAL_W-1:0] alpha_q [N_EST];
  logic signed [CAL_W-1:0] beta_q  [N_EST];
  logic [31:0]             win_events_q;

  logic [CFG_AW-1:0] w_off, c_off;
  logic              w_we;

  assign w_off = cfg_addr - WEIGHT_BASE;
  assign c_off = cfg_addr - CAL_BASE;
  assign w_we  = cfg_we && (w_off < CFG_AW'(256 * N_EST)) && (int'(w_off[7:0]) < N_CNT);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      win_events_q <= '0;
      for (int e = 0; e < N_EST; e++) begin
        alpha_q[e] <= '0;
        beta_q[e]  <= '0;
      end
    end else if (cfg_we) begin
      if (cfg_addr == WINDOW_ADDR) win_events_q <= cfg_wdata;
      if (c_off < CFG_AW'(2 * N_EST)) begin
        if (c_off[0]) beta_q[int'(c_off) >> 1]  <= cfg_wdata;
        else          alpha_q[int'(c_off) >> 1] <= cfg_wdata;
      end
    end
  end

  // Counting.
  logic               snap, snap_done;
  logic [COUNT_W-1:0] counts [N_CNT];

  acc_window #(.EVT_W(32)) u_window (
    .clk, .rst_n, .evt, .win_events(win_events_q), .snap,
    .events_in_window, .windows
  );

  cluster_counter_bank #(.N_MOD(N_MOD), .LANES(LANES), .CNT_W(COUNT_W)) u_bank (
    .clk, .rst_n, .clusters, .snap, .cfg_we, .cfg_addr, .cfg_wdata,
    .counts, .snap_done, .rd_addr(cnt_rd_addr), .rd_data(cnt_rd_data)
  );

  assign cnt_valid = snap_done;

  // Estimation.
  position_estimator #(.N_CNT(N_CNT), .N_EST(N_EST), .CNT_W(COUNT_W)) u_est (
    .clk, .rst_n, .start(snap_done), .counts,
    .w_we, .w_est(E_W'(w_off >> 8)), .w_cnt(w_off[K_W-1:0]),
    .w_weight(cfg_wdata[W_W-1:0]), .w_incl(cfg_wdata[16]),
    .alpha(alpha_q), .beta(beta_q),
    .valid(est_valid), .pos(est_pos), .score(est_score), .div0(est_div0),
    .med_inner(est_med_inner), .med_outer(est_med_outer),
    .n_outliers(est_n_outliers), .overruns(est_overruns), .busy(est_busy)
  );

endmodule
