// position_estimator -- from one window of counts to calibrated positions.
//
// After each closed counting window this unit computes N_EST position
// estimates (by default: x and y from the whole VELO, x and y from the A side
// only, x and y from the C side only). For each estimator e:
//   1. m_in, m_out = median of the inner and of the outer counters;
//   2. c'_k = c_k, or the median of its ring if c_k is outside median +-50 %;
//   3. num = sum_k incl_ek * w_ek * c'_k, den = sum_k incl_ek * c'_k;
//   4. t_e = num / den                (score of the normalised counts, Q1.31);
//   5. pos_e = alpha_e * t_e + beta_e (linear calibration).
// The medians are computed once per window and shared by all estimators.
//
// Structure: median_select, then a sequential pass per estimator that reads
// weight_memory (one counter per clock) through outlier_filter into
// pca_score_mac, then seq_divider and calib_linear. From the clock edge that
// samples `start` to the one that raises `valid` there are
// N/2 + 1 + N_EST * (N + NUM_W + SHIFT + 4) cycles, 1809 for the defaults,
// far below the shortest window the paper considers (1 ms).
//
// Interface: pulse `start` when `counts` has been updated; `counts`, `alpha`
// and `beta` must stay stable until `valid`. `valid` pulses once all
// estimators are done; results hold until the next `valid`. A `start` while
// busy abandons the pass in progress, restarts on the new counts and
// increments `overruns`. `n_outliers` is the number of counters replaced in
// the last pass.
//
// The method (median outlier replacement, first-PC projection of normalised
// counts, linear calibration, separate weights for half-detector estimators)
// is the paper's. The sequencing, sharing one multiplier, the include bits
// and all number formats are this design's choices.
module position_estimator
  import lrm_pkg::*;
#(
  parameter int unsigned N_CNT = lrm_pkg::N_COUNTERS,
  parameter int unsigned N_EST = 6,
  parameter int unsigned CNT_W = lrm_pkg::COUNT_W,
  localparam int unsigned E_W  = (N_EST > 1) ? $clog2(N_EST) : 1,
  localparam int unsigned K_W  = $clog2(N_CNT)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  input  logic [CNT_W-1:0]        counts [N_CNT],
  // weight memory write port
  input  logic                    w_we,
  input  logic [E_W-1:0]          w_est,
  input  logic [K_W-1:0]          w_cnt,
  input  logic signed [W_W-1:0]   w_weight,
  input  logic                    w_incl,
  // calibration constants
  input  logic signed [CAL_W-1:0] alpha [N_EST],
  input  logic signed [CAL_W-1:0] beta  [N_EST],
  // results
  output logic                    valid,
  output logic signed [POS_W-1:0] pos   [N_EST],
  output logic signed [T_W-1:0]   score [N_EST],
  output logic                    div0  [N_EST],
  output logic [CNT_W-1:0]        med_inner,
  output logic [CNT_W-1:0]        med_outer,
  output logic [K_W:0]            n_outliers,
  output logic [15:0]             overruns,
  output logic                    busy
);

  localparam int unsigned NUM_W = CNT_W + W_W + $clog2(N_CNT);
  localparam int unsigned DEN_W = CNT_W + $clog2(N_CNT);
  localparam int unsigned SHIFT = T_FRAC - W_FRAC;

  typedef enum logic [2:0] {S_IDLE, S_MED, S_MAC, S_DIV, S_CAL} state_t;

  state_t          state_q;
  logic [E_W-1:0]  e_q;
  logic [K_W-1:0]  k_q;
  logic            issue_q;      // an address is being issued in S_MAC
  logic            v_d, last_d;  // triple valid at the MAC input
  logic [K_W-1:0]  k_d;
  logic [K_W:0]    nout_q;

  // sub-block signals
  logic                    med_start, med_done, med_busy;
  logic [CNT_W-1:0]        m_in, m_out, m_sel;
  logic signed [W_W-1:0]   rd_w;
  logic                    rd_incl;
  logic [CNT_W-1:0]        c_filt;
  logic                    c_out;
  logic                    mac_clear, mac_done;
  logic signed [NUM_W-1:0] num;
  logic [DEN_W-1:0]        den;
  logic                    div_start, div_done, div_busy, div_z;
  logic signed [T_W-1:0]   t_q;
  logic                    cal_in, cal_out;
  logic signed [POS_W-1:0] cal_pos;

  median_select #(.N(N_CNT), .W(CNT_W)) u_median (
    .clk, .rst_n, .start(med_start), .vals(counts),
    .med_inner(m_in), .med_outer(m_out), .done(med_done), .busy(med_busy)
  );

  weight_memory #(.N_EST(N_EST), .N_CNT(N_CNT), .W_W(W_W)) u_wmem (
    .clk, .we(w_we), .wr_est(w_est), .wr_cnt(w_cnt), .wr_weight(w_weight),
    .wr_incl(w_incl), .rd_est(e_q), .rd_cnt(k_q), .rd_weight(rd_w),
    .rd_incl(rd_incl)
  );

  assign m_sel = k_d[0] ? m_out : m_in;

  outlier_filter #(.W(CNT_W)) u_filter (
    .value(counts[k_d]), .median(m_sel), .filtered(c_filt), .outlier(c_out)
  );

  pca_score_mac #(.N_CNT(N_CNT), .COUNT_W(CNT_W), .W_W(W_W)) u_mac (
    .clk, .rst_n, .clear(mac_clear), .in_valid(v_d), .in_last(last_d),
    .value(c_filt), .weight(rd_w), .incl(rd_incl), .num, .den, .done(mac_done)
  );

  seq_divider #(.NUM_W(NUM_W), .DEN_W(DEN_W), .SHIFT(SHIFT), .Q_W(T_W)) u_div (
    .clk, .rst_n, .start(div_start), .num, .den, .q(t_q), .div0(div_z),
    .done(div_done), .busy(div_busy)
  );

  calib_linear #(.T_W(T_W), .T_FRAC(T_FRAC), .CAL_W(CAL_W), .POS_W(POS_W)) u_cal (
    .clk, .rst_n, .in_valid(cal_in), .t(t_q), .alpha(alpha[e_q]),
    .beta(beta[e_q]), .out_valid(cal_out), .pos(cal_pos)
  );

  assign med_start = start;
  assign mac_clear = (state_q == S_MED && med_done) || (state_q == S_CAL && cal_out);
  assign div_start = (state_q == S_MAC) && mac_done;
  assign cal_in    = (state_q == S_DIV) && div_done;
  assign busy      = (state_q != S_IDLE);

  // Handshake rules between the sequencer and its sub-blocks.
  a_div_idle_at_start: assert property (@(posedge clk) disable iff (!rst_n)
    div_start |-> !div_busy);
  a_median_done_before_mac: assert property (@(posedge clk) disable iff (!rst_n)
    (state_q == S_MAC) |-> !med_busy);
  a_valid_only_at_end: assert property (@(posedge clk) disable iff (!rst_n)
    valid |-> (state_q == S_IDLE));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state_q    <= S_IDLE;
      e_q        <= '0;
      k_q        <= '0;
      issue_q    <= 1'b0;
      v_d        <= 1'b0;
      last_d     <= 1'b0;
      k_d        <= '0;
      nout_q     <= '0;
      valid      <= 1'b0;
      med_inner  <= '0;
      med_outer  <= '0;
      n_outliers <= '0;
      overruns   <= '0;
      for (int e = 0; e < N_EST; e++) begin
        pos[e]   <= '0;
        score[e] <= '0;
        div0[e]  <= 1'b0;
      end
    end else begin
      valid  <= 1'b0;
      v_d    <= issue_q;
      last_d <= issue_q && (int'(k_q) == N_CNT - 1);
      k_d    <= k_q;
      if (v_d && e_q == '0 && c_out) nout_q <= nout_q + 1'b1;

      if (start) begin
        if (state_q != S_IDLE) overruns <= overruns + 1'b1;
        state_q <= S_MED;
        issue_q <= 1'b0;
        v_d     <= 1'b0;
        last_d  <= 1'b0;
      end else begin
        unique case (state_q)
          S_IDLE: ;
          S_MED: if (med_done) begin
            state_q <= S_MAC;
            e_q     <= '0;
            k_q     <= '0;
            issue_q <= 1'b1;
            nout_q  <= '0;
          end
          S_MAC: begin
            if (issue_q) begin
              if (int'(k_q) == N_CNT - 1) issue_q <= 1'b0;
              else                        k_q     <= k_q + 1'b1;
            end
            if (mac_done) state_q <= S_DIV;
          end
          S_DIV: if (div_done) state_q <= S_CAL;
          S_CAL: if (cal_out) begin
            pos[e_q]   <= cal_pos;
            score[e_q] <= t_q;
            div0[e_q]  <= div_z;
            if (int'(e_q) == N_EST - 1) begin
              state_q    <= S_IDLE;
              valid      <= 1'b1;
              med_inner  <= m_in;
              med_outer  <= m_out;
              n_outliers <= nout_q;
            end else begin
              state_q <= S_MAC;
              e_q     <= e_q + 1'b1;
              k_q     <= '0;
              issue_q <= 1'b1;
            end
          end
          default: state_q <= S_IDLE;
        endcase
      end
    end
  end

endmodule
