// tb_lsc_scan -- beam displacement scan through the whole monitor at its
// default size.
//
// Cluster rates come from a simple model: the hit density in a counting
// region falls as 1/d^2 with the transverse distance d between the region and
// the luminous region. Region centres follow the reference layout seen from
// the beam: inner regions at (+-10, +-10) mm, outer ones at (+-18, +-18) mm;
// Up at (+,+), Left at (-,+), Down at (-,-), Right at (+,-).
//
// Weights: when only the beam position varies, the first principal component
// of the normalised counts points along the derivative of the normalised
// rates with respect to that position. The test computes this derivative for
// x and for y, over all counters and over each half, scales it to unit norm
// and loads it in Q1.15. The calibration constants are then fitted to the
// noiseless model (output unit 1 um) and loaded.
//
// The scan moves the beam in x and in y and runs one counting window
// (8000 events) per step. Each of the six estimates must come back within a
// statistical tolerance of the true offset: 100 um for the whole detector,
// 400 um for one half, whose x lever arm is much weaker. Steps in x and
// steps in y must also give increasing whole-detector estimates.
module tb_lsc_scan;
  import lrm_pkg::*;

  localparam int N_MOD = 52, LANES = 8, N_CNT = 208, NE = 6;
  localparam int WIN = 8000;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, evt = 0, cfg_we = 0;
  logic [15:0] cfg_addr;
  logic [31:0] cfg_wdata;
  cluster_t clusters [N_MOD][LANES];
  logic [7:0]  cnt_rd_addr = 0;
  logic [31:0] cnt_rd_data;
  logic cnt_valid, est_valid, est_busy;
  logic signed [31:0] est_pos [NE], est_score [NE];
  logic est_div0 [NE];
  logic [31:0] est_med_inner, est_med_outer, events_in_window, windows;
  logic [8:0] est_n_outliers;
  logic [15:0] est_overruns;

  lumi_region_monitor dut (.*);

  real cx [N_CNT], cy [N_CNT];
  int  wq [NE][N_CNT];
  bit  incl [NE][N_CNT];
  real bx = 0.0, by = 0.0;
  int  last_x [NE];

  always #5 clk = ~clk;

  initial begin
    #1000000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic cfg_write(int a, logic [31:0] d);
    cfg_we = 1; cfg_addr = 16'(a); cfg_wdata = d;
    @(negedge clk);
    cfg_we = 0;
  endtask

  function automatic real rate(int k, real x, real y);
    real dx, dy;
    dx = cx[k] - x;
    dy = cy[k] - y;
    return 1.0 / (dx * dx + dy * dy);
  endfunction

  // expected score (in score LSB) of estimator e for a beam at (x, y)
  function automatic real model_score(int e, real x, real y);
    real num, den;
    num = 0.0; den = 0.0;
    for (int k = 0; k < N_CNT; k++)
      if (incl[e][k]) begin
        num += real'(wq[e][k]) * rate(k, x, y);
        den += rate(k, x, y);
      end
    return num / den * 65536.0;
  endfunction

  task automatic setup_model();
    for (int k = 0; k < N_CNT; k++) begin
      bit odd, slot;
      real r;
      odd  = ((k / 4) % 2) == 1;
      slot = ((k / 2) % 2) == 1;
      r    = k[0] ? 18.0 : 10.0;
      // Up: odd/0 (+,+); Right: odd/1 (+,-); Down: even/0 (-,-); Left: even/1 (-,+)
      cx[k] = odd ? r : -r;
      cy[k] = (odd ^ slot) ? r : -r;
    end
    for (int e = 0; e < NE; e++) begin
      real g [N_CNT];
      real norm, h, s0, sp, alpha, beta;
      h = 1e-3;
      for (int k = 0; k < N_CNT; k++) begin
        bit odd;
        odd = ((k / 4) % 2) == 1;
        incl[e][k] = (e < 2) || (e < 4 ? odd : !odd);
      end
      // derivative of the normalised rates along x (even e) or y (odd e)
      norm = 0.0;
      for (int k = 0; k < N_CNT; k++) begin
        real sum_p, sum_m;
        sum_p = 0.0; sum_m = 0.0;
        for (int j = 0; j < N_CNT; j++)
          if (incl[e][j]) begin
            sum_p += (e % 2) ? rate(j, 0.0, h) : rate(j, h, 0.0);
            sum_m += (e % 2) ? rate(j, 0.0, -h) : rate(j, -h, 0.0);
          end
        g[k] = 0.0;
        if (incl[e][k])
          g[k] = ((e % 2) ? rate(k, 0.0, h) / sum_p - rate(k, 0.0, -h) / sum_m
                          : rate(k, h, 0.0) / sum_p - rate(k, -h, 0.0) / sum_m) / (2.0 * h);
        norm += g[k] * g[k];
      end
      norm = $sqrt(norm);
      for (int k = 0; k < N_CNT; k++) begin
        wq[e][k] = $rtoi(g[k] / norm * 32767.0);
        cfg_write(WEIGHT_BASE + 256 * e + k, {15'b0, incl[e][k], 16'(wq[e][k])});
      end
      // calibration: pos [um] = alpha * t / 2^31 + beta
      s0 = model_score(e, 0.0, 0.0);
      sp = (e % 2) ? (model_score(e, 0.0, 0.5) - model_score(e, 0.0, -0.5))
                   : (model_score(e, 0.5, 0.0) - model_score(e, -0.5, 0.0));
      alpha = 1000.0 * 2147483648.0 / sp;
      beta  = -alpha * s0 / 2147483648.0;
      cfg_write(CAL_BASE + 2 * e, $rtoi(alpha));
      cfg_write(CAL_BASE + 2 * e + 1, $rtoi(beta));
    end
    for (int k = 0; k < N_CNT; k++) begin
      cfg_write(REGION_BASE + 2 * k, {6'b0, 10'd209, 6'b0, 10'd100});
      cfg_write(REGION_BASE + 2 * k + 1, {1'b1, 13'b0, 2'((k / 2) % 2),
                                          k[0] ? 8'd79 : 8'd24, k[0] ? 8'd60 : 8'd5});
    end
  endtask

  task automatic cycle();
    for (int m = 0; m < N_MOD; m++)
      for (int l = 0; l < LANES; l++) begin
        cluster_t c;
        int r, k;
        real p;
        r = $urandom_range(0, 3);
        k = 4 * m + r;
        p = rate(k, bx, by) * 150.0;
        c.valid  = ($urandom_range(0, 1) == 1);
        c.col    = 10'($urandom_range(100, 209));
        if (real'($urandom_range(0, 999999)) < p * 1.0e6) begin
          c.sensor = 2'(r / 2);
          c.row    = r[0] ? 8'($urandom_range(60, 79)) : 8'($urandom_range(5, 24));
        end else begin
          c.sensor = 2'($urandom_range(0, 3));
          c.row    = 8'($urandom_range(100, 255));
        end
        clusters[m][l] = c;
      end
    evt = 1;
    @(negedge clk);
  endtask

  task automatic step(real x, real y, int mono_axis);
    bx = x; by = y;
    cfg_write(WINDOW_ADDR, WIN);
    repeat (WIN) cycle();
    evt = 0;
    for (int m = 0; m < N_MOD; m++) for (int l = 0; l < LANES; l++) clusters[m][l].valid = 0;
    cfg_write(WINDOW_ADDR, 0);
    while (!est_valid) @(negedge clk);
    $display("beam (%0d, %0d) um: x=%0d y=%0d | xA=%0d yA=%0d | xC=%0d yC=%0d | outliers %0d",
             $rtoi(x * 1000.0), $rtoi(y * 1000.0), est_pos[0], est_pos[1], est_pos[2],
             est_pos[3], est_pos[4], est_pos[5], est_n_outliers);
    for (int e = 0; e < NE; e++) begin
      real truth, tol, err;
      truth = ((e % 2) ? y : x) * 1000.0;
      tol   = (e < 2) ? 100.0 : 400.0;
      err   = real'(est_pos[e]) - truth;
      checks++;
      if (err > tol || err < -tol) begin
        failures++;
        $display("FAIL estimator %0d: %0d um for %0d um", e, est_pos[e], $rtoi(truth));
      end
      if (mono_axis >= 0 && e < 2 && (e % 2) == mono_axis) begin
        checks++;
        if (est_pos[e] <= last_x[e]) begin
          failures++;
          $display("FAIL estimator %0d not increasing: %0d after %0d", e, est_pos[e], last_x[e]);
        end
      end
      last_x[e] = est_pos[e];
    end
  endtask

  initial begin
    for (int m = 0; m < N_MOD; m++) for (int l = 0; l < LANES; l++) clusters[m][l] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    setup_model();
    step(-1.0, 0.0, -1);
    step(-0.5, 0.0, 0);
    step(0.0, 0.0, 0);
    step(0.5, 0.0, 0);
    step(1.0, 0.0, 0);
    step(0.0, -1.0, -1);
    step(0.0, 0.0, 1);
    step(0.0, 1.0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
