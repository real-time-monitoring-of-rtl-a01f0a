// tb_lumi_region_monitor -- end-to-end test of the monitor at its default
// size (52 half-modules, 8 lanes, 208 counters, 6 estimators).
//
// The test programs every counting region (110 x 20 pixels, inner ring near
// row 5, outer ring near row 60), weight vectors with the sign pattern of a
// horizontal estimator (Up and Right positive, Down and Left negative) and of
// a vertical one, for the whole detector and for each half, and calibration
// constants. It then streams random clusters on all lanes of every
// half-module with one event per clock and checks:
//   - no window closes while the window length is zero;
//   - each closed window's 208 counts (array, read port) against its own count;
//   - every estimate against the reference model applied to those counts;
//   - a dead half-module (all counters zero, replaced as low outliers) and a
//     hot one (counters above median + 50 %, replaced as high outliers);
//   - a window shorter than the estimator pass, which abandons that pass.
// Each of these mechanisms is counted and must occur at least once.
module tb_lumi_region_monitor;
  import lrm_pkg::*;
  import lrm_ref_pkg::*;

  localparam int N_MOD = 52, LANES = 8, N_CNT = 208, NE = 6;
  localparam int WIN = 2000;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, evt = 0, cfg_we = 0;
  logic [15:0] cfg_addr;
  logic [31:0] cfg_wdata;
  cluster_t clusters [N_MOD][LANES];
  logic [7:0]  cnt_rd_addr;
  logic [31:0] cnt_rd_data;
  logic cnt_valid, est_valid, est_busy;
  logic signed [31:0] est_pos [NE], est_score [NE];
  logic est_div0 [NE];
  logic [31:0] est_med_inner, est_med_outer, events_in_window, windows;
  logic [8:0] est_n_outliers;
  logic [15:0] est_overruns;

  lumi_region_monitor dut (.*);

  // models
  region_t reg_m [N_CNT];
  logic signed [15:0] wm [NE][N_CNT];
  bit incl_m [NE][N_CNT];
  int alpha_m [NE], beta_m [NE];
  u64_t run_cnt [N_CNT];
  u64_t last_snap [N_CNT];
  int n_windows = 0, n_valid = 0, n_low = 0, n_high = 0, n_half = 0, n_overrun = 0, n_stop = 0;
  int dead_mod = -1, hot_mod = -1;

  always #5 clk = ~clk;

  initial begin
    #2000000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic cfg_write(int a, logic [31:0] d);
    cfg_we = 1; cfg_addr = 16'(a); cfg_wdata = d;
    @(negedge clk);
    cfg_we = 0;
  endtask

  // Up = odd module slot 0, Down = even slot 0, Left = even slot 1,
  // Right = odd slot 1.
  function automatic int x_sign(int k);
    bit odd;
    odd = ((k / 4) % 2) == 1;
    return odd ? 1 : -1;
  endfunction
  function automatic int y_sign(int k);
    bit odd, slot;
    odd  = ((k / 4) % 2) == 1;
    slot = ((k / 2) % 2) == 1;
    return (odd ^ slot) ? 1 : -1;
  endfunction

  task automatic configure();
    for (int k = 0; k < N_CNT; k++) begin
      reg_m[k].enable = 1;
      reg_m[k].sensor = 2'((k / 2) % 2);
      reg_m[k].col_lo = 10'd100;
      reg_m[k].col_hi = 10'd209;
      reg_m[k].row_lo = k[0] ? 8'd60 : 8'd5;
      reg_m[k].row_hi = reg_m[k].row_lo + 8'd19;
      cfg_write(REGION_BASE + 2 * k, {6'b0, reg_m[k].col_hi, 6'b0, reg_m[k].col_lo});
      cfg_write(REGION_BASE + 2 * k + 1, {reg_m[k].enable, 13'b0, reg_m[k].sensor,
                                          reg_m[k].row_hi, reg_m[k].row_lo});
    end
    for (int e = 0; e < NE; e++) begin
      for (int k = 0; k < N_CNT; k++) begin
        int mag, odd;
        mag = k[0] ? $urandom_range(2000, 2150) : $urandom_range(2200, 2360);
        wm[e][k] = 16'(mag * ((e % 2) ? y_sign(k) : x_sign(k)));
        odd = (k / 4) % 2;
        incl_m[e][k] = (e < 2) || (e < 4 ? odd == 1 : odd == 0);
        cfg_write(WEIGHT_BASE + 256 * e + k, {15'b0, incl_m[e][k], wm[e][k]});
      end
      alpha_m[e] = 300000000 + 1000 * e;
      beta_m[e]  = -5000 + 700 * e;
      cfg_write(CAL_BASE + 2 * e, alpha_m[e]);
      cfg_write(CAL_BASE + 2 * e + 1, beta_m[e]);
    end
  endtask

  // one clock of random clusters; returns after the negedge
  task automatic cycle(bit with_evt);
    for (int m = 0; m < N_MOD; m++)
      for (int l = 0; l < LANES; l++) begin
        int pick;
        cluster_t c;
        pick = (m == hot_mod) ? $urandom_range(0, 5) : $urandom_range(0, 6);
        c.valid = (m == dead_mod) ? 1'b0 : (m == hot_mod) ? 1'b1 : 1'($urandom_range(0, 1));
        // picks 0,1 inner slot 0; 2 outer slot 0; 3,4 inner slot 1; 5 outer slot 1
        case (pick)
          0, 1: begin c.sensor = 0; c.row = 8'($urandom_range(5, 24));  end
          2:    begin c.sensor = 0; c.row = 8'($urandom_range(60, 79)); end
          3, 4: begin c.sensor = 1; c.row = 8'($urandom_range(5, 24));  end
          5:    begin c.sensor = 1; c.row = 8'($urandom_range(60, 79)); end
          default: begin c.sensor = 2'($urandom_range(0, 3)); c.row = 8'($urandom_range(100, 255)); end
        endcase
        c.col = 10'($urandom_range(100, 209));
        if ($urandom_range(0, 9) == 0) c.col = 10'($urandom_range(0, 99));   // near miss
        clusters[m][l] = c;
        for (int r = 0; r < 4; r++) begin
          region_t g;
          g = reg_m[4 * m + r];
          if (c.valid && g.enable && c.sensor == g.sensor && c.col >= g.col_lo &&
              c.col <= g.col_hi && c.row >= g.row_lo && c.row <= g.row_hi)
            run_cnt[4 * m + r]++;
        end
      end
    evt = with_evt;
    @(negedge clk);
  endtask

  task automatic check_estimates();
    u64_t q[$];
    u64_t md[2];
    int nout;
    foreach (last_snap[k]) q.push_back(last_snap[k]);
    md[0] = ref_median(q, 0);
    md[1] = ref_median(q, 1);
    nout = 0;
    for (int k = 0; k < N_CNT; k++)
      if (ref_is_outlier(q[k], md[k % 2])) begin
        nout++;
        if (2 * q[k] < md[k % 2]) n_low++; else n_high++;
      end
    checks += 2;
    if (est_med_inner != 32'(md[0]) || est_med_outer != 32'(md[1])) begin
      failures++; $display("FAIL medians %0d/%0d expected %0d/%0d", est_med_inner, est_med_outer, md[0], md[1]);
    end
    if (int'(est_n_outliers) != nout) begin failures++; $display("FAIL outliers %0d/%0d", est_n_outliers, nout); end
    for (int e = 0; e < NE; e++) begin
      longint num;
      u64_t den;
      int t;
      num = 0; den = 0;
      for (int k = 0; k < N_CNT; k++) begin
        u64_t c;
        c = ref_is_outlier(q[k], md[k % 2]) ? md[k % 2] : q[k];
        if (incl_m[e][k]) begin
          num += longint'(wm[e][k]) * longint'(c);
          den += c;
        end
      end
      t = ref_score(num, den);
      if (e >= 2) n_half++;
      checks += 2;
      if (est_score[e] !== t) begin failures++; $display("FAIL score[%0d] %0d expected %0d", e, est_score[e], t); end
      if (est_pos[e] !== ref_calib(t, alpha_m[e], beta_m[e])) begin
        failures++; $display("FAIL pos[%0d] %0d expected %0d", e, est_pos[e], ref_calib(t, alpha_m[e], beta_m[e]));
      end
    end
    $display("window %0d: median inner %0d outer %0d, %0d outliers, x=%0d y=%0d xA=%0d yA=%0d xC=%0d yC=%0d",
             n_windows, md[0], md[1], nout, est_pos[0], est_pos[1], est_pos[2], est_pos[3],
             est_pos[4], est_pos[5]);
  endtask

  // Watches the outputs while the stimulus runs.
  int pending_snap = 0;
  always @(negedge clk) if (rst_n) begin
    if (cnt_valid) begin
      checks++;
      if (pending_snap != 1) begin failures++; $display("FAIL unexpected cnt_valid"); end
      pending_snap = 0;
      for (int k = 0; k < N_CNT; k++) begin
        checks++;
        if (u64_t'(dut.counts[k]) != last_snap[k]) begin
          failures++;
          $display("FAIL window %0d counter %0d: %0d expected %0d", n_windows, k, dut.counts[k], last_snap[k]);
        end
      end
    end
    if (est_valid) begin
      n_valid++;
      check_estimates();
    end
  end

  task automatic idle_clusters();
    for (int m = 0; m < N_MOD; m++) for (int l = 0; l < LANES; l++) clusters[m][l].valid = 1'b0;
  endtask

  // Clusters seen while the windows are stopped count into the next window.
  task automatic run_window(int len);
    cfg_write(WINDOW_ADDR, len);
    for (int c = 0; c < len; c++) begin
      cycle(1);
      if (c == len - 1) begin
        foreach (run_cnt[k]) begin last_snap[k] = run_cnt[k]; run_cnt[k] = 0; end
        pending_snap = 1;
        n_windows++;
      end
    end
    // no more events or clusters until the next window is programmed
    evt = 0;
    idle_clusters();
    cfg_write(WINDOW_ADDR, 0);
  endtask

  initial begin
    for (int m = 0; m < N_MOD; m++) for (int l = 0; l < LANES; l++) clusters[m][l] = '0;
    cnt_rd_addr = 0;
    foreach (run_cnt[k]) run_cnt[k] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    configure();

    // window length zero: counting windows stopped
    for (int c = 0; c < 50; c++) begin
      cycle(1);
      checks++;
      if (cnt_valid) failures++;
    end
    if (windows == 0) n_stop++;
    evt = 0;
    idle_clusters();

    run_window(WIN);                      // nominal
    repeat (1850) @(negedge clk);
    dead_mod = 5; hot_mod = 10;
    run_window(WIN);                      // dead and hot half-modules
    repeat (1850) @(negedge clk);
    dead_mod = -1; hot_mod = -1;
    run_window(WIN);
    // next window closes only 600 clocks later: pass in progress abandoned
    run_window(600);
    repeat (1850) @(negedge clk);
    if (est_overruns == 16'd1) n_overrun++;

    // read port on the last window
    for (int k = 0; k < N_CNT; k += 13) begin
      cnt_rd_addr = 8'(k);
      #1;
      checks++;
      if (u64_t'(cnt_rd_data) != last_snap[k]) begin failures++; $display("FAIL read port %0d", k); end
    end

    checks += 2;
    if (int'(windows) != n_windows) begin failures++; $display("FAIL windows %0d/%0d", windows, n_windows); end
    if (n_valid != n_windows - 1) begin failures++; $display("FAIL %0d results for %0d windows", n_valid, n_windows); end

    $display("mechanisms: windows=%0d results=%0d low_outliers=%0d high_outliers=%0d half_estimates=%0d overruns=%0d stopped=%0d",
             n_windows, n_valid, n_low, n_high, n_half, n_overrun, n_stop);
    if (n_windows == 0) failures++;
    if (n_low == 0)     failures++;
    if (n_high == 0)    failures++;
    if (n_half == 0)    failures++;
    if (n_overrun == 0) failures++;
    if (n_stop == 0)    failures++;
    checks += 6;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
