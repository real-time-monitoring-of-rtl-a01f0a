// tb_position_estimator -- full estimator pass on synthetic counter sets.
//
// Inner counters around 10000, outer around 3000, with a few missing (zero)
// and hot (doubled) counters. Six estimators: all counters, the odd
// half-modules only, the even half-modules only (x and y each). Every score
// and position is compared with the reference model; also checked: the
// medians, the number of replaced counters, the pass latency, an abandoned
// pass (overrun) and an estimator with no included counter (div0).
module tb_position_estimator;
  import lrm_pkg::*;
  import lrm_ref_pkg::*;

  localparam int N = 208, NE = 6;
  localparam int LATENCY = N / 2 + 2 + NE * (N + 56 + 16 + 4);
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, start = 0;
  logic [31:0] counts [N];
  logic w_we = 0, w_incl;
  logic [2:0] w_est;
  logic [7:0] w_cnt;
  logic signed [15:0] w_weight;
  logic signed [31:0] alpha [NE], beta [NE];
  logic valid, busy;
  logic signed [31:0] pos [NE], score [NE];
  logic div0 [NE];
  logic [31:0] med_inner, med_outer;
  logic [8:0] n_outliers;
  logic [15:0] overruns;
  logic signed [15:0] wm [NE][N];
  bit incl_m [NE][N];

  position_estimator #(.N_CNT(N), .N_EST(NE), .CNT_W(32)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #100000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic load_weights(bit empty_last);
    for (int e = 0; e < NE; e++)
      for (int k = 0; k < N; k++) begin
        int module_id;
        module_id = k / 4;
        // magnitude ~0.07 as in a unit 208-vector; sign by position
        wm[e][k] = 16'(($urandom_range(1800, 2400)) * (((k / 2) % 2) ? -1 : 1));
        case (e / 2)
          0: incl_m[e][k] = 1;
          1: incl_m[e][k] = (module_id % 2) == 1;
          default: incl_m[e][k] = (module_id % 2) == 0;
        endcase
        if (empty_last && e == NE - 1) incl_m[e][k] = 0;
        w_we = 1; w_est = 3'(e); w_cnt = 8'(k); w_weight = wm[e][k]; w_incl = incl_m[e][k];
        @(negedge clk);
      end
    w_we = 0;
  endtask

  task automatic make_counts(int n_bad);
    for (int k = 0; k < N; k++)
      counts[k] = k[0] ? 32'($urandom_range(2800, 3200)) : 32'($urandom_range(9500, 10500));
    for (int i = 0; i < n_bad; i++) begin
      int k;
      k = $urandom_range(0, N - 1);
      counts[k] = (i % 2) ? 32'd0 : counts[k] * 2;
    end
  endtask

  task automatic check_pass(int exp_lat, int lat);
    u64_t q[$];
    u64_t m[2];
    int nout;
    foreach (counts[k]) q.push_back(u64_t'(counts[k]));
    m[0] = ref_median(q, 0);
    m[1] = ref_median(q, 1);
    checks += 3;
    if (lat != exp_lat) begin failures++; $display("FAIL latency %0d expected %0d", lat, exp_lat); end
    if (med_inner != 32'(m[0]) || med_outer != 32'(m[1])) begin
      failures++; $display("FAIL medians %0d %0d", med_inner, med_outer);
    end
    nout = 0;
    for (int k = 0; k < N; k++) nout += ref_is_outlier(q[k], m[k % 2]);
    if (int'(n_outliers) != nout) begin failures++; $display("FAIL n_outliers %0d/%0d", n_outliers, nout); end
    for (int e = 0; e < NE; e++) begin
      longint num;
      u64_t den;
      int t;
      num = 0; den = 0;
      for (int k = 0; k < N; k++) begin
        u64_t c;
        c = ref_is_outlier(q[k], m[k % 2]) ? m[k % 2] : q[k];
        if (incl_m[e][k]) begin
          num += longint'(wm[e][k]) * longint'(c);
          den += c;
        end
      end
      t = ref_score(num, den);
      checks += 3;
      if (score[e] !== t) begin failures++; $display("FAIL score[%0d] %0d expected %0d", e, score[e], t); end
      if (pos[e] !== ref_calib(t, alpha[e], beta[e])) begin
        failures++; $display("FAIL pos[%0d] %0d expected %0d", e, pos[e], ref_calib(t, alpha[e], beta[e]));
      end
      if (div0[e] !== (den == 0)) begin failures++; $display("FAIL div0[%0d]", e); end
    end
  endtask

  task automatic run_pass(int n_bad, bit interrupt);
    int lat;
    make_counts(n_bad);
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    lat = 1;
    if (interrupt) begin
      repeat (300) @(negedge clk);
      make_counts(n_bad);
      start = 1;
      @(negedge clk) start = 0;
      lat = 1;
    end
    while (!valid) begin @(negedge clk); lat++; end
    check_pass(LATENCY, lat);
  endtask

  initial begin
    for (int e = 0; e < NE; e++) begin
      alpha[e] = 32'sd400000000 + e;
      beta[e]  = -32'sd1000 * e;
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    load_weights(0);
    run_pass(0, 0);
    run_pass(6, 0);
    run_pass(3, 1);
    checks++;
    if (overruns != 16'd1) begin failures++; $display("FAIL overruns %0d", overruns); end
    load_weights(1);
    run_pass(2, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
