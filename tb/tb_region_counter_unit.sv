// tb_region_counter_unit -- random clusters against four random regions;
// counts checked after every window with the two-edge snapshot latency, and
// saturation checked on a second, 4-bit instance.
module tb_region_counter_unit;
  import lrm_pkg::*;

  localparam int LANES = 8;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, snap = 0;
  cluster_t clusters [LANES];
  region_t  regions  [CNT_PER_MOD];
  logic [31:0] counts [CNT_PER_MOD];
  logic [3:0]  counts4 [CNT_PER_MOD];
  logic snap_done, snap_done4;
  longint ref_cnt [CNT_PER_MOD];
  longint ref_snap [CNT_PER_MOD];

  region_counter_unit #(.LANES(LANES), .CNT_W(32)) dut (
    .clk, .rst_n, .clusters, .regions, .snap, .counts, .snap_done);
  region_counter_unit #(.LANES(LANES), .CNT_W(4)) dut4 (
    .clk, .rst_n, .clusters, .regions, .snap, .counts(counts4), .snap_done(snap_done4));

  always #5 clk = ~clk;

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic bit hit(region_t r, cluster_t c);
    return c.valid && r.enable && c.sensor == r.sensor &&
           int'(c.col) >= int'(r.col_lo) && int'(c.col) <= int'(r.col_hi) &&
           int'(c.row) >= int'(r.row_lo) && int'(c.row) <= int'(r.row_hi);
  endfunction

  task automatic drive_random();
    for (int l = 0; l < LANES; l++) begin
      clusters[l].valid  = ($urandom_range(0, 3) != 0);
      clusters[l].sensor = 2'($urandom_range(0, 3));
      clusters[l].col    = 10'($urandom_range(0, 200));
      clusters[l].row    = 8'($urandom_range(0, 60));
    end
  endtask

  initial begin
    for (int l = 0; l < LANES; l++) clusters[l] = '0;
    for (int r = 0; r < CNT_PER_MOD; r++) begin
      regions[r].enable = (r != 3) || 1'b1;
      regions[r].sensor = 2'(r);
      regions[r].col_lo = 10'(20 * r);
      regions[r].col_hi = 10'(20 * r + 109);
      regions[r].row_lo = 8'(10 + r);
      regions[r].row_hi = 8'(10 + r + 19);
      ref_cnt[r] = 0;
    end
    regions[1].sensor = 2'd0;    // two regions on the same sensor
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int w = 0; w < 12; w++) begin
      int len;
      len = $urandom_range(1, 40);
      if (w == 6) regions[3].enable = 1'b0;
      for (int c = 0; c < len; c++) begin
        drive_random();
        snap = (c == len - 1);
        for (int r = 0; r < CNT_PER_MOD; r++)
          for (int l = 0; l < LANES; l++) ref_cnt[r] += hit(regions[r], clusters[l]);
        if (snap) for (int r = 0; r < CNT_PER_MOD; r++) begin
          ref_snap[r] = ref_cnt[r];
          ref_cnt[r]  = 0;
        end
        @(negedge clk);
        checks++;
        if (snap_done) begin failures++; $display("FAIL early snap_done"); end
      end
      snap = 0;
      for (int l = 0; l < LANES; l++) clusters[l].valid = 1'b0;
      @(negedge clk);
      checks++;
      if (!snap_done) begin failures++; $display("FAIL snap_done latency"); end
      for (int r = 0; r < CNT_PER_MOD; r++) begin
        checks++;
        if (longint'(counts[r]) != ref_snap[r]) begin
          failures++;
          $display("FAIL window %0d region %0d: %0d expected %0d", w, r, counts[r], ref_snap[r]);
        end
        checks++;
        if (longint'(counts4[r]) != ((ref_snap[r] > 15) ? 15 : ref_snap[r])) begin
          failures++;
          $display("FAIL sat window %0d region %0d: %0d (ref %0d)", w, r, counts4[r], ref_snap[r]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
