// tb_cluster_counter_bank -- all 208 regions programmed through the
// configuration port, random clusters on every half-module, counts of each
// window checked on the counts array and on the read port.
module tb_cluster_counter_bank;
  import lrm_pkg::*;

  localparam int N_MOD = 52, LANES = 8, N_CNT = N_MOD * 4;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, snap = 0, cfg_we = 0, snap_done;
  logic [15:0] cfg_addr;
  logic [31:0] cfg_wdata;
  cluster_t clusters [N_MOD][LANES];
  logic [31:0] counts [N_CNT];
  logic [7:0]  rd_addr;
  logic [31:0] rd_data;
  region_t reg_model [N_CNT];
  longint  ref_cnt [N_CNT];

  cluster_counter_bank #(.N_MOD(N_MOD), .LANES(LANES), .CNT_W(32)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic cfg_write(int a, logic [31:0] d);
    cfg_we = 1; cfg_addr = 16'(a); cfg_wdata = d;
    @(negedge clk);
    cfg_we = 0;
  endtask

  initial begin
    for (int m = 0; m < N_MOD; m++) for (int l = 0; l < LANES; l++) clusters[m][l] = '0;
    rd_addr = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // regions: 110 columns x 20 rows; ring 0 near the beam, ring 1 further out
    for (int k = 0; k < N_CNT; k++) begin
      reg_model[k].enable = (k != 17);           // one region left disabled
      reg_model[k].sensor = 2'($urandom_range(0, 3));
      reg_model[k].col_lo = 10'($urandom_range(0, 40));
      reg_model[k].col_hi = reg_model[k].col_lo + 10'd109;
      reg_model[k].row_lo = 8'(k[0] ? 40 : 5);
      reg_model[k].row_hi = reg_model[k].row_lo + 8'd19;
      cfg_write(2 * k, {6'b0, reg_model[k].col_hi, 6'b0, reg_model[k].col_lo});
      cfg_write(2 * k + 1, {reg_model[k].enable, 13'b0, reg_model[k].sensor,
                            reg_model[k].row_hi, reg_model[k].row_lo});
    end
    cfg_write(16'h1000, 32'hFFFF_FFFF);          // not a region address
    for (int w = 0; w < 3; w++) begin
      foreach (ref_cnt[k]) ref_cnt[k] = 0;
      for (int c = 0; c < 30; c++) begin
        for (int m = 0; m < N_MOD; m++)
          for (int l = 0; l < LANES; l++) begin
            clusters[m][l].valid  = 1'($urandom_range(0, 1));
            clusters[m][l].sensor = 2'($urandom_range(0, 3));
            clusters[m][l].col    = 10'($urandom_range(0, 180));
            clusters[m][l].row    = 8'($urandom_range(0, 70));
            for (int r = 0; r < 4; r++) begin
              region_t g;
              cluster_t cl;
              g  = reg_model[4 * m + r];
              cl = clusters[m][l];
              if (cl.valid && g.enable && cl.sensor == g.sensor && cl.col >= g.col_lo &&
                  cl.col <= g.col_hi && cl.row >= g.row_lo && cl.row <= g.row_hi)
                ref_cnt[4 * m + r]++;
            end
          end
        snap = (c == 29);
        @(negedge clk);
      end
      snap = 0;
      for (int m = 0; m < N_MOD; m++) for (int l = 0; l < LANES; l++) clusters[m][l].valid = 0;
      @(negedge clk);
      checks++;
      if (!snap_done) begin failures++; $display("FAIL snap_done"); end
      for (int k = 0; k < N_CNT; k++) begin
        rd_addr = 8'(k);
        #1;
        checks += 2;
        if (longint'(counts[k]) != ref_cnt[k]) begin
          failures++;
          $display("FAIL w%0d counter %0d: %0d expected %0d", w, k, counts[k], ref_cnt[k]);
        end
        if (rd_data !== counts[k]) begin failures++; $display("FAIL read port %0d", k); end
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
