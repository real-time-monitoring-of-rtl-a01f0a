// tb_weight_memory -- random writes over the whole array, read back with the
// one-cycle read latency; out-of-range writes must not alter the contents.
module tb_weight_memory;
  localparam int N_EST = 6, N_CNT = 208;
  int checks = 0, failures = 0;
  logic clk = 0, we = 0, wr_incl, rd_incl;
  logic [2:0] wr_est, rd_est;
  logic [7:0] wr_cnt, rd_cnt;
  logic signed [15:0] wr_weight, rd_weight;
  logic [16:0] model [N_EST][N_CNT];

  weight_memory #(.N_EST(N_EST), .N_CNT(N_CNT), .W_W(16)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rd_est = 0; rd_cnt = 0;
    @(negedge clk);
    for (int e = 0; e < N_EST; e++)
      for (int k = 0; k < N_CNT; k++) begin
        we = 1; wr_est = 3'(e); wr_cnt = 8'(k);
        wr_weight = 16'($urandom); wr_incl = 1'($urandom);
        model[e][k] = {wr_incl, wr_weight};
        @(negedge clk);
      end
    // writes outside the array are ignored
    we = 1; wr_est = 3'd6; wr_cnt = 8'd0; wr_weight = 16'h1234; wr_incl = 1; @(negedge clk);
    we = 1; wr_est = 3'd0; wr_cnt = 8'd208; @(negedge clk);
    we = 0;
    for (int i = 0; i < 3000; i++) begin
      int e, k;
      e = $urandom_range(0, N_EST - 1);
      k = $urandom_range(0, N_CNT - 1);
      rd_est = 3'(e); rd_cnt = 8'(k);
      @(negedge clk);
      checks++;
      if ({rd_incl, rd_weight} !== model[e][k]) begin
        failures++;
        $display("FAIL e=%0d k=%0d got %h expected %h", e, k, {rd_incl, rd_weight}, model[e][k]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
