// tb_pca_score_mac -- random streams with random include bits; num and den
// checked against running sums, with done one edge after the last item.
module tb_pca_score_mac;
  localparam int N = 208;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, clear = 0, in_valid = 0, in_last = 0;
  logic [31:0] value;
  logic signed [15:0] weight;
  logic incl;
  logic signed [55:0] num;
  logic [39:0] den;
  logic done;

  pca_score_mac #(.N_CNT(N), .COUNT_W(32), .W_W(16)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int p = 0; p < 10; p++) begin
      longint rn;
      longint unsigned rd;
      rn = 0; rd = 0;
      clear = 1;
      @(negedge clk);
      clear = 0;
      for (int k = 0; k < N; k++) begin
        value    = (p == 0) ? 32'hFFFF_FFFF : $urandom;
        weight   = (p == 0) ? 16'sh8000 : 16'($urandom);
        incl     = (p == 0) ? 1'b1 : 1'($urandom_range(0, 3) != 0);
        in_valid = ($urandom_range(0, 4) != 0) || (k == N - 1);
        in_last  = (k == N - 1);
        if (in_valid && incl) begin
          rn += longint'(weight) * longint'({1'b0, value});
          rd += longint'(value);
        end
        if (!in_valid) k--;
        @(negedge clk);
        if (in_valid && !in_last) begin
          checks++;
          if (done) begin failures++; $display("FAIL early done"); end
        end
      end
      in_valid = 0;
      in_last  = 0;
      checks += 3;
      if (!done) begin failures++; $display("FAIL done missing"); end
      if (num !== 56'(rn)) begin failures++; $display("FAIL num %0d expected %0d", num, rn); end
      if (den !== 40'(rd)) begin failures++; $display("FAIL den %0d expected %0d", den, rd); end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
