// tb_median_select -- medians of random counter sets against a sorting model,
// with the N/2 + 1 cycle latency checked.
module tb_median_select;
  import lrm_ref_pkg::*;

  localparam int N = 208;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, start = 0;
  logic [31:0] vals [N];
  logic [31:0] med_inner, med_outer;
  logic done, busy;

  median_select #(.N(N), .W(32)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(int mode);
    u64_t q[$];
    int lat;
    for (int i = 0; i < N; i++) begin
      case (mode)
        0: vals[i] = $urandom;
        1: vals[i] = $urandom_range(0, 5);             // many ties
        2: vals[i] = (i % 2) ? 32'd1000 + $urandom_range(0, 50) : $urandom_range(10, 20);
        default: vals[i] = 32'(i);                     // sorted input
      endcase
      q.push_back(u64_t'(vals[i]));
    end
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    lat = 1;
    while (!done) begin
      @(negedge clk);
      lat++;
    end
    checks++;
    if (lat != N / 2 + 1) begin
      failures++;
      $display("FAIL latency %0d", lat);
    end
    checks++;
    if (med_inner != 32'(ref_median(q, 0)) || med_outer != 32'(ref_median(q, 1))) begin
      failures++;
      $display("FAIL mode %0d: got %0d/%0d expected %0d/%0d", mode, med_inner, med_outer,
               ref_median(q, 0), ref_median(q, 1));
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < 20; r++) run(r % 4);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
