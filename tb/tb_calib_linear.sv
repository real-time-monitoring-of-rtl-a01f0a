// tb_calib_linear -- alpha*t/2^31 + beta against a 64-bit model, including
// saturation, and the one-cycle latency.
module tb_calib_linear;
  import lrm_ref_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, in_valid = 0;
  logic signed [31:0] t, alpha, beta, pos;
  logic out_valid;

  calib_linear dut (.*);

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(int tt, int a, int b);
    t = tt; alpha = a; beta = b;
    in_valid = 1;
    @(negedge clk);
    in_valid = 0;
    checks += 2;
    if (!out_valid) begin failures++; $display("FAIL out_valid"); end
    if (pos !== ref_calib(tt, a, b)) begin
      failures++;
      $display("FAIL t=%0d a=%0d b=%0d pos=%0d expected %0d", tt, a, b, pos, ref_calib(tt, a, b));
    end
    @(negedge clk);
    checks++;
    if (out_valid) begin failures++; $display("FAIL out_valid held"); end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(32'sh4000_0000, 1000, 5);          // 0.5 * 1000 + 5
    run(-32'sh4000_0000, 1000, 5);
    run(32'sh7FFF_FFFF, 32'sh7FFF_FFFF, 32'sh7FFF_FFFF);   // saturates high
    run(32'sh7FFF_FFFF, 32'sh8000_0000, 32'sh8000_0000);   // saturates low
    for (int i = 0; i < 500; i++) run($urandom, $urandom, $urandom);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
