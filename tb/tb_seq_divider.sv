// tb_seq_divider -- random signed divisions against a 128-bit model, with
// saturation, division by zero and the A_W + 1 cycle latency checked.
module tb_seq_divider;
  import lrm_ref_pkg::*;

  localparam int NUM_W = 56, DEN_W = 40, SHIFT = 16;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, start = 0;
  logic signed [NUM_W-1:0] num;
  logic [DEN_W-1:0] den;
  logic signed [31:0] q;
  logic div0, done, busy;

  seq_divider #(.NUM_W(NUM_W), .DEN_W(DEN_W), .SHIFT(SHIFT), .Q_W(32)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(longint n, longint unsigned d);
    int lat;
    num = NUM_W'(n);
    den = DEN_W'(d);
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    num = '0;
    den = '0;
    lat = 1;
    while (!done) begin @(negedge clk); lat++; end
    checks += 3;
    if (lat != NUM_W + SHIFT + 1) begin failures++; $display("FAIL latency %0d", lat); end
    if (q !== ref_score(n, d)) begin
      failures++;
      $display("FAIL %0d / %0d: q=%0d expected %0d", n, d, q, ref_score(n, d));
    end
    if (div0 !== (d == 0)) begin failures++; $display("FAIL div0"); end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(0, 5);
    run(7, 0);
    run(-12345, 1000);
    run(longint'(32767) * 1000, 1000);        // weight +32767/32768
    run(-longint'(32768) * 1000, 1000);       // weight -1: saturates negative
    run(longint'(40000) * 1000, 1000);        // beyond range: saturates positive
    for (int i = 0; i < 300; i++) begin
      longint unsigned d;
      longint n;
      d = {$urandom_range(0, 255), $urandom} + 1;
      n = longint'($signed({$urandom, $urandom})) >>> $urandom_range(9, 40);
      run(n, d);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
