// tb_outlier_filter -- random and corner-case check of the +-50 % median rule.
module tb_outlier_filter;
  import lrm_ref_pkg::*;

  int checks = 0, failures = 0;
  logic [31:0] value, median, filtered;
  logic        outlier;

  outlier_filter #(.W(32)) dut (.value, .median, .filtered, .outlier);

  task automatic try(longint unsigned v, longint unsigned m);
    bit exp_o;
    value  = 32'(v);
    median = 32'(m);
    #1;
    exp_o = ref_is_outlier(v, m);
    checks++;
    if (outlier !== exp_o || filtered !== (exp_o ? median : value)) begin
      failures++;
      $display("FAIL v=%0d m=%0d outlier=%0b filtered=%0d", v, m, outlier, filtered);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int m = 0; m < 12; m++)
      for (int v = 0; v < 20; v++) try(v, m);
    try(32'hFFFF_FFFF, 32'hFFFF_FFFF);
    try(32'hFFFF_FFFF, 32'hAAAA_AAAA);
    try(0, 32'hFFFF_FFFF);
    for (int i = 0; i < 2000; i++) begin
      longint unsigned m = $urandom_range(1, 100000);
      try($urandom_range(0, 200000), m);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
