// tb_acc_window -- window closing after a programmed number of events, the
// held event count, window counting, reprogramming and the stop setting.
module tb_acc_window;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, evt = 0;
  logic [31:0] win_events = 0, events_in_window, windows;
  logic snap;
  int ev = 0, nwin = 0;

  acc_window #(.EVT_W(32)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #3000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    // stopped: no snap whatever the events
    for (int c = 0; c < 50; c++) begin
      evt = 1'($urandom_range(0, 1));
      #1;
      checks++;
      if (snap) begin failures++; $display("FAIL snap while stopped"); end
      @(negedge clk);
    end
    for (int p = 0; p < 4; p++) begin
      int n;
      n = (p == 0) ? 1 : $urandom_range(2, 20);
      evt = 0;
      win_events = 0;          // stopping clears the partial count
      @(negedge clk);
      win_events = 32'(n);
      ev = 0;
      @(negedge clk);
      for (int c = 0; c < 400; c++) begin
        bit exp_snap;
        evt = 1'($urandom_range(0, 2) == 0);
        exp_snap = evt && (ev + 1 == n);
        #1;
        checks++;
        if (snap !== exp_snap) begin
          failures++;
          $display("FAIL period %0d cycle %0d snap=%0b expected %0b", n, c, snap, exp_snap);
        end
        @(negedge clk);
        if (evt) ev++;
        if (exp_snap) begin
          ev = 0;
          nwin++;
          checks += 2;
          if (events_in_window != 32'(n)) begin failures++; $display("FAIL events_in_window"); end
          if (windows != 32'(nwin)) begin failures++; $display("FAIL windows %0d/%0d", windows, nwin); end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
