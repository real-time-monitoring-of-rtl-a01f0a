// acc_window -- accumulation window controller.
//
// Counts collision events (one-cycle `evt` strobes from the readout, one per
// bunch crossing delivered to the counters) and closes the counting window
// after `win_events` events by pulsing `snap` in the cycle of the last event.
// The number of events in the closed window is held on `events_in_window`,
// and `windows` counts closed windows. A `win_events` of zero stops the
// windows; the event count is then held at zero.
//
// The paper accumulates counters over a fixed time (90 ms on the calibration
// fill, 1 ms expected in nominal running) and uses counts per event. Closing
// the window on an event count, which fixes the time for a fixed crossing
// rate, is this design's choice.
module acc_window #(
  parameter int unsigned EVT_W = 32
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             evt,
  input  logic [EVT_W-1:0] win_events,
  output logic             snap,
  output logic [EVT_W-1:0] events_in_window,
  output logic [EVT_W-1:0] windows
);

  logic [EVT_W-1:0] cnt_q;
  logic             last;

  assign last = evt && (win_events != '0) && (cnt_q + 1'b1 >= win_events);
  assign snap = last;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cnt_q            <= '0;
      events_in_window <= '0;
      windows          <= '0;
    end else if (win_events == '0) begin
      cnt_q <= '0;
    end else if (last) begin
      cnt_q            <= '0;
      events_in_window <= cnt_q + 1'b1;
      windows          <= windows + 1'b1;
    end else if (evt) begin
      cnt_q <= cnt_q + 1'b1;
    end
  end

endmodule
