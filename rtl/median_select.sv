// median_select -- medians of the inner and of the outer counters.
//
// The input array holds N counters interleaved by ring: even indices are
// inner-region counters, odd indices outer-region counters. The unit returns
// the median of each ring. With an even number of values per ring (104 in the
// full detector) it returns the lower median, the value of rank
// (N/2 - 1)/2 counting from 0 in ascending order.
//
// How: a rank-counting selection. In scan step p the candidates are value
// 2p (inner) and value 2p+1 (outer). Each is compared in parallel with every
// value of its ring, giving the number of smaller and of equal values; the
// candidate is the median when less <= M < less + equal. The scan takes N/2
// clock cycles and needs no sorting network.
//
// Interface: pulse `start` for one cycle with `vals` stable until `done`.
// `done` pulses N/2 + 1 cycles after `start`; `med_inner`/`med_outer` are
// valid from then until the next `start`. A `start` while busy restarts.
//
// The use of a per-ring median is the paper's; the lower median for even
// counts and the scan architecture are this design's.
module median_select #(
  parameter int unsigned N = lrm_pkg::N_COUNTERS,
  parameter int unsigned W = lrm_pkg::COUNT_W
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [W-1:0] vals [N],
  output logic [W-1:0] med_inner,
  output logic [W-1:0] med_outer,
  output logic         done,
  output logic         busy
);

  localparam int unsigned NH  = N / 2;
  localparam int unsigned M   = (NH - 1) / 2;
  localparam int unsigned PW  = (NH > 1) ? $clog2(NH) : 1;
  localparam int unsigned RW  = $clog2(NH + 1);

  logic [PW-1:0] p_q;
  logic          found_q [2];
  logic [W-1:0]  med_q   [2];
  logic          is_med  [2];
  logic [W-1:0]  cand    [2];

  always_comb begin
    for (int c = 0; c < 2; c++) begin
      logic [RW-1:0] less, eq;
      cand[c] = vals[2*p_q + c];
      less = '0;
      eq   = '0;
      for (int i = 0; i < NH; i++) begin
        less = less + RW'(vals[2*i + c] <  cand[c]);
        eq   = eq   + RW'(vals[2*i + c] == cand[c]);
      end
      is_med[c] = (int'(less) <= M) && (M < int'(less) + int'(eq));
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      p_q  <= '0;
      for (int c = 0; c < 2; c++) begin
        found_q[c] <= 1'b0;
        med_q[c]   <= '0;
      end
    end else begin
      done <= 1'b0;
      if (start) begin
        busy <= 1'b1;
        p_q  <= '0;
        for (int c = 0; c < 2; c++) found_q[c] <= 1'b0;
      end else if (busy) begin
        for (int c = 0; c < 2; c++)
          if (!found_q[c] && is_med[c]) begin
            found_q[c] <= 1'b1;
            med_q[c]   <= cand[c];
          end
        if (int'(p_q) == NH - 1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end else begin
          p_q <= p_q + 1'b1;
        end
      end
    end
  end

  assign med_inner = med_q[0];
  assign med_outer = med_q[1];

endmodule
