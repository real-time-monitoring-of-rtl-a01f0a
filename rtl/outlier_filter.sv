// outlier_filter -- median-based replacement of faulty counter values.
//
// A counter value c is accepted if it lies within the median m plus or minus
// 50 %, bounds included; otherwise it is flagged and replaced by m. For
// integer c the test m - floor(m/2) <= c <= m + floor(m/2) is exactly
// |c - m| <= m/2. Purely combinational.
//
// The rule (median of the counters of the same ring, +-50 %, replace by the
// median) is the paper's; the integer form of the bounds is this design's.
module outlier_filter #(
  parameter int unsigned W = lrm_pkg::COUNT_W
) (
  input  logic [W-1:0] value,
  input  logic [W-1:0] median,
  output logic [W-1:0] filtered,
  output logic         outlier
);

  logic [W:0] half, lo, hi;

  always_comb begin
    half     = {1'b0, median >> 1};
    lo       = {1'b0, median} - half;
    hi       = {1'b0, median} + half;
    outlier  = ({1'b0, value} < lo) || ({1'b0, value} > hi);
    filtered = outlier ? median : value;
  end

endmodule
