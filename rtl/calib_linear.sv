// calib_linear -- linear calibration from score to position.
//
// pos = floor(alpha * t / 2^T_FRAC) + beta, saturated to POS_W bits, where t
// is the normalised principal-component score in signed Q1.31 and alpha,
// beta are signed integers in the position unit chosen by whoever fits them
// (for instance 1 nm per LSB, giving a range of about +-2 m).
//
// Interface: `in_valid` with `t`, `alpha`, `beta`; `out_valid` and `pos` one
// clock edge later. One result per clock.
//
// The linear form x = alpha t + beta with constants from a fit to reference
// data is the paper's; the fixed-point format and saturation are this
// design's.
module calib_linear #(
  parameter int unsigned T_W    = lrm_pkg::T_W,
  parameter int unsigned T_FRAC = lrm_pkg::T_FRAC,
  parameter int unsigned CAL_W  = lrm_pkg::CAL_W,
  parameter int unsigned POS_W  = lrm_pkg::POS_W
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic signed [T_W-1:0]   t,
  input  logic signed [CAL_W-1:0] alpha,
  input  logic signed [CAL_W-1:0] beta,
  output logic                    out_valid,
  output logic signed [POS_W-1:0] pos
);

  localparam int unsigned P_W = T_W + CAL_W + 1;
  localparam logic signed [P_W-1:0] MAXV = P_W'({1'b0, {(POS_W-1){1'b1}}});
  localparam logic signed [P_W-1:0] MINV = -MAXV - 1;

  logic signed [P_W-1:0] prod, sum;

  always_comb begin
    prod = P_W'(alpha) * P_W'(t);
    sum  = (prod >>> T_FRAC) + P_W'(beta);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      pos       <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid)
        pos <= (sum > MAXV) ? POS_W'(MAXV) : (sum < MINV) ? POS_W'(MINV) : POS_W'(sum);
    end
  end

endmodule
