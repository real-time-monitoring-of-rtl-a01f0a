// weight_memory -- storage of the principal-component weight vectors.
//
// Holds, for each of N_EST estimators, one weight per counter (signed Q1.15,
// the first principal-component vector of that estimator) and an include bit
// that selects the counters the estimator uses. The full-detector x and y
// estimators include all counters; the one-half (A-side or C-side)
// estimators include only the counters of that half.
//
// One write port and one read port, both synchronous: read data appear on the
// clock edge after the address. The array is a plain memory (no reset); it
// must be written before use. Writes outside the array are ignored.
//
// Weight vectors precomputed offline and applied per counter are the paper's;
// the word layout, the include bit and the Q1.15 format are this design's.
module weight_memory #(
  parameter int unsigned N_EST = 6,
  parameter int unsigned N_CNT = lrm_pkg::N_COUNTERS,
  parameter int unsigned W_W   = lrm_pkg::W_W,
  localparam int unsigned E_W  = (N_EST > 1) ? $clog2(N_EST) : 1,
  localparam int unsigned K_W  = $clog2(N_CNT)
) (
  input  logic                  clk,
  input  logic                  we,
  input  logic [E_W-1:0]        wr_est,
  input  logic [K_W-1:0]        wr_cnt,
  input  logic signed [W_W-1:0] wr_weight,
  input  logic                  wr_incl,
  input  logic [E_W-1:0]        rd_est,
  input  logic [K_W-1:0]        rd_cnt,
  output logic signed [W_W-1:0] rd_weight,
  output logic                  rd_incl
);

  logic [W_W:0] mem [N_EST * N_CNT];

  always_ff @(posedge clk) begin
    if (we && int'(wr_est) < N_EST && int'(wr_cnt) < N_CNT)
      mem[int'(wr_est) * N_CNT + int'(wr_cnt)] <= {wr_incl, wr_weight};
    {rd_incl, rd_weight} <= mem[int'(rd_est) * N_CNT + int'(rd_cnt)];
  end

endmodule
