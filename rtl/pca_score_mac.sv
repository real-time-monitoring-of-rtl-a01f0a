// pca_score_mac -- projection of the counter vector on a weight vector.
//
// Accumulates, over a stream of (counter value, weight, include bit) triples,
//   num = sum over included counters of weight * value   (signed)
//   den = sum over included counters of value            (unsigned)
// The principal-component score of the normalised counter vector is then
// num / den (formed by seq_divider): the paper normalises each counter to the
// sum of the counters before taking the scalar product with the weights, and
// since that sum is common to all terms the division is done once at the end.
// Dividing both by the number of events, as in "mean count per event",
// cancels and is therefore not done.
//
// Interface: pulse `clear` before a pass; then present one triple per cycle
// with `in_valid`, marking the final one with `in_last`. `num`/`den` are
// final, and `done` pulses, on the clock edge after the last triple.
// One multiply-add per clock; no stall.
//
// The scalar product t = c . w and the normalisation are the paper's; the
// streaming form, the widths and the deferred division are this design's.
module pca_score_mac #(
  parameter int unsigned N_CNT   = lrm_pkg::N_COUNTERS,
  parameter int unsigned COUNT_W = lrm_pkg::COUNT_W,
  parameter int unsigned W_W     = lrm_pkg::W_W,
  localparam int unsigned NUM_W  = COUNT_W + W_W + $clog2(N_CNT),
  localparam int unsigned DEN_W  = COUNT_W + $clog2(N_CNT)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    clear,
  input  logic                    in_valid,
  input  logic                    in_last,
  input  logic [COUNT_W-1:0]      value,
  input  logic signed [W_W-1:0]   weight,
  input  logic                    incl,
  output logic signed [NUM_W-1:0] num,
  output logic [DEN_W-1:0]        den,
  output logic                    done
);

  logic signed [COUNT_W+W_W:0] prod;

  assign prod = $signed({1'b0, value}) * weight;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      num  <= '0;
      den  <= '0;
      done <= 1'b0;
    end else begin
      done <= in_valid && in_last && !clear;
      if (clear) begin
        num <= '0;
        den <= '0;
      end else if (in_valid && incl) begin
        num <= num + NUM_W'(prod);
        den <= den + DEN_W'(value);
      end
    end
  end

endmodule
