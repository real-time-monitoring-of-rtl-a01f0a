// seq_divider -- signed fixed-point divider for the normalised score.
//
// Computes q = trunc(num * 2^SHIFT / den) for a signed dividend and an
// unsigned divisor, saturated to a signed Q_W-bit result. With weights in
// Q1.15 and SHIFT = 16 the quotient is the score in Q1.31.
//
// How: restoring long division on the magnitude, one quotient bit per clock,
// A_W = NUM_W + SHIFT cycles in total, then the sign is applied and the result
// saturated. A zero divisor gives q = 0 with `div0` set.
//
// Interface: pulse `start` with the operands valid in that cycle (they are
// captured). `done` pulses A_W + 1 clock edges after `start`; `q` and `div0`
// hold until the next `start`. A `start` while busy restarts.
//
// Normalisation by the counter sum is the paper's; the division method,
// rounding toward zero and saturation are this design's choices.
module seq_divider #(
  parameter int unsigned NUM_W = 56,
  parameter int unsigned DEN_W = 40,
  parameter int unsigned SHIFT = 16,
  parameter int unsigned Q_W   = lrm_pkg::T_W
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  input  logic signed [NUM_W-1:0] num,
  input  logic [DEN_W-1:0]        den,
  output logic signed [Q_W-1:0]   q,
  output logic                    div0,
  output logic                    done,
  output logic                    busy
);

  localparam int unsigned A_W  = NUM_W + SHIFT;
  localparam int unsigned C_W  = $clog2(A_W + 1);
  localparam logic [A_W-1:0] POS_MAX = A_W'({1'b0, {(Q_W-1){1'b1}}});
  localparam logic [A_W-1:0] NEG_MAX = A_W'({1'b1, {(Q_W-1){1'b0}}});

  logic [A_W-1:0]   a_q, quo_q;
  logic [DEN_W:0]   rem_q;
  logic [DEN_W-1:0] den_q;
  logic             neg_q;
  logic [C_W-1:0]   cnt_q;

  logic [DEN_W:0]   rem_sh;
  logic             qbit;
  logic [NUM_W-1:0] mag;

  assign mag    = num[NUM_W-1] ? NUM_W'(-num) : NUM_W'(num);
  assign rem_sh = {rem_q[DEN_W-1:0], a_q[A_W-1]};
  assign qbit   = rem_sh >= {1'b0, den_q};

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      done  <= 1'b0;
      q     <= '0;
      div0  <= 1'b0;
      a_q   <= '0;
      quo_q <= '0;
      rem_q <= '0;
      den_q <= '0;
      neg_q <= 1'b0;
      cnt_q <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        busy  <= 1'b1;
        a_q   <= {mag, {SHIFT{1'b0}}};
        quo_q <= '0;
        rem_q <= '0;
        den_q <= den;
        neg_q <= num[NUM_W-1];
        cnt_q <= '0;
      end else if (busy) begin
        rem_q <= qbit ? rem_sh - {1'b0, den_q} : rem_sh;
        quo_q <= {quo_q[A_W-2:0], qbit};
        a_q   <= a_q << 1;
        if (int'(cnt_q) == A_W - 1) begin
          logic [A_W-1:0] mq;
          busy <= 1'b0;
          done <= 1'b1;
          mq   = {quo_q[A_W-2:0], qbit};
          if (den_q == '0) begin
            q    <= '0;
            div0 <= 1'b1;
          end else begin
            div0 <= 1'b0;
            if (!neg_q) q <= (mq > POS_MAX) ? Q_W'(POS_MAX) : Q_W'(mq);
            else        q <= (mq > NEG_MAX) ? Q_W'(NEG_MAX) : Q_W'(-mq);
          end
        end else begin
          cnt_q <= cnt_q + 1'b1;
        end
      end
    end
  end

endmodule
