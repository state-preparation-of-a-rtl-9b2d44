// state_discriminator -- linear classifier that turns an (I,Q) pair into a
// qubit state estimate.
//
// The paper separates the IQ plane into two half-planes with a line found by
// linear discriminant analysis; one half-plane means |0>, the other |1>.
// This block evaluates that line in hardware: it reports state = 1 when
//     w_i*I + w_q*Q + bias > 0
// and state = 0 otherwise. Finding the coefficients (the analysis itself) is
// left to calibration software; the coefficient widths, the sign convention
// and the two-stage pipeline are this design's choices.
//
// Interface: i_in/q_in/tag_in are taken when valid_in is high; the same I, Q
// and tag come out with the decision so that later stages (the histogram,
// the host) see the pair that was classified.
// Timing: 2 clocks from valid_in to valid_out, one result per clock. The
// coefficients are sampled together with I and Q, so they may change between
// results.
module state_discriminator #(
  parameter int unsigned ACC_W  = qc_pkg::ACC_W,
  parameter int unsigned COEF_W = qc_pkg::COEF_W,
  parameter int unsigned BIAS_W = qc_pkg::BIAS_W
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     valid_in,
  input  logic signed [ACC_W-1:0]  i_in,
  input  logic signed [ACC_W-1:0]  q_in,
  input  logic                     tag_in,
  input  logic signed [COEF_W-1:0] w_i,
  input  logic signed [COEF_W-1:0] w_q,
  input  logic signed [BIAS_W-1:0] bias,
  output logic                     valid_out,
  output logic                     state,
  output logic signed [ACC_W-1:0]  i_out,
  output logic signed [ACC_W-1:0]  q_out,
  output logic                     tag_out
);
  localparam int unsigned PW = ACC_W + COEF_W;
  localparam int unsigned SW = ((PW + 1) > BIAS_W ? (PW + 1) : BIAS_W) + 1;

  // Stage 1: products.
  logic                    v1, tag1;
  logic signed [PW-1:0]    pi1, pq1;
  logic signed [ACC_W-1:0] i1, q1;
  logic signed [BIAS_W-1:0] b1;

  always_ff @(posedge clk) begin
    if (rst) begin
      v1 <= 1'b0; tag1 <= 1'b0; pi1 <= '0; pq1 <= '0; i1 <= '0; q1 <= '0; b1 <= '0;
    end else begin
      v1   <= valid_in;
      tag1 <= tag_in;
      i1   <= i_in;
      q1   <= q_in;
      pi1  <= i_in * w_i;
      pq1  <= q_in * w_q;
      b1   <= bias;
    end
  end

  // Stage 2: sum and sign.
  logic signed [SW-1:0] score;
  assign score = SW'(pi1) + SW'(pq1) + SW'(b1);

  always_ff @(posedge clk) begin
    if (rst) begin
      valid_out <= 1'b0; state <= 1'b0; i_out <= '0; q_out <= '0; tag_out <= 1'b0;
    end else begin
      valid_out <= v1;
      state     <= (score > 0);
      i_out     <= i1;
      q_out     <= q1;
      tag_out   <= tag1;
    end
  end

endmodule
