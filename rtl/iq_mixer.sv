// iq_mixer -- point-wise products that demodulate the readout signal.
//
// The readout signal is mixed with the (delay-aligned) reference copy of the
// same readout pulse. The product signal[n]*reference[n] is the in-phase
// contribution; for the quadrature contribution the reference is first
// shifted by a quarter period. At a 62.5 MHz intermediate frequency and
// 500 MSPS a quarter period is exactly Q_SHIFT = 2 samples, which is the
// scheme the paper describes. That the shift is a delay (reference[n-2]) rather
// than an advance is this design's choice; it keeps the block causal.
//
// How it works: the last word of the reference is kept so that lanes whose
// shifted sample falls in the previous clock word can reach it. All 2*SPC
// signed multiplications happen in parallel and are registered once.
//
// Interface: sig/ref_s carry SPC signed samples per clock (lane 0 oldest);
// prod_i/prod_q carry SPC signed products of 2*W bits.
// Timing: one clock from input to products, full rate, no stall.
module iq_mixer #(
  parameter int unsigned SPC     = qc_pkg::SPC,
  parameter int unsigned W       = qc_pkg::ADC_W,
  parameter int unsigned Q_SHIFT = 2
) (
  input  logic                      clk,
  input  logic                      rst,
  input  logic [SPC-1:0][W-1:0]     sig,
  input  logic [SPC-1:0][W-1:0]     ref_s,
  output logic [SPC-1:0][2*W-1:0]   prod_i,
  output logic [SPC-1:0][2*W-1:0]   prod_q
);
  logic [SPC-1:0][W-1:0]   ref_prev;
  logic [2*SPC-1:0][W-1:0] ref_two;   // {current word, previous word}
  logic [SPC-1:0][W-1:0]   ref_shift; // reference delayed by Q_SHIFT samples

  always_ff @(posedge clk) begin
    if (rst) ref_prev <= '0;
    else     ref_prev <= ref_s;
  end

  assign ref_two = {ref_s, ref_prev};

  always_comb begin
    for (int l = 0; l < SPC; l++) ref_shift[l] = ref_two[SPC + l - Q_SHIFT];
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      prod_i <= '0;
      prod_q <= '0;
    end else begin
      for (int l = 0; l < SPC; l++) begin
        prod_i[l] <= $signed(sig[l]) * $signed(ref_s[l]);
        prod_q[l] <= $signed(sig[l]) * $signed(ref_shift[l]);
      end
    end
  end

  initial assert (Q_SHIFT <= SPC) else $error("Q_SHIFT must not exceed SPC");

endmodule
