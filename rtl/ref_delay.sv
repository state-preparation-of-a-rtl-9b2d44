// ref_delay -- programmable sample delay for the reference stream.
//
// The reference branch of the readout signal reaches the ADC over a shorter
// cable than the branch that passes through the cryostat. Before the two are
// multiplied, the reference is delayed by a calibrated number of samples so
// that both streams line up (the delaying of the reference, set by an initial
// calibration, follows the paper; the range and structure are this design's).
//
// How it works: the last NW-1 input words are kept in a shift register. Taken
// together with the current word they form a window of NW*SPC consecutive
// samples, and output lane l picks the sample that is `delay` samples older
// than input lane l. Any delay from 0 to MAX_DELAY samples is possible.
//
// Interface: din/dout carry SPC samples per clock, lane 0 the oldest.
// `delay` is a quasi-static setting; after it changes, the output is valid
// once the shift register has refilled.
// Timing: dout is registered; total latency is `delay` samples plus one clock.
module ref_delay #(
  parameter int unsigned SPC       = qc_pkg::SPC,
  parameter int unsigned W         = qc_pkg::ADC_W,
  parameter int unsigned MAX_DELAY = 64,
  localparam int unsigned DW       = $clog2(MAX_DELAY + 1)
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic [DW-1:0]           delay,
  input  logic [SPC-1:0][W-1:0]   din,
  output logic [SPC-1:0][W-1:0]   dout
);
  // Number of words in the window (current word included).
  localparam int unsigned NW = (MAX_DELAY + SPC - 1) / SPC + 1;

  logic [NW-2:0][SPC-1:0][W-1:0] hist_q;   // hist_q[0] = previous word
  logic [NW-1:0][SPC-1:0][W-1:0] window;   // window[0] = current word

  always_ff @(posedge clk) begin
    if (rst) hist_q <= '0;
    else begin
      hist_q[0] <= din;
      for (int i = 1; i < NW - 1; i++) hist_q[i] <= hist_q[i-1];
    end
  end

  assign window = {hist_q, din};

  // Sample k of the flat window, counted backwards in time from the newest
  // sample (lane SPC-1 of the current word, k = 0).
  function automatic logic [W-1:0] pick(input logic [NW-1:0][SPC-1:0][W-1:0] w,
                                        input int unsigned k);
    int unsigned word, lane;
    word = k / SPC;
    lane = SPC - 1 - (k % SPC);
    return w[word][lane];
  endfunction

  always_ff @(posedge clk) begin
    if (rst) dout <= '0;
    else begin
      for (int l = 0; l < SPC; l++) begin
        // Clamp keeps out-of-range settings inside the window.
        dout[l] <= pick(window, (SPC - 1 - l) + ((delay > DW'(MAX_DELAY)) ? MAX_DELAY : int'(delay)));
      end
    end
  end

endmodule
