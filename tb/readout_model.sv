// readout_model -- behavioural stand-in for the analog loop of the readout
// (not synthesizable): up-conversion, splitter, cryostat with a dispersively
// coupled qubit, down-conversion and the ADCs.
//
// The readout DAC's I samples (14-bit) are scaled to 12 bits and come back on
// two ADC streams. The reference stream is that waveform delayed by REF_LAT
// samples. The signal stream is delayed by a further CABLE samples and changed
// by the qubit-dependent cavity response
//     sig[n] = (a_s * x[n] + b_s * x[n-2]) / 256 + noise,
// where x is the delayed readout waveform and (a_s, b_s) depends on the qubit
// state s; at a 62.5 MHz carrier x[n-2] is x shifted by a quarter period, so
// (a_s, b_s) sets the amplitude and phase of the response and thus where the
// single shot lands in the IQ plane. The qubit is a classical two-state
// variable: `prepare` sets it (thermal population drawn by the testbench),
// and the end of every drive pulse (a pi pulse) flips it.
module readout_model #(
  parameter int SPC    = 4,
  parameter int REF_LAT = 40,   // samples from DAC to reference ADC
  parameter int CABLE   = 13,   // extra samples on the signal path
  parameter int NOISE   = 64    // uniform noise amplitude, ADC codes
) (
  input  logic                  clk,
  input  logic [SPC-1:0][13:0]  dac_ro_i,
  input  logic                  drv_active,
  input  logic                  prepare,
  input  logic                  prepare_state,
  output logic [SPC-1:0][11:0]  adc_sig,
  output logic [SPC-1:0][11:0]  adc_ref,
  output logic                  qubit
);
  localparam int HN = 4096;                 // history ring (samples)
  int hist [HN];
  longint n = 0;                            // absolute index of lane 0
  logic drv_q = 0;
  // cavity response per state, in 1/256 units
  localparam int A0 = 55,  B0 = 110;        // |0>
  localparam int A1 = 105, B1 = 30;         // |1>

  initial begin
    foreach (hist[k]) hist[k] = 0;
    qubit = 0;
    adc_sig = '0;
    adc_ref = '0;
  end

  function automatic int x_at(input longint k);
    if (k < 0) return 0;
    return hist[int'(k % HN)];
  endfunction

  always @(posedge clk) begin
    // qubit
    drv_q <= drv_active;
    if (prepare) qubit <= prepare_state;
    else if (drv_q && !drv_active) qubit <= ~qubit;
    // record DAC samples (14 -> 12 bits)
    for (int l = 0; l < SPC; l++) hist[int'((n + l) % HN)] = int'($signed(dac_ro_i[l])) >>> 2;
    // produce the next ADC word
    for (int l = 0; l < SPC; l++) begin
      automatic longint k = n + l;
      automatic int r = x_at(k - REF_LAT);
      automatic int xs = x_at(k - REF_LAT - CABLE);
      automatic int xs2 = x_at(k - REF_LAT - CABLE - 2);
      automatic int s = qubit ? (A1 * xs + B1 * xs2) : (A0 * xs + B0 * xs2);
      automatic int nz = int'($urandom_range(2 * NOISE)) - NOISE;
      s = (s >>> 8) + nz;
      adc_ref[l] <= 12'(r);
      adc_sig[l] <= 12'(s);
    end
    n = n + SPC;
  end
endmodule
