// qubit_control_top -- readout, state estimation and feedback firmware for one
// superconducting qubit.
//
// The design closes a measurement-based feedback loop between an ADC pair and
// a DAC pair group. Readout pulses leave on one IQ output pair and come back,
// after the experiment, as two ADC streams: the signal that went through the
// cryostat and a reference copy that did not. The firmware aligns the two
// streams (ref_delay), multiplies them point-wise against the reference and
// its quarter-period-shifted copy (iq_mixer), sums the products over the
// readout window (iq_integrator), and classifies the (I,Q) pair with a linear
// discriminant (state_discriminator). The state estimate goes to a small
// program sequencer (feedback_sequencer) that decides which pulses come next,
// for example a pi pulse on the drive output pair only when the qubit was
// found in |1> (active reset). Results can also be binned into an IQ
// histogram (iq_histogram) for the host.
//
// The chain and the 4-samples-per-clock, 125 MHz organisation follow the
// paper; the register-level interface below (plain ports standing for
// processor-written settings) and the sequencer's instruction set are this
// design's choices. ADCs, DACs and the rate-change filters between 4 GSPS and
// 500 MSPS are outside: their 500 MSPS sample words are the ports here.
//
// Interface: adc_* words carry SPC=4 signed 12-bit samples (lane 0 oldest);
// dac_out[0..3] = readout I, readout Q, drive I, drive Q, SPC 14-bit samples.
// Timing: ADC word to products 2 clocks; last product of a window to state
// estimate 4 clocks; state estimate to first pulse sample on the DACs 5 clocks
// (BRANCH bypass, PULSE strobe, 3-clock pulse generator), so the digital part
// of the feedback path, from the last ADC word of the window to the first
// DAC word of the conditional pulse, is 2 + 4 + 5 = 11 clocks = 88 ns.
module qubit_control_top #(
  parameter int unsigned SPC       = qc_pkg::SPC,
  parameter int unsigned MAX_DELAY = 64,
  localparam int unsigned ADC_W    = qc_pkg::ADC_W,
  localparam int unsigned DAC_W    = qc_pkg::DAC_W,
  localparam int unsigned ACC_W    = qc_pkg::ACC_W,
  localparam int unsigned LEN_W    = qc_pkg::LEN_W,
  localparam int unsigned ENV_AW   = qc_pkg::ENV_AW,
  localparam int unsigned ENV_W    = qc_pkg::ENV_W,
  localparam int unsigned PROG_AW  = qc_pkg::PROG_AW,
  localparam int unsigned COEF_W   = qc_pkg::COEF_W,
  localparam int unsigned BIAS_W   = qc_pkg::BIAS_W,
  localparam int unsigned DLY_W    = $clog2(MAX_DELAY + 1),
  localparam int unsigned HIST_AW  = 12,
  localparam int unsigned HIST_CW  = 20
) (
  input  logic                              clk,
  input  logic                              rst,
  // Converter sample streams.
  input  logic [SPC-1:0][ADC_W-1:0]         adc_sig,
  input  logic [SPC-1:0][ADC_W-1:0]         adc_ref,
  output logic [3:0][SPC-1:0][DAC_W-1:0]    dac_out,
  output logic                              ro_active,    // readout pair is playing
  output logic                              drv_active,   // drive pair is playing
  // Settings (written by the host processor).
  input  logic [DLY_W-1:0]                  ref_delay_samples,
  input  logic signed [COEF_W-1:0]          disc_w_i,
  input  logic signed [COEF_W-1:0]          disc_w_q,
  input  logic signed [BIAS_W-1:0]          disc_bias,
  input  logic [31:0]                       readout_freq,
  input  logic [31:0]                       drive_freq,
  input  logic [5:0]                        hist_shift,
  // Sequencer program and control.
  input  logic                              seq_run,
  input  logic                              prog_we,
  input  logic [PROG_AW-1:0]                prog_waddr,
  input  logic [31:0]                       prog_wdata,
  output logic                              seq_busy,
  output logic                              seq_done,
  // Envelope memories (env_sel: 0 readout, 1 drive).
  input  logic                              env_we,
  input  logic                              env_sel,
  input  logic [ENV_AW-1:0]                 env_waddr,
  input  logic [ENV_W-1:0]                  env_wdata,
  // Histogram access.
  input  logic                              hist_clear,
  output logic                              hist_clearing,
  input  logic [HIST_AW-1:0]                hist_rd_addr,
  output logic [HIST_CW-1:0]                hist_rd_data,
  output logic [31:0]                       hist_total,
  // Single-shot result stream and status.
  output logic                              result_valid,
  output logic                              result_state,
  output logic signed [ACC_W-1:0]           result_i,
  output logic signed [ACC_W-1:0]           result_q,
  output logic [15:0]                       acq_dropped,
  output logic [15:0]                       branches_taken
);
  // Reference alignment; the signal gets one register to match.
  logic [SPC-1:0][ADC_W-1:0] ref_aligned, sig_q;

  ref_delay #(.SPC(SPC), .W(ADC_W), .MAX_DELAY(MAX_DELAY)) u_ref_delay (
    .clk, .rst, .delay(ref_delay_samples), .din(adc_ref), .dout(ref_aligned));

  always_ff @(posedge clk) begin
    if (rst) sig_q <= '0;
    else     sig_q <= adc_sig;
  end

  // IQ products.
  logic [SPC-1:0][2*ADC_W-1:0] prod_i, prod_q;
  iq_mixer #(.SPC(SPC), .W(ADC_W), .Q_SHIFT(2)) u_mixer (
    .clk, .rst, .sig(sig_q), .ref_s(ref_aligned), .prod_i, .prod_q);

  // Sequencer <-> datapath.
  logic [1:0]        pulse_start;
  logic [ENV_AW-1:0] pulse_env;
  logic [LEN_W-1:0]  pulse_len;
  logic              acq_start, acq_tag, acq_busy;
  logic [LEN_W-1:0]  acq_len;

  // Integration.
  logic             int_valid, int_tag;
  logic [ACC_W-1:0] int_i, int_q;
  iq_integrator #(.SPC(SPC), .PW(2*ADC_W), .LEN_W(LEN_W), .ACC_W(ACC_W)) u_integrator (
    .clk, .rst, .start(acq_start), .len(acq_len), .tag_in(acq_tag),
    .prod_i, .prod_q, .busy(), .busy_next(acq_busy), .valid(int_valid),
    .i_sum(int_i), .q_sum(int_q), .tag_out(int_tag), .dropped(acq_dropped));

  // State estimation.
  logic result_tag;
  state_discriminator #(.ACC_W(ACC_W), .COEF_W(COEF_W), .BIAS_W(BIAS_W)) u_disc (
    .clk, .rst, .valid_in(int_valid), .i_in(int_i), .q_in(int_q), .tag_in(int_tag),
    .w_i(disc_w_i), .w_q(disc_w_q), .bias(disc_bias),
    .valid_out(result_valid), .state(result_state), .i_out(result_i), .q_out(result_q),
    .tag_out(result_tag));

  // Histogram of tagged results.
  iq_histogram #(.ACC_W(ACC_W), .AXIS_BITS(HIST_AW / 2), .CNT_W(HIST_CW)) u_hist (
    .clk, .rst, .valid(result_valid && result_tag), .i_in(result_i), .q_in(result_q),
    .shift(hist_shift), .clear(hist_clear), .clearing(hist_clearing),
    .rd_addr(hist_rd_addr), .rd_data(hist_rd_data), .total(hist_total));

  // Feedback sequencer.
  feedback_sequencer #(.PROG_AW(PROG_AW), .ENV_AW(ENV_AW), .LEN_W(LEN_W)) u_seq (
    .clk, .rst, .run(seq_run), .prog_we, .prog_waddr, .prog_wdata,
    .res_valid(result_valid), .res_state(result_state), .acq_busy,
    .pulse_start, .pulse_env, .pulse_len, .acq_start, .acq_len, .acq_tag,
    .busy(seq_busy), .done(seq_done), .branches_taken);

  // Output pulse generators: readout pair and drive pair.
  pulse_generator #(.SPC(SPC), .DAC_W(DAC_W), .ENV_AW(ENV_AW), .ENV_W(ENV_W), .LEN_W(LEN_W)) u_pg_readout (
    .clk, .rst, .start(pulse_start[0]), .env_addr(pulse_env), .len(pulse_len), .freq(readout_freq),
    .env_we(env_we && !env_sel), .env_waddr, .env_wdata,
    .out_i(dac_out[0]), .out_q(dac_out[1]), .active(ro_active));

  pulse_generator #(.SPC(SPC), .DAC_W(DAC_W), .ENV_AW(ENV_AW), .ENV_W(ENV_W), .LEN_W(LEN_W)) u_pg_drive (
    .clk, .rst, .start(pulse_start[1]), .env_addr(pulse_env), .len(pulse_len), .freq(drive_freq),
    .env_we(env_we && env_sel), .env_waddr, .env_wdata,
    .out_i(dac_out[2]), .out_q(dac_out[3]), .active(drv_active));

endmodule
