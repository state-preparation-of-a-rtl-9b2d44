// pulse_generator -- one IQ pair of shaped pulses at an intermediate frequency.
//
// The platform drives two IQ output pairs, one for readout pulses (62.5 MHz
// intermediate frequency in the experiment) and one for qubit manipulation
// pulses (80 MHz); each pair is one instance of this block. A pulse is a
// carrier from a numerically controlled oscillator multiplied by an envelope:
//     out_i[n] = env[n/SPC] * cos(phase[n]),  out_q[n] = env[n/SPC] * sin(phase[n]).
// The paper says only that the platform generates shaped pulses at these
// frequencies; the oscillator, the table and the envelope memory are this
// design's own, the simplest structure that produces such pulses.
//
// How it works: a 32-bit phase accumulator advances by SPC*freq per clock and
// lane l adds l*freq, so the carrier phase runs continuously across pulses.
// The top 10 phase bits address a 1024-entry sine table (sine_lut.hex,
// entry k = round(32767*sin(2*pi*k/1024)), two's complement); cosine reads
// the entry a quarter turn ahead. The envelope is a signed 16-bit RAM written
// by the host, one word per clock (4 samples); a pulse plays `len` words
// starting at `env_addr`. A start while a pulse plays restarts it.
//
// Interface: freq = f_IF / 500 MHz * 2^32 (62.5 MHz -> 0x2000_0000).
// Outputs are 14-bit two's complement, zero when idle; full-scale envelope
// and carrier give +/-8191.
// Timing: the first samples appear 3 clocks after the clock in which `start`
// is high (`active` marks them); one envelope word per clock after that.
module pulse_generator #(
  parameter int unsigned SPC    = qc_pkg::SPC,
  parameter int unsigned DAC_W  = qc_pkg::DAC_W,
  parameter int unsigned ENV_AW = qc_pkg::ENV_AW,
  parameter int unsigned ENV_W  = qc_pkg::ENV_W,
  parameter int unsigned LEN_W  = qc_pkg::LEN_W,
  parameter int unsigned LUT_AW = 10,
  parameter int unsigned FREQ_W = 32
) (
  input  logic                        clk,
  input  logic                        rst,
  input  logic                        start,
  input  logic [ENV_AW-1:0]           env_addr,
  input  logic [LEN_W-1:0]            len,
  input  logic [FREQ_W-1:0]           freq,
  input  logic                        env_we,
  input  logic [ENV_AW-1:0]           env_waddr,
  input  logic [ENV_W-1:0]            env_wdata,
  output logic [SPC-1:0][DAC_W-1:0]   out_i,
  output logic [SPC-1:0][DAC_W-1:0]   out_q,
  output logic                        active
);
  localparam int unsigned LUT_N = 1 << LUT_AW;
  localparam int unsigned PRW   = 2 * ENV_W;          // product width
  localparam int unsigned SHR   = PRW - 1 - DAC_W;    // keep the top DAC_W bits below the sign

  logic [ENV_W-1:0] env_mem [1 << ENV_AW];
  logic [15:0]      sine_lut [LUT_N];
  initial $readmemh("rtl/sine_lut.hex", sine_lut);

  always_ff @(posedge clk) begin
    if (env_we) env_mem[env_waddr] <= env_wdata;
  end

  // Phase accumulator (free running).
  logic [FREQ_W-1:0] phase;
  always_ff @(posedge clk) begin
    if (rst) phase <= '0;
    else     phase <= phase + FREQ_W'(SPC) * freq;
  end

  // Sequencing of envelope words.
  logic [ENV_AW-1:0] rd_addr;
  logic [LEN_W-1:0]  remain;
  logic              playing;

  always_ff @(posedge clk) begin
    if (rst) begin
      rd_addr <= '0;
      remain  <= '0;
      playing <= 1'b0;
    end else if (start && len != '0) begin
      rd_addr <= env_addr;
      remain  <= len;
      playing <= 1'b1;
    end else if (playing) begin
      rd_addr <= rd_addr + 1'b1;
      remain  <= remain - 1'b1;
      playing <= (remain != LEN_W'(1));
    end
  end

  // Stage 1: envelope and table reads.
  logic                            v1;
  logic signed [ENV_W-1:0]         env1;
  logic [SPC-1:0][15:0]            cos1, sin1;

  always_ff @(posedge clk) begin
    if (rst) v1 <= 1'b0;
    else     v1 <= playing;
    env1 <= env_mem[rd_addr];
    for (int l = 0; l < SPC; l++) begin
      logic [FREQ_W-1:0] ph;
      logic [LUT_AW-1:0] idx;
      ph  = phase + FREQ_W'(l) * freq;
      idx = ph[FREQ_W-1 -: LUT_AW];
      sin1[l] <= sine_lut[idx];
      cos1[l] <= sine_lut[idx + LUT_AW'(LUT_N / 4)];
    end
  end

  // Stage 2: envelope times carrier.
  always_ff @(posedge clk) begin
    if (rst) begin
      out_i  <= '0;
      out_q  <= '0;
      active <= 1'b0;
    end else begin
      active <= v1;
      for (int l = 0; l < SPC; l++) begin
        logic signed [PRW-1:0] pi, pq;
        pi = env1 * $signed(cos1[l]);
        pq = env1 * $signed(sin1[l]);
        out_i[l] <= v1 ? pi[SHR +: DAC_W] : '0;
        out_q[l] <= v1 ? pq[SHR +: DAC_W] : '0;
      end
    end
  end

endmodule
