// iq_histogram -- two-dimensional histogram of single-shot (I,Q) results.
//
// The paper's IQ-plane histograms of one million single shots were taken
// directly on the platform. This block bins every result it is given into a
// 2^AXIS_BITS x 2^AXIS_BITS grid kept in on-chip memory, so the host reads a
// finished histogram instead of a million pairs. Bin sizes, counter widths and
// building the histogram in logic (rather than on the processors) are this
// design's choices.
//
// How it works: per axis, bin = clamp((x >>> shift) + 2^(AXIS_BITS-1)), so the
// grid is centred on the origin and `shift` sets the bin width 2^shift;
// results outside the grid land in the border bins. A count is updated by a
// three-stage read-modify-write (bin address, read, write back +1, saturating
// at 2^CNT_W-1). A result whose bin is being written in the same clock takes
// the value being written (forwarding), so results on consecutive clocks are
// all counted. `clear` zeroes all bins, one per clock; results arriving while
// `clearing` is high are not counted.
//
// Interface: rd_addr = {q_bin, i_bin}; rd_data follows one clock later.
// `total` counts the results that were binned.
module iq_histogram #(
  parameter int unsigned ACC_W     = qc_pkg::ACC_W,
  parameter int unsigned AXIS_BITS = 6,
  parameter int unsigned CNT_W     = 20,
  localparam int unsigned AW       = 2 * AXIS_BITS
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     valid,
  input  logic signed [ACC_W-1:0]  i_in,
  input  logic signed [ACC_W-1:0]  q_in,
  input  logic [5:0]               shift,
  input  logic                     clear,
  output logic                     clearing,
  input  logic [AW-1:0]            rd_addr,
  output logic [CNT_W-1:0]         rd_data,
  output logic [31:0]              total
);
  localparam int unsigned NB = 1 << AXIS_BITS;

  logic [CNT_W-1:0] mem [1 << AW];

  function automatic logic [AXIS_BITS-1:0] bin_of(input logic signed [ACC_W-1:0] x,
                                                  input logic [5:0] sh);
    logic signed [ACC_W:0] b;
    b = ((ACC_W+1)'(x) >>> sh) + $signed((ACC_W+1)'(NB / 2));
    if (b < 0)                        return '0;
    else if (b > (ACC_W+1)'(NB - 1))  return AXIS_BITS'(NB - 1);
    else                              return b[AXIS_BITS-1:0];
  endfunction

  // Stage 1: bin address.
  logic          v1;
  logic [AW-1:0] a1;
  // Stage 2: count read.
  logic             v2;
  logic [AW-1:0]    a2;
  logic [CNT_W-1:0] c2;
  logic [CNT_W-1:0] new2;
  // Clear sweep.
  logic [AW-1:0]    clr_addr;

  assign new2 = (c2 == '1) ? c2 : c2 + 1'b1;

  always_ff @(posedge clk) begin
    if (rst) begin
      v1 <= 1'b0; a1 <= '0; v2 <= 1'b0; a2 <= '0; c2 <= '0;
      clearing <= 1'b0; clr_addr <= '0; total <= '0;
    end else begin
      v1 <= valid && !clearing && !clear;
      a1 <= {bin_of(q_in, shift), bin_of(i_in, shift)};
      v2 <= v1 && !clearing && !clear;
      a2 <= a1;
      c2 <= (v2 && a2 == a1) ? new2 : mem[a1];
      if (v2 && !clearing) total <= total + 1'b1;
      if (clear) begin
        clearing <= 1'b1;
        clr_addr <= '0;
        total    <= '0;
      end else if (clearing) begin
        clr_addr <= clr_addr + 1'b1;
        if (clr_addr == '1) clearing <= 1'b0;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (clearing)  mem[clr_addr] <= '0;
    else if (v2)   mem[a2] <= new2;
  end

  always_ff @(posedge clk) rd_data <= mem[rd_addr];

endmodule
