// iq_integrator -- sums the I and Q products over one acquisition window.
//
// The paper obtains I and Q by summing the point-wise products over the
// recording time, 800 ns, the length of the readout pulse. Here a window is
// opened by `start` and lasts `len` clocks (100 clocks = 400 samples = 800 ns
// at the default 125 MHz / 4 samples per clock); the sums then appear on
// i_sum/q_sum with a one-clock `valid`. Windows may follow back to back: a
// start in the cycle after the last clock of a window is accepted, so
// acquisition and the later stages run as a pipeline as the paper describes.
// The window length port, the tag and the handling of a start while a window
// is open (ignored, counted in `dropped`) are this design's choices.
//
// How it works: stage 1 adds the SPC lane products of each quadrature and
// registers the lane sums; stage 2 accumulates them while the window is open.
// The window counter runs in stage 1 timing and is delayed one clock to gate
// the accumulator, so the products that entered in the `len` clocks starting
// with the clock of `start` are summed.
//
// Timing: the result is valid 2 clocks after the last product of the window
// entered; `busy` is high from the clock after `start` to the last clock of
// the window (len-1 clocks), `busy_next` one clock earlier.
module iq_integrator #(
  parameter int unsigned SPC   = qc_pkg::SPC,
  parameter int unsigned PW    = qc_pkg::PROD_W,
  parameter int unsigned LEN_W = qc_pkg::LEN_W,
  parameter int unsigned ACC_W = qc_pkg::ACC_W
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     start,
  input  logic [LEN_W-1:0]         len,
  input  logic                     tag_in,
  input  logic [SPC-1:0][PW-1:0]   prod_i,
  input  logic [SPC-1:0][PW-1:0]   prod_q,
  output logic                     busy,
  output logic                     busy_next,   // value busy takes after this clock
  output logic                     valid,
  output logic [ACC_W-1:0]         i_sum,
  output logic [ACC_W-1:0]         q_sum,
  output logic                     tag_out,
  output logic [15:0]              dropped
);
  localparam int unsigned LSW = PW + $clog2(SPC) + 1;  // lane-sum width

  // Stage 1: lane sums, window gate.
  logic [LSW-1:0]   lane_i_q, lane_q_q;
  logic             open_q;        // window open for the lane sums in stage 1
  logic             last_q;        // last clock of the window in stage 1
  logic             first_q;       // first clock of the window in stage 1
  logic [LEN_W-1:0] remain;        // clocks left after the current one
  logic             tag_q;

  logic [LSW-1:0] lane_i_d, lane_q_d;
  always_comb begin
    lane_i_d = '0;
    lane_q_d = '0;
    for (int l = 0; l < SPC; l++) begin
      lane_i_d += LSW'($signed(prod_i[l]));
      lane_q_d += LSW'($signed(prod_q[l]));
    end
  end

  logic accept;
  assign accept = start && !busy && (len != '0);

  // A start presented in the next clock is accepted exactly when busy_next is
  // low; a sequencer that registers its start strobe uses this to open the
  // next window directly after the current one.
  assign busy_next = accept ? (len != LEN_W'(1)) : (busy && remain != LEN_W'(1));

  always_ff @(posedge clk) begin
    if (rst) begin
      busy    <= 1'b0;
      remain  <= '0;
      open_q  <= 1'b0;
      first_q <= 1'b0;
      last_q  <= 1'b0;
      tag_q   <= 1'b0;
      dropped <= '0;
      lane_i_q <= '0;
      lane_q_q <= '0;
    end else begin
      lane_i_q <= lane_i_d;
      lane_q_q <= lane_q_d;
      first_q  <= accept;
      if (accept) begin
        open_q <= 1'b1;
        last_q <= (len == LEN_W'(1));
        remain <= len - 1'b1;
        busy   <= (len != LEN_W'(1));
        tag_q  <= tag_in;
      end else if (busy) begin
        open_q <= 1'b1;
        last_q <= (remain == LEN_W'(1));
        remain <= remain - 1'b1;
        busy   <= (remain != LEN_W'(1));
      end else begin
        open_q <= 1'b0;
        last_q <= 1'b0;
      end
      if (start && busy) dropped <= dropped + 1'b1;
    end
  end

  // Stage 2: accumulate.
  logic [ACC_W-1:0] acc_i, acc_q;
  always_ff @(posedge clk) begin
    if (rst) begin
      acc_i   <= '0;
      acc_q   <= '0;
      valid   <= 1'b0;
      i_sum   <= '0;
      q_sum   <= '0;
      tag_out <= 1'b0;
    end else begin
      valid <= 1'b0;
      if (open_q) begin
        if (last_q) begin
          i_sum   <= (first_q ? '0 : acc_i) + ACC_W'($signed(lane_i_q));
          q_sum   <= (first_q ? '0 : acc_q) + ACC_W'($signed(lane_q_q));
          valid   <= 1'b1;
          tag_out <= tag_q;
        end
        acc_i <= (first_q ? '0 : acc_i) + ACC_W'($signed(lane_i_q));
        acc_q <= (first_q ? '0 : acc_q) + ACC_W'($signed(lane_q_q));
      end
    end
  end

endmodule
