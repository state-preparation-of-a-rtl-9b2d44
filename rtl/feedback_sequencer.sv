// feedback_sequencer -- runs pulse sequences that branch on the qubit state.
//
// The paper's platform can continue with a different pulse sequence after each
// state estimate; active reset is the simplest use: read the qubit out and
// play a pi pulse only if the estimate is |1>. This block provides that
// ability as a tiny program of 32-bit instructions (format in qc_pkg):
//   PULSE ch,addr,len  start a pulse on the readout (0) or drive (1) generator
//   ACQ   tag,len      open an acquisition window of len clocks
//   WAIT  n            wait n clocks
//   BRANCH c,addr      wait for the state estimate of the last ACQ, jump if it equals c
//   JUMP  addr         jump
//   END                stop and raise done
// The instruction set and encoding are this design's own; the paper does not
// describe how sequences are stored or stepped.
//
// How it works: one instruction per clock from a host-written program memory
// read combinationally. A counter of acquisitions whose result has not come
// back ties each state estimate to its ACQ. BRANCH stalls until all results
// are in and uses a result that arrives in the same clock directly (bypass),
// so the decision costs no extra cycle. ACQ stalls while the integrator is
// still busy with a window, so no start is lost.
//
// Timing: pulse/acquisition strobes are registered, one clock after the
// instruction executes. A taken BRANCH followed by PULSE issues the pulse
// strobe 2 clocks after res_valid.
module feedback_sequencer #(
  parameter int unsigned PROG_AW = qc_pkg::PROG_AW,
  parameter int unsigned ENV_AW  = qc_pkg::ENV_AW,
  parameter int unsigned LEN_W   = qc_pkg::LEN_W
) (
  input  logic                clk,
  input  logic                rst,
  input  logic                run,
  input  logic                prog_we,
  input  logic [PROG_AW-1:0]  prog_waddr,
  input  logic [31:0]         prog_wdata,
  input  logic                res_valid,
  input  logic                res_state,
  input  logic                acq_busy,      // integrator busy in the next clock
  output logic [1:0]          pulse_start,   // bit 0 readout, bit 1 drive
  output logic [ENV_AW-1:0]   pulse_env,
  output logic [LEN_W-1:0]    pulse_len,
  output logic                acq_start,
  output logic [LEN_W-1:0]    acq_len,
  output logic                acq_tag,
  output logic                busy,
  output logic                done,
  output logic [15:0]         branches_taken
);
  import qc_pkg::*;

  typedef enum logic [1:0] { S_IDLE, S_RUN, S_WAIT } state_e;

  logic [31:0]        prog_mem [1 << PROG_AW];
  state_e             st;
  logic [PROG_AW-1:0] pc;
  logic [LEN_W-1:0]   wait_cnt;
  logic [3:0]         pending;       // acquisitions without a result yet
  logic               have_result, last_state;
  instr_t             ins;

  always_ff @(posedge clk) begin
    if (prog_we) prog_mem[prog_waddr] <= prog_wdata;
  end

  assign ins = instr_t'(prog_mem[pc]);

  // State estimate available for a BRANCH in this clock.
  logic ready, cur_state;
  assign ready     = (pending == 4'd0 && have_result) || (pending == 4'd1 && res_valid);
  assign cur_state = res_valid ? res_state : last_state;

  logic acq_issue;
  assign acq_issue = (st == S_RUN) && (ins.op == OP_ACQ) && !acq_busy && !acq_start;

  always_ff @(posedge clk) begin
    if (rst) begin
      st <= S_IDLE; pc <= '0; wait_cnt <= '0;
      pending <= '0; have_result <= 1'b0; last_state <= 1'b0;
      pulse_start <= '0; pulse_env <= '0; pulse_len <= '0;
      acq_start <= 1'b0; acq_len <= '0; acq_tag <= 1'b0;
      busy <= 1'b0; done <= 1'b0; branches_taken <= '0;
    end else begin
      pulse_start <= '0;
      acq_start   <= 1'b0;

      // Result bookkeeping.
      if (acq_issue) have_result <= 1'b0;
      else if (res_valid) begin
        have_result <= 1'b1;
        last_state  <= res_state;
      end
      if (acq_issue && !res_valid)      pending <= pending + 1'b1;
      else if (!acq_issue && res_valid && pending != 0) pending <= pending - 1'b1;

      unique case (st)
        S_IDLE: begin
          if (run) begin
            st <= S_RUN; pc <= '0; busy <= 1'b1; done <= 1'b0;
          end
        end
        S_RUN: begin
          unique case (ins.op)
            OP_END: begin
              st <= S_IDLE; busy <= 1'b0; done <= 1'b1;
            end
            OP_PULSE: begin
              pulse_start[ins.flag] <= 1'b1;
              pulse_env <= ENV_AW'(ins.addr);
              pulse_len <= ins.imm;
              pc <= pc + 1'b1;
            end
            OP_ACQ: begin
              if (acq_issue) begin
                acq_start <= 1'b1;
                acq_len   <= ins.imm;
                acq_tag   <= ins.flag;
                pc <= pc + 1'b1;
              end
            end
            OP_WAIT: begin
              if (ins.imm > LEN_W'(1)) begin
                wait_cnt <= ins.imm - LEN_W'(1);
                st <= S_WAIT;
              end else pc <= pc + 1'b1;
            end
            OP_BRANCH: begin
              if (ready) begin
                if (cur_state == ins.flag) begin
                  pc <= PROG_AW'(ins.addr);
                  branches_taken <= branches_taken + 1'b1;
                end else pc <= pc + 1'b1;
              end
            end
            OP_JUMP: pc <= PROG_AW'(ins.addr);
            default: begin
              st <= S_IDLE; busy <= 1'b0; done <= 1'b1;
            end
          endcase
        end
        S_WAIT: begin
          if (wait_cnt <= LEN_W'(1)) begin
            st <= S_RUN; pc <= pc + 1'b1;
          end else wait_cnt <= wait_cnt - 1'b1;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

endmodule
