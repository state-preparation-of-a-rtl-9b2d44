// qubit_control_top_tb -- end-to-end test of the firmware: active reset of a
// qubit, run at the design's default parameters.
//
// A behavioural readout loop (readout_model) turns the readout DAC output back
// into signal and reference ADC streams, with a 13-sample cable difference
// and a qubit-dependent cavity response. Each shot the testbench prepares the
// qubit in |1> with 11.7 % probability (the thermal population of the
// experiment) and runs this program:
//    0 PULSE readout, 100 clocks (800 ns)     7 WAIT 19
//    1 WAIT 19 (loop delay)                   8 ACQ tagged, 100 clocks
//    2 ACQ 100 clocks                         9 ACQ 20 clocks (stalls, then back to back)
//    3 BRANCH if |0> to 5                    10 ACQ 20 clocks
//    4 PULSE drive, 12 clocks (pi pulse)     11 BRANCH if |0> to 12 (waits for results)
//    5 WAIT 20                               12 END
//    6 PULSE readout, 100 clocks
// It checks that every first estimate equals the prepared state, that every
// verification readout finds |0> (reset), that the conditional pi pulse
// reaches the drive DAC exactly 11 clocks after the last ADC word of the
// readout window, and that the histogram holds one count per tagged shot. It
// counts each mechanism (pi pulse played, pi pulse skipped, BRANCH waiting,
// ACQ stalled by a busy integrator, back-to-back windows, reference delay in
// use) and fails if one never happened.
module qubit_control_top_tb;
  import qc_pkg::*;
  localparam int NSHOTS = 300;
  localparam int LAT_EXPECT = 11;

  logic clk = 0, rst = 1;
  logic [3:0][3:0][13:0] dac_out;
  logic [3:0][11:0] adc_sig, adc_ref;
  logic ro_active, drv_active;
  logic [6:0] ref_delay_samples = 7'd13;
  logic signed [17:0] disc_w_i = 18'sd5924, disc_w_q = -18'sd8669;
  logic signed [63:0] disc_bias = 64'sd93310 * 64'sd7812;
  logic [31:0] readout_freq = 32'h2000_0000;      // 62.5 MHz
  logic [31:0] drive_freq = 32'd687194767;        // 80 MHz
  logic [5:0] hist_shift = 6'd22;
  logic seq_run = 0, prog_we = 0, env_we = 0, env_sel = 0, hist_clear = 0;
  logic [5:0] prog_waddr = '0;
  logic [31:0] prog_wdata = '0;
  logic [9:0] env_waddr = '0;
  logic [15:0] env_wdata = '0;
  logic seq_busy, seq_done, hist_clearing;
  logic [11:0] hist_rd_addr = '0;
  logic [19:0] hist_rd_data;
  logic [31:0] hist_total;
  logic result_valid, result_state;
  logic signed [41:0] result_i, result_q;
  logic [15:0] acq_dropped, branches_taken;
  logic prepare = 0, prepare_state = 0, qubit;

  qubit_control_top dut (
    .clk, .rst, .adc_sig, .adc_ref, .dac_out, .ro_active, .drv_active,
    .ref_delay_samples, .disc_w_i, .disc_w_q, .disc_bias, .readout_freq, .drive_freq,
    .hist_shift, .seq_run, .prog_we, .prog_waddr, .prog_wdata, .seq_busy, .seq_done,
    .env_we, .env_sel, .env_waddr, .env_wdata, .hist_clear, .hist_clearing,
    .hist_rd_addr, .hist_rd_data, .hist_total, .result_valid, .result_state,
    .result_i, .result_q, .acq_dropped, .branches_taken);

  readout_model #(.SPC(4), .REF_LAT(40), .CABLE(13), .NOISE(64)) loop_model (
    .clk, .dac_ro_i(dac_out[0]), .drv_active, .prepare, .prepare_state,
    .adc_sig, .adc_ref, .qubit);

  always #4 clk = ~clk;

  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    #8000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("cycle %0d: %s", cyc, what); end
  endtask

  function automatic logic [31:0] ins(input opcode_e op, input bit f, input int a, input int imm);
    instr_t i;
    i.op = op; i.flag = f; i.rsvd = 1'b0; i.addr = 10'(a); i.imm = 16'(imm);
    return 32'(i);
  endfunction

  task automatic load(input int a, input logic [31:0] w);
    @(negedge clk); prog_we = 1; prog_waddr = 6'(a); prog_wdata = w;
    @(negedge clk); prog_we = 0;
  endtask

  task automatic load_env(input bit sel, input int a, input int v);
    @(negedge clk); env_we = 1; env_sel = sel; env_waddr = 10'(a); env_wdata = 16'(v);
    @(negedge clk); env_we = 0;
  endtask

  // ---- mechanism counters -------------------------------------------------
  int n_pi = 0, n_skip = 0, n_branch_wait = 0, n_acq_stall = 0, n_b2b = 0, n_ro_cycles = 0;
  int acq_seen_cyc = -1;
  int last_adc_cyc = -1;
  int lat_checked = 0;
  logic drv_q = 0, busy_q = 0;
  always @(posedge clk) if (!rst) begin
    drv_q  <= drv_active;
    busy_q <= dut.u_integrator.busy;
    if (dut.u_seq.st == 2'd1 && dut.u_seq.ins.op == OP_BRANCH && !dut.u_seq.ready) n_branch_wait++;
    if (dut.u_seq.st == 2'd1 && dut.u_seq.ins.op == OP_ACQ && (dut.acq_busy || dut.acq_start)) n_acq_stall++;
    if (dut.acq_start && busy_q && !dut.u_integrator.busy) n_b2b++;
    if (ro_active) n_ro_cycles++;
    // First window of a shot: remember when its last ADC word entered.
    if (dut.acq_start && !dut.acq_tag && dut.acq_len == 16'd100)
      last_adc_cyc = cyc + 99 - 2;
    if (drv_active && !drv_q) begin
      n_pi++;
      lat_checked++;
      chk(cyc - last_adc_cyc == LAT_EXPECT,
          $sformatf("feedback latency %0d clocks, want %0d", cyc - last_adc_cyc, LAT_EXPECT));
      chk(dac_out[2] != '0 || dac_out[3] != '0, "pi pulse has output");
    end
  end

  // ---- result checking ----------------------------------------------------
  int res_idx = 0;       // position of a result within its shot (0..3)
  bit truth;             // prepared state of the current shot
  int n_tagged = 0, n_ones = 0;
  always @(posedge clk) if (!rst && result_valid) begin
    case (res_idx)
      0: begin
        chk(result_state == truth, $sformatf("first readout: state %0d, prepared %0d (I=%0d Q=%0d)",
                                             result_state, truth, result_i, result_q));
        if (result_state) n_ones++; else n_skip++;
      end
      1: begin
        chk(result_state == 1'b0, $sformatf("after reset: state 1 (I=%0d Q=%0d)", result_i, result_q));
        n_tagged++;
      end
      default: ;
    endcase
    res_idx = (res_idx + 1) % 4;
  end

  initial begin
    repeat (4) @(posedge clk);
    rst = 0;
    for (int j = 0; j < 100; j++) load_env(0, j, 16000);  // readout envelope (flat)
    for (int j = 0; j < 12; j++)  load_env(1, j, 20000);  // pi pulse envelope
    load(0,  ins(OP_PULSE,  0, 0, 100));
    load(1,  ins(OP_WAIT,   0, 0, 19));
    load(2,  ins(OP_ACQ,    0, 0, 100));
    load(3,  ins(OP_BRANCH, 0, 5, 0));
    load(4,  ins(OP_PULSE,  1, 0, 12));
    load(5,  ins(OP_WAIT,   0, 0, 20));
    load(6,  ins(OP_PULSE,  0, 0, 100));
    load(7,  ins(OP_WAIT,   0, 0, 19));
    load(8,  ins(OP_ACQ,    1, 0, 100));
    load(9,  ins(OP_ACQ,    0, 0, 20));
    load(10, ins(OP_ACQ,    0, 0, 20));
    load(11, ins(OP_BRANCH, 0, 12, 0));
    load(12, ins(OP_END,    0, 0, 0));
    @(negedge clk); hist_clear = 1;
    @(negedge clk); hist_clear = 0;
    while (hist_clearing) @(negedge clk);

    for (int s = 0; s < NSHOTS; s++) begin
      // thermal population 11.7 %
      @(negedge clk);
      prepare = 1; prepare_state = ($urandom_range(999) < 117); truth = prepare_state;
      if (s == 0) begin prepare_state = 1; truth = 1; end
      if (s == 1) begin prepare_state = 0; truth = 0; end
      @(negedge clk); prepare = 0;
      seq_run = 1;
      @(negedge clk); seq_run = 0;
      while (!seq_done || seq_busy) @(negedge clk);
      repeat (60) @(negedge clk);   // let the readout loop drain
      chk(qubit == 1'b0, $sformatf("shot %0d: qubit not in |0> after reset", s));
    end

    // Histogram: one count per tagged (verification) shot.
    chk(hist_total == 32'(NSHOTS), $sformatf("histogram total %0d", hist_total));
    begin
      automatic longint sum = 0;
      for (int a = 0; a < 4096; a++) begin
        @(negedge clk); hist_rd_addr = 12'(a);
        @(negedge clk); sum += longint'(hist_rd_data);
      end
      chk(sum == NSHOTS, $sformatf("histogram sum %0d", sum));
    end

    chk(n_tagged == NSHOTS, $sformatf("verification results %0d", n_tagged));
    chk(acq_dropped == 0, "no acquisition start lost");
    chk(branches_taken == 16'(n_skip), $sformatf("branch count %0d, want %0d (empty windows read as |1>)", branches_taken, n_skip));
    $display("mechanisms: pi_pulses=%0d skipped=%0d branch_wait_clks=%0d acq_stall_clks=%0d back_to_back=%0d ro_clks=%0d ones=%0d",
             n_pi, n_skip, n_branch_wait, n_acq_stall, n_b2b, n_ro_cycles, n_ones);
    chk(n_pi > 0 && n_pi == n_ones, "pi pulse after every |1>");
    chk(n_skip > 0, "pi pulse skipped after |0>");
    chk(n_branch_wait > 0, "BRANCH waited for a result");
    chk(n_acq_stall > 0, "ACQ stalled on a busy integrator");
    chk(n_b2b > 0, "back-to-back windows");
    chk(n_ro_cycles > 0, "readout pulses played");
    chk(ref_delay_samples != 0, "reference delay in use");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
