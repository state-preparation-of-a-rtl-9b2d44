// feedback_sequencer_tb -- self-checking test of feedback_sequencer.
// Loads an active-reset program and runs it twice, once answering the
// acquisition with state |1> and once with |0>. It checks the exact clock of
// every pulse and acquisition strobe and its fields, that the pi pulse is
// played only after a |1> result, that WAIT lasts its count, that BRANCH
// stalls until the result arrives and uses a same-clock result (pulse strobe
// 2 clocks after res_valid), that ACQ stalls while acq_busy is high, and that
// END raises done.
module feedback_sequencer_tb;
  import qc_pkg::*;
  logic clk = 0, rst = 1;
  logic run = 0, prog_we = 0, res_valid = 0, res_state = 0, acq_busy = 0;
  logic [5:0] prog_waddr = '0;
  logic [31:0] prog_wdata = '0;
  logic [1:0] pulse_start;
  logic [9:0] pulse_env;
  logic [15:0] pulse_len, acq_len, branches_taken;
  logic acq_start, acq_tag, busy, done;
  int checks = 0, failures = 0, cyc = 0;

  feedback_sequencer dut (.clk, .rst, .run, .prog_we, .prog_waddr, .prog_wdata,
    .res_valid, .res_state, .acq_busy, .pulse_start, .pulse_env, .pulse_len,
    .acq_start, .acq_len, .acq_tag, .busy, .done, .branches_taken);

  always #4 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    #200000;
    failures++;
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
    @(negedge clk);
    prog_we = 1; prog_waddr = 6'(a); prog_wdata = w;
    @(negedge clk);
    prog_we = 0;
  endtask

  // Log of strobes: {cycle, kind, field}
  int ev_cyc [$]; int ev_kind [$]; int ev_a [$]; int ev_b [$];
  always @(posedge clk) if (!rst) begin
    if (pulse_start[0]) begin ev_cyc.push_back(cyc); ev_kind.push_back(0); ev_a.push_back(int'(pulse_env)); ev_b.push_back(int'(pulse_len)); end
    if (pulse_start[1]) begin ev_cyc.push_back(cyc); ev_kind.push_back(1); ev_a.push_back(int'(pulse_env)); ev_b.push_back(int'(pulse_len)); end
    if (acq_start)      begin ev_cyc.push_back(cyc); ev_kind.push_back(2); ev_a.push_back(int'(acq_tag));   ev_b.push_back(int'(acq_len)); end
  end

  task automatic expect_ev(input int c, input int k, input int a, input int b);
    if (ev_cyc.size() == 0) begin chk(0, $sformatf("missing event kind %0d", k)); return; end
    begin
      automatic int gc = ev_cyc.pop_front(), gk = ev_kind.pop_front(), ga = ev_a.pop_front(), gb = ev_b.pop_front();
      chk(gc == c && gk == k && ga == a && gb == b,
          $sformatf("event got c%0d k%0d a%0d b%0d want c%0d k%0d a%0d b%0d", gc, gk, ga, gb, c, k, a, b));
    end
  endtask

  // One shot: returns the cycle numbers seen.
  task automatic shot(input bit st, input int busy_clks);
    int c0, cres;
    @(negedge clk);
    run = 1;
    c0 = cyc;            // run sampled at the edge ending clock c0
    @(negedge clk);
    run = 0;
    // Program timeline (instruction executes in the clock after run):
    //  c0+1 PULSE ro  -> strobe visible at edge c0+1 (logged cycle c0+2)
    //  c0+2 WAIT 5    -> c0+2..c0+6
    //  c0+7 ACQ       (stalled while acq_busy)
    acq_busy = (busy_clks > 0);
    repeat (busy_clks) @(negedge clk);
    acq_busy = 0;
    // wait for acq strobe, then answer 10 clocks later
    while (!acq_start) @(negedge clk);
    repeat (10) @(negedge clk);
    res_valid = 1; res_state = st; cres = cyc;
    @(negedge clk);
    res_valid = 0;
    while (!done) @(negedge clk);
    expect_ev(c0 + 2, 0, 100, 100);
    expect_ev(((c0 + 7) > (c0 + 1 + busy_clks) ? (c0 + 7) : (c0 + 1 + busy_clks)) + 1, 2, 0, 100);
    if (st) expect_ev(cres + 2, 1, 200, 12);
    expect_ev(st ? cres + 3 : cres + 2, 0, 100, 100);
    chk(ev_cyc.size() == 0, "extra events");
    ev_cyc.delete(); ev_kind.delete(); ev_a.delete(); ev_b.delete();
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst = 0;
    load(0, ins(OP_PULSE,  0, 100, 100));  // readout pulse, envelope at 100, 100 clocks
    load(1, ins(OP_WAIT,   0, 0, 5));
    load(2, ins(OP_ACQ,    0, 0, 100));    // acquisition, not tagged
    load(3, ins(OP_BRANCH, 0, 5, 0));      // |0>: skip the pi pulse
    load(4, ins(OP_PULSE,  1, 200, 12));   // pi pulse on drive
    load(5, ins(OP_PULSE,  0, 100, 100));  // verification readout
    load(6, ins(OP_END,    0, 0, 0));
    shot(1, 0);
    chk(branches_taken == 0, "no branch after |1>");
    shot(0, 0);
    chk(branches_taken == 1, "branch taken after |0>");
    shot(1, 20);                           // ACQ stalled by a busy integrator
    chk(!busy && done, "done after END");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
