// iq_integrator_tb -- self-checking test of iq_integrator.
// Feeds random signed products every clock and opens windows of lengths 1,
// 3, 100 (800 ns) and 250, some back to back (next start in the clock after
// the last one of a window). For each window it checks the I and Q sums
// against sums computed here, the tag, and that `valid` rises exactly 2 clocks
// after the last product of the window. A start while a window is open must
// be ignored and counted in `dropped`.
module iq_integrator_tb;
  import qc_pkg::*;
  localparam int SPC = 4, PW = 24, LW = 16, AW = 42;
  logic clk = 0, rst = 1;
  logic start = 0, tag_in = 0, busy, busy_next, valid, tag_out;
  logic [LW-1:0] len = '0;
  logic [SPC-1:0][PW-1:0] prod_i, prod_q;
  logic [AW-1:0] i_sum, q_sum;
  logic [15:0] dropped;
  int checks = 0, failures = 0;
  int cyc = 0;

  iq_integrator #(.SPC(SPC), .PW(PW), .LEN_W(LW), .ACC_W(AW)) dut (
    .clk, .rst, .start, .len, .tag_in, .prod_i, .prod_q, .busy, .busy_next, .valid,
    .i_sum, .q_sum, .tag_out, .dropped);

  always #4 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    #400000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Expected results, queued when a window is started.
  longint exp_i [$], exp_q [$];
  int     exp_cyc [$];
  bit     exp_tag [$];

  // Window bookkeeping in the testbench: accumulate products while open.
  int     open_left = 0;
  longint acc_i, acc_q;
  bit     cur_tag;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("cycle %0d: %s", cyc, what);
    end
  endtask

  // Drive random products each clock, model windows.
  always @(posedge clk) begin
    if (!rst) begin
      // products currently on the inputs belong to this clock
      if (start && open_left == 0 && len != 0) begin
        open_left = int'(len);
        acc_i = 0; acc_q = 0; cur_tag = tag_in;
      end
      if (open_left > 0) begin
        for (int l = 0; l < SPC; l++) begin
          acc_i += longint'($signed(prod_i[l]));
          acc_q += longint'($signed(prod_q[l]));
        end
        open_left--;
        if (open_left == 0) begin
          exp_i.push_back(acc_i); exp_q.push_back(acc_q);
          exp_cyc.push_back(cyc + 2); exp_tag.push_back(cur_tag);
        end
      end
    end
    #1;
    for (int l = 0; l < SPC; l++) begin
      prod_i[l] = PW'($urandom);
      prod_q[l] = PW'($urandom);
    end
  end

  // busy_next must predict busy.
  logic bn_q = 0;
  always @(posedge clk) begin
    bn_q <= busy_next;
    if (!rst && cyc > 4) chk(busy == bn_q, "busy_next does not predict busy");
  end

  // Check results.
  always @(posedge clk) begin
    if (!rst && valid) begin
      if (exp_i.size() == 0) chk(0, "unexpected valid");
      else begin
        automatic longint ei = exp_i.pop_front(), eq = exp_q.pop_front();
        automatic int ec = exp_cyc.pop_front();
        automatic bit et = exp_tag.pop_front();
        chk($signed(i_sum) == ei, $sformatf("I got %0d want %0d", $signed(i_sum), ei));
        chk($signed(q_sum) == eq, $sformatf("Q got %0d want %0d", $signed(q_sum), eq));
        chk(tag_out == et, "tag");
        chk(cyc == ec, $sformatf("latency: valid at %0d want %0d", cyc, ec));
      end
    end
  end

  task automatic window(input int n, input bit tg, input int gap);
    @(negedge clk);
    start = 1; len = LW'(n); tag_in = tg;
    @(negedge clk);
    start = 0;
    repeat (n - 1 + gap) @(negedge clk);
  endtask

  initial begin
    for (int l = 0; l < SPC; l++) begin prod_i[l] = '0; prod_q[l] = '0; end
    repeat (3) @(posedge clk);
    rst = 0;
    window(READOUT_CLKS, 1, 5);
    window(1, 0, 0);
    window(1, 1, 0);
    window(3, 0, 0);      // back to back
    window(READOUT_CLKS, 1, 0);
    window(READOUT_CLKS, 0, 3);
    window(250, 1, 0);
    // start while busy: must be dropped
    @(negedge clk); start = 1; len = 16'd20; tag_in = 0;
    @(negedge clk); start = 0;
    repeat (5) @(negedge clk);
    start = 1; len = 16'd7;
    @(negedge clk); start = 0;
    repeat (40) @(negedge clk);
    chk(dropped == 16'd1, $sformatf("dropped = %0d", dropped));
    chk(exp_i.size() == 0, "results missing");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
