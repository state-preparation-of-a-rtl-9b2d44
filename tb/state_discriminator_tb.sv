// state_discriminator_tb -- self-checking test of state_discriminator.
// Uses the discriminant line of the active-reset experiment,
// Q = (5923.97*I + 93309.77)/8668.54, as w_i = 5924, w_q = -8669,
// bias = 93310, with |1> on the side of larger I. Checks the two cluster
// centres of the experiment (|0> near (5500, 11000), |1> near (10500, 3000)),
// then random points (including exactly on and next to the line) against a
// sign computed here in 64-bit arithmetic, the I/Q/tag pass-through and the
// 2-clock latency.
module state_discriminator_tb;
  localparam int AW = 42, CW = 18, BW = 64;
  logic clk = 0, rst = 1;
  logic valid_in = 0, tag_in = 0, valid_out, state, tag_out;
  logic signed [AW-1:0] i_in = '0, q_in = '0, i_out, q_out;
  logic signed [CW-1:0] w_i, w_q;
  logic signed [BW-1:0] bias;
  int checks = 0, failures = 0;

  state_discriminator #(.ACC_W(AW), .COEF_W(CW), .BIAS_W(BW)) dut (
    .clk, .rst, .valid_in, .i_in, .q_in, .tag_in, .w_i, .w_q, .bias,
    .valid_out, .state, .i_out, .q_out, .tag_out);

  always #4 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expected outputs, delayed by 2 clocks in a queue
  typedef struct { longint i, q; bit st, tg; } exp_t;
  exp_t expq [$];
  int sent = 0, got = 0;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("%s", what); end
  endtask

  function automatic bit model(input longint i, input longint q, input longint b);
    return (5924 * i - 8669 * q + b) > 0;
  endfunction

  task automatic send(input longint i, input longint q, input longint b);
    exp_t e;
    @(negedge clk);
    bias = b;
    valid_in = 1; i_in = AW'(i); q_in = AW'(q); tag_in = 1'($urandom);
    e.i = i; e.q = q; e.st = model(i, q, b); e.tg = tag_in;
    expq.push_back(e);
    sent++;
  endtask

  // Check outputs, with latency tracked by a valid shift register.
  logic [1:0] vpipe;
  always @(posedge clk) begin
    if (rst) vpipe <= '0;
    else begin
      vpipe <= {vpipe[0], valid_in};
      chk(valid_out == vpipe[1], "valid latency");
      if (valid_out) begin
        exp_t e;
        e = expq.pop_front();
        got++;
        chk(state == e.st, $sformatf("state for (%0d,%0d) got %0d want %0d", e.i, e.q, state, e.st));
        chk(i_out == AW'(e.i) && q_out == AW'(e.q) && tag_out == e.tg, "pass-through");
      end
    end
  end

  initial begin
    w_i = 18'sd5924; w_q = -18'sd8669; bias = 64'sd93310;
    repeat (3) @(posedge clk);
    rst = 0;
    send(5500, 11000, 93310);   // |0> cluster
    send(10500, 3000, 93310);   // |1> cluster
    chk(model(5500, 11000, 93310) == 0 && model(10500, 3000, 93310) == 1, "model sides");
    // On the line exactly: 5924*i - 8669*q + b == 0 -> state 0.
    send(8669, 5924, 0);
    send(8669, 5923, 0);        // just on the |1> side
    for (int k = 0; k < 2000; k++)
      send(longint'($signed(32'($urandom))) >>> 2, longint'($signed(32'($urandom))) >>> 2,
           longint'($signed(32'($urandom))) * 1000);
    @(negedge clk); valid_in = 0;
    repeat (5) @(negedge clk);
    chk(got == sent, $sformatf("results %0d of %0d", got, sent));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
