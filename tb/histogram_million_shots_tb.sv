// histogram_million_shots_tb -- workload test: one million single shots
// through state estimation and the IQ histogram, as in the thermal-population
// measurement of the active-reset experiment.
//
// Shots are drawn in the IQ plane around the two cluster centres of that
// experiment, |0> at (5500, 11000) and |1> at (10500, 3000), with 11.7 % of
// them in |1> and approximately Gaussian scatter (sum of four uniform numbers,
// sigma about 1200). They are fed back to back, one per clock, to
// state_discriminator (the experiment's line: w_i = 5924, w_q = -8669,
// bias = 93310) and then to iq_histogram (bin width 2^9). The testbench keeps
// its own histogram and decision count. It checks every bin, the total, that
// no counter saturated, the number of |1> decisions, and that the |1>
// population read from the decisions is 11.7 % within 0.3 %.
module histogram_million_shots_tb;
  localparam int NSHOTS = 1000000;
  localparam int AW = 42, AB = 6, NB = 1 << AB;
  logic clk = 0, rst = 1;
  logic v_in = 0, tag_in = 1;
  logic signed [AW-1:0] i_in = '0, q_in = '0;
  logic v_out, st_out, tag_out;
  logic signed [AW-1:0] i_out, q_out;
  logic clear = 0, clearing;
  logic [11:0] rd_addr = '0;
  logic [19:0] rd_data;
  logic [31:0] total;
  int checks = 0, failures = 0;
  int model [NB * NB];
  int ones_model = 0, ones_dut = 0, ones_true = 0;

  state_discriminator u_disc (
    .clk, .rst, .valid_in(v_in), .i_in, .q_in, .tag_in,
    .w_i(18'sd5924), .w_q(-18'sd8669), .bias(64'sd93310),
    .valid_out(v_out), .state(st_out), .i_out, .q_out, .tag_out);

  iq_histogram #(.ACC_W(AW), .AXIS_BITS(AB), .CNT_W(20)) u_hist (
    .clk, .rst, .valid(v_out && tag_out), .i_in(i_out), .q_in(q_out), .shift(6'd9),
    .clear, .clearing, .rd_addr, .rd_data, .total);

  always #4 clk = ~clk;

  initial begin
    #40000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("%s", what); end
  endtask

  function automatic int bin(input longint x);
    longint b = (x >>> 9) + NB / 2;
    if (b < 0) return 0;
    if (b > NB - 1) return NB - 1;
    return int'(b);
  endfunction

  function automatic int scatter();
    int s = 0;
    for (int k = 0; k < 4; k++) s += int'($urandom_range(2078)) - 1039;
    return s;   // variance 4 * 2079^2 / 12 -> sigma about 1200
  endfunction

  always @(posedge clk) if (!rst && v_out && st_out) ones_dut++;

  initial begin
    foreach (model[k]) model[k] = 0;
    repeat (3) @(posedge clk);
    rst = 0;
    @(negedge clk); clear = 1;
    @(negedge clk); clear = 0;
    while (clearing) @(negedge clk);
    for (int s = 0; s < NSHOTS; s++) begin
      automatic bit one = ($urandom_range(999) < 117);
      automatic longint i = (one ? 10500 : 5500) + scatter();
      automatic longint q = (one ? 3000 : 11000) + scatter();
      @(negedge clk);
      v_in = 1; i_in = AW'(i); q_in = AW'(q);
      model[bin(q) * NB + bin(i)]++;
      if (5924 * i - 8669 * q + 93310 > 0) ones_model++;
      if (one) ones_true++;
    end
    @(negedge clk); v_in = 0;
    repeat (8) @(negedge clk);
    chk(total == NSHOTS, $sformatf("histogram total %0d", total));
    chk(ones_dut == ones_model, $sformatf("|1> decisions %0d, want %0d", ones_dut, ones_model));
    begin
      automatic longint sum = 0;
      automatic int maxc = 0;
      for (int a = 0; a < NB * NB; a++) begin
        @(negedge clk); rd_addr = 12'(a);
        @(negedge clk);
        chk(int'(rd_data) == model[a], $sformatf("bin %0d got %0d want %0d", a, rd_data, model[a]));
        sum += longint'(rd_data);
        if (int'(rd_data) > maxc) maxc = int'(rd_data);
      end
      chk(sum == NSHOTS, $sformatf("histogram sum %0d", sum));
      chk(maxc < (1 << 20) - 1, "a bin counter saturated");
      $display("shots %0d, prepared |1> %0d, decided |1> %0d (%0d ppm), fullest bin %0d",
               NSHOTS, ones_true, ones_dut, ones_dut / (NSHOTS / 1000000), maxc);
    end
    chk(ones_dut > 114000 && ones_dut < 120000, "|1> population not 11.7 % within 0.3 %");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
