// ref_delay_tb -- self-checking test of ref_delay.
// Streams random 12-bit samples, keeps every sample in a reference array and
// checks, for several delay settings from 0 to MAX_DELAY, that output lane l
// of clock t equals input sample t*SPC + l - delay of the previous clock
// (one register of latency).
module ref_delay_tb;
  localparam int SPC = 4, W = 12, MAXD = 64, DW = $clog2(MAXD + 1);
  localparam int NCLK = 200;

  logic clk = 0, rst = 1;
  logic [DW-1:0] delay;
  logic [SPC-1:0][W-1:0] din, dout;
  int checks = 0, failures = 0;
  logic [W-1:0] samples [NCLK * SPC];

  ref_delay #(.SPC(SPC), .W(W), .MAX_DELAY(MAXD)) dut (.clk, .rst, .delay, .din, .dout);

  always #4 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int dl [6] = '{0, 1, 2, 5, 37, 64};
    for (int i = 0; i < NCLK * SPC; i++) samples[i] = W'($urandom);
    din = '0;
    delay = '0;
    repeat (2) @(posedge clk);
    rst = 0;
    foreach (dl[k]) begin
      delay = DW'(dl[k]);
      for (int t = 0; t < NCLK; t++) begin
        for (int l = 0; l < SPC; l++) din[l] = samples[t * SPC + l];
        @(posedge clk);
        #1;
        // dout now holds the result computed from word t.
        if (t * SPC >= dl[k] + SPC) begin
          for (int l = 0; l < SPC; l++) begin
            checks++;
            if (dout[l] !== samples[t * SPC + l - dl[k]]) begin
              failures++;
              if (failures < 10) $display("delay %0d t %0d lane %0d: got %h want %h",
                                          dl[k], t, l, dout[l], samples[t * SPC + l - dl[k]]);
            end
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
