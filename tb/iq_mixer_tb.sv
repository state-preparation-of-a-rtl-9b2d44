// iq_mixer_tb -- self-checking test of iq_mixer.
// Drives random signed 12-bit signal and reference words and checks, one clock
// later, prod_i[l] = sig[n]*ref[n] and prod_q[l] = sig[n]*ref[n-2] over the
// continuous sample index n = t*SPC + l, including the lanes whose shifted
// reference sample lies in the previous clock word. Also checks with a
// 62.5 MHz tone that the two-sample shift is a quarter period: the Q product
// of cos with cos delayed by 2 samples sums to zero over one period.
module iq_mixer_tb;
  localparam int SPC = 4, W = 12, NCLK = 300;
  logic clk = 0, rst = 1;
  logic [SPC-1:0][W-1:0] sig, ref_s;
  logic [SPC-1:0][2*W-1:0] prod_i, prod_q;
  int checks = 0, failures = 0;
  logic signed [W-1:0] s [NCLK * SPC];
  logic signed [W-1:0] r [NCLK * SPC];

  iq_mixer #(.SPC(SPC), .W(W), .Q_SHIFT(2)) dut (.clk, .rst, .sig, .ref_s, .prod_i, .prod_q);
  always #4 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input logic signed [2*W-1:0] got, input logic signed [2*W-1:0] want, input string what);
    checks++;
    if (got !== want) begin
      failures++;
      if (failures < 10) $display("%s: got %0d want %0d", what, got, want);
    end
  endtask

  initial begin
    // cos at fs/8 (62.5 MHz at 500 MSPS): 8 samples per period.
    int c8 [8] = '{1000, 707, 0, -707, -1000, -707, 0, 707};
    for (int i = 0; i < NCLK * SPC; i++) begin
      s[i] = W'($urandom);
      r[i] = W'($urandom);
    end
    for (int i = 0; i < 16; i++) begin  // first 4 words: tone
      s[i] = W'(c8[i % 8]);
      r[i] = W'(c8[i % 8]);
    end
    sig = '0; ref_s = '0;
    repeat (2) @(posedge clk);
    rst = 0;
    begin
      automatic longint qsum = 0, isum = 0;
      for (int t = 0; t < NCLK; t++) begin
        for (int l = 0; l < SPC; l++) begin sig[l] = s[t*SPC+l]; ref_s[l] = r[t*SPC+l]; end
        @(posedge clk); #1;
        for (int l = 0; l < SPC; l++) begin
          automatic int n = t * SPC + l;
          chk(prod_i[l], (2*W)'(s[n]) * (2*W)'(r[n]), "I");
          if (n >= 2) chk(prod_q[l], (2*W)'(s[n]) * (2*W)'(r[n-2]), "Q");
          if (t >= 2 && t < 4) begin
            qsum += longint'($signed(prod_q[l]));
            isum += longint'($signed(prod_i[l]));
          end
        end
      end
      // One full period (lanes 8..15): I sums to 4*1000^2 (approx), Q to 0.
      checks++;
      if (qsum != 0 || isum < 3990000) begin
        failures++;
        $display("tone: isum %0d qsum %0d", isum, qsum);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
