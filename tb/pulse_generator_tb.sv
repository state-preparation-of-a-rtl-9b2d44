// pulse_generator_tb -- self-checking test of pulse_generator.
// Loads an envelope (a ramp up, a flat top and a ramp down, plus a second
// pulse shape at another address), plays pulses at 62.5 MHz and 80 MHz and
// compares every output sample with env * cos/sin computed here from $sin/$cos
// (rounded to the table's 16 bits, then scaled to 14 bits by >>> 17).
// Also checks the 3-clock start latency, the pulse length, zero output when
// idle and the restart of a pulse by a new start.
module pulse_generator_tb;
  localparam int SPC = 4, DW = 14, EAW = 10, EW = 16, LW = 16;
  localparam real PI = 3.14159265358979323846;
  logic clk = 0, rst = 1;
  logic start = 0, env_we = 0, active;
  logic [EAW-1:0] env_addr = '0, env_waddr = '0;
  logic [LW-1:0] len = '0;
  logic [31:0] freq = '0;
  logic [EW-1:0] env_wdata = '0;
  logic [SPC-1:0][DW-1:0] out_i, out_q;
  int checks = 0, failures = 0;
  int cyc = 0;
  logic signed [EW-1:0] env_model [1 << EAW];

  pulse_generator #(.SPC(SPC), .DAC_W(DW), .ENV_AW(EAW), .ENV_W(EW), .LEN_W(LW)) dut (
    .clk, .rst, .start, .env_addr, .len, .freq, .env_we, .env_waddr, .env_wdata,
    .out_i, .out_q, .active);

  always #4 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    #300000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("cycle %0d: %s", cyc, what); end
  endtask

  function automatic int table_val(input int k);
    return int'($floor(32767.0 * $sin(2.0 * PI * real'(k % 1024) / 1024.0) + 0.5));
  endfunction

  // Expected 14-bit sample for envelope e at accumulated phase ph (32 bits).
  function automatic logic [DW-1:0] expect_s(input int e, input logic [31:0] ph, input bit q);
    int idx, t;
    longint p;
    idx = int'(ph[31:22]);
    t = q ? table_val(idx) : table_val(idx + 256);
    p = longint'(e) * longint'(t);
    return DW'(p >>> 17);
  endfunction

  task automatic write_env(input int a, input int v);
    @(negedge clk);
    env_we = 1; env_waddr = EAW'(a); env_wdata = EW'(v);
    env_model[a] = EW'(v);
    @(negedge clk);
    env_we = 0;
  endtask

  // Phase of the free-running accumulator, tracked here.
  logic [31:0] ph_model = '0;
  always @(posedge clk) if (rst) ph_model <= '0; else ph_model <= ph_model + 32'(SPC) * freq;

  // Plays one pulse and checks all its samples. Returns when done.
  task automatic play(input int addr, input int n, input logic [31:0] f);
    int t0;
    logic [31:0] ph0;
    @(negedge clk);
    freq = f;
    @(negedge clk);
    start = 1; env_addr = EAW'(addr); len = LW'(n);
    t0 = cyc;
    @(negedge clk);
    start = 0;
    // Output for envelope word j is registered at the edge ending clock t0+2+j
    // and uses the phase of clock t0+1+j.
    ph0 = ph_model;   // phase during clock t0+1
    chk(active == 0, "active too early");
    @(negedge clk);   // clock t0+2
    chk(active == 0, "active too early (2)");
    for (int j = 0; j < n; j++) begin
      @(negedge clk);
      chk(active == 1, $sformatf("active low in word %0d", j));
      for (int l = 0; l < SPC; l++) begin
        automatic logic [31:0] ph = ph0 + 32'(j * SPC + l) * f;
        automatic logic [DW-1:0] ei = expect_s(env_model[addr + j], ph, 0);
        automatic logic [DW-1:0] eq = expect_s(env_model[addr + j], ph, 1);
        chk(out_i[l] == ei, $sformatf("I word %0d lane %0d got %0d want %0d", j, l, $signed(out_i[l]), $signed(ei)));
        chk(out_q[l] == eq, $sformatf("Q word %0d lane %0d got %0d want %0d", j, l, $signed(out_q[l]), $signed(eq)));
      end
    end
    @(negedge clk);
    chk(active == 0 && out_i == '0 && out_q == '0, "output not idle after pulse");
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst = 0;
    // Pulse A at 0: 8-word ramp, 20-word flat top, 8-word ramp down.
    for (int j = 0; j < 8; j++)  write_env(j, (j + 1) * 4000);
    for (int j = 8; j < 28; j++) write_env(j, 32767);
    for (int j = 28; j < 36; j++) write_env(j, (36 - j) * 4000);
    // Pulse B at 512: negative values.
    for (int j = 0; j < 10; j++) write_env(512 + j, -3000 * j);
    play(0, 36, 32'h2000_0000);           // 62.5 MHz readout
    play(0, 36, 32'd687194767);           // 80 MHz drive
    play(512, 10, 32'd687194767);
    // Full-scale check at 62.5 MHz: 8 samples per period, peak = 8191.
    play(8, 2, 32'h2000_0000);
    // Restart while playing.
    @(negedge clk);
    freq = 32'h2000_0000;
    start = 1; env_addr = 0; len = 16'd30;
    @(negedge clk); start = 0;
    repeat (5) @(negedge clk);
    start = 1; env_addr = 10'd8; len = 16'd4;
    @(negedge clk); start = 0;
    repeat (2) @(negedge clk);
    chk(active == 1, "restarted pulse playing (first word)");
    repeat (3) @(negedge clk);
    chk(active == 1, "restarted pulse playing (last word)");
    @(negedge clk);
    chk(active == 0, "restarted pulse length 4");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
