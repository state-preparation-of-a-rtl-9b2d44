// iq_histogram_tb -- self-checking test of iq_histogram.
// Clears the histogram, then sends 3000 results: random points, runs of
// identical points on consecutive clocks (read-modify-write forwarding), points
// far outside the grid (border bins) and gaps of idle clocks. Every bin is then
// read back and compared with counts kept here. A second clear must zero all
// bins and the total.
module iq_histogram_tb;
  localparam int AW = 42, AB = 6, CW = 20, NB = 1 << AB;
  logic clk = 0, rst = 1;
  logic valid = 0, clear = 0, clearing;
  logic signed [AW-1:0] i_in = '0, q_in = '0;
  logic [5:0] shift = 6'd8;
  logic [2*AB-1:0] rd_addr = '0;
  logic [CW-1:0] rd_data;
  logic [31:0] total;
  int checks = 0, failures = 0;
  int model [NB * NB];
  int sent = 0;

  iq_histogram #(.ACC_W(AW), .AXIS_BITS(AB), .CNT_W(CW)) dut (
    .clk, .rst, .valid, .i_in, .q_in, .shift, .clear, .clearing, .rd_addr, .rd_data, .total);

  always #4 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("%s", what); end
  endtask

  function automatic int bin(input longint x);
    longint b = (x >>> 8) + NB / 2;
    if (b < 0) return 0;
    if (b > NB - 1) return NB - 1;
    return int'(b);
  endfunction

  task automatic put(input longint i, input longint q);
    @(negedge clk);
    valid = 1; i_in = AW'(i); q_in = AW'(q);
    model[bin(q) * NB + bin(i)]++;
    sent++;
  endtask

  task automatic idle(input int n);
    @(negedge clk); valid = 0;
    repeat (n) @(negedge clk);
  endtask

  task automatic do_clear();
    @(negedge clk); valid = 0; clear = 1;
    @(negedge clk); clear = 0;
    while (clearing) @(negedge clk);
    foreach (model[k]) model[k] = 0;
    sent = 0;
  endtask

  task automatic read_all();
    for (int a = 0; a < NB * NB; a++) begin
      @(negedge clk); rd_addr = (2*AB)'(a);
      @(negedge clk);
      chk(int'(rd_data) == model[a], $sformatf("bin %0d got %0d want %0d", a, rd_data, model[a]));
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst = 0;
    do_clear();
    for (int k = 0; k < 1500; k++) begin
      put(longint'($signed(16'($urandom))) >>> 1, longint'($signed(16'($urandom))) >>> 1);
      if (k % 97 == 0) idle(k % 4);
    end
    for (int k = 0; k < 40; k++) put(1000, -2000);          // same bin back to back
    for (int k = 0; k < 20; k++) begin put(5, 5); put(5, 5); put(-900, 300); end
    put(64'sd1 <<< 40, -(64'sd1 <<< 40));                   // far outside
    put(-(64'sd1 <<< 40), 64'sd1 <<< 40);
    for (int k = 0; k < 1400; k++)
      put(longint'($signed(12'($urandom))), longint'($signed(12'($urandom))));
    idle(4);
    chk(total == 32'(sent), $sformatf("total %0d want %0d", total, sent));
    read_all();
    do_clear();
    chk(total == 0, "total after clear");
    read_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
