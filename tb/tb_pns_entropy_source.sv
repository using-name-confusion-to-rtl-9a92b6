// tb_pns_entropy_source -- checks that the random phantom index source gives
// every one of the 256 values, that each bit is one about half the time, and
// that the value changes from cycle to cycle.
module tb_pns_entropy_source;
  import pns_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  phantom_t rnd;
  always #5 clk = ~clk;

  pns_entropy_source dut (.clk, .rst_n, .rnd_o(rnd));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int hist [256];
  int ones [PHANTOM_BITS];
  int changes;
  phantom_t prev;
  localparam int N = 25600;
  initial begin
    foreach (hist[i]) hist[i] = 0;
    foreach (ones[i]) ones[i] = 0;
    changes = 0;
    repeat (2) @(posedge clk);
    #1 check(rnd == '0, "reset value");
    rst_n = 1;
    @(posedge clk); #1 prev = rnd;
    for (int i = 0; i < N; i++) begin
      @(posedge clk); #1;
      hist[rnd]++;
      for (int b = 0; b < int'(PHANTOM_BITS); b++) ones[b] += int'(rnd[b]);
      if (rnd != prev) changes++;
      prev = rnd;
    end
    foreach (hist[i]) check(hist[i] > 40 && hist[i] < 180, $sformatf("value %0d seen %0d times", i, hist[i]));
    foreach (ones[b]) check(ones[b] > N*45/100 && ones[b] < N*55/100, $sformatf("bit %0d ones %0d", b, ones[b]));
    check(changes > N*95/100, "value changes each cycle");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
