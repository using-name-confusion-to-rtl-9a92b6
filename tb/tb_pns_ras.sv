// tb_pns_ras -- self-checking test of the 48-entry return address stack
// against a bounded reference stack that keeps the newest 48 entries: random
// pushes and pops, a run of 60 pushes to overflow it, and popping it empty.
module tb_pns_ras;
  import pns_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic push, pop, valid;
  xpc_t pd, top;
  pns_ras dut (.clk, .rst_n, .push_i(push), .push_data_i(pd), .pop_i(pop),
               .top_o(top), .valid_o(valid));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  xpc_t model [$];
  task automatic step(bit do_push);
    if (do_push) begin
      pd = '{p: phantom_t'($urandom), pc: $urandom}; push = 1; pop = 0;
      model.push_back(pd);
      if (model.size() > 48) void'(model.pop_front());
    end else begin
      push = 0; pop = 1;
      if (model.size() > 0) void'(model.pop_back());
    end
    @(negedge clk); push = 0; pop = 0;
    check(valid == (model.size() > 0), "valid flag");
    if (model.size() > 0) check(top == model[$], "top matches");
  endtask

  initial begin
    push = 0; pop = 0; pd = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    @(negedge clk); check(!valid, "empty after reset");
    for (int i = 0; i < 2000; i++) step(($urandom % 100) < 55);
    for (int i = 0; i < 60; i++) step(1);
    for (int i = 0; i < 55; i++) step(0);
    check(!valid, "empty after popping all");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
