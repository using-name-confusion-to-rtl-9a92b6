// tb_pns_sds -- self-checking test of the Secret Domain Stack at its full
// 256-entry size: LIFO order, the full/empty flags, the overflow and
// underflow exceptions (request ignored while raised), a spill and refill
// through the privileged port as an operating system would do it, and
// setting the depth back as a longjmp does.
module tb_pns_sds;
  import pns_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic push, pop, empty, full, ovf, unf, pwe, dwe;
  phantom_t pdata, top, pwdata, prdata;
  logic [7:0] paddr;
  logic [8:0] pdepth, depth;

  pns_sds dut (.clk, .rst_n, .push_i(push), .push_data_i(pdata), .pop_i(pop),
    .top_o(top), .empty_o(empty), .full_o(full), .overflow_o(ovf), .underflow_o(unf),
    .priv_we_i(pwe), .priv_addr_i(paddr), .priv_wdata_i(pwdata), .priv_rdata_o(prdata),
    .priv_depth_we_i(dwe), .priv_depth_i(pdepth), .depth_o(depth));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  phantom_t model [$];
  phantom_t saved [256];
  initial begin
    {push, pop, pwe, dwe} = '0; pdata = 0; pwdata = 0; paddr = 0; pdepth = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    @(negedge clk);
    check(empty && !full && depth == 0, "empty after reset");
    pop = 1; #1 check(unf, "underflow when popping empty"); @(negedge clk); pop = 0;
    check(depth == 0, "underflowing pop ignored");
    // fill completely
    for (int i = 0; i < 256; i++) begin
      pdata = phantom_t'($urandom); push = 1; model.push_back(pdata);
      #1 check(!ovf, "no overflow while filling");
      @(negedge clk);
      check(top == model[$], "top is last pushed");
    end
    push = 0;
    check(full && depth == 256, "full at 256");
    pdata = 8'hAA; push = 1; #1 check(ovf, "overflow when full");
    @(negedge clk); push = 0;
    check(depth == 256 && top == model[$], "overflowing push ignored");
    // pop half in LIFO order
    for (int i = 0; i < 128; i++) begin
      check(top == model[$], $sformatf("LIFO pop %0d", i));
      pop = 1; @(negedge clk); pop = 0; void'(model.pop_back());
    end
    check(depth == 128, "depth after 128 pops");
    // longjmp: save the depth, push 5, restore the depth
    for (int i = 0; i < 5; i++) begin pdata = phantom_t'(i); push = 1; @(negedge clk); end
    push = 0; dwe = 1; pdepth = 128; @(negedge clk); dwe = 0;
    check(depth == 128 && top == model[$], "depth restored after longjmp");
    // spill: read all entries, set depth 0
    for (int i = 0; i < 128; i++) begin paddr = 8'(i); #1 saved[i] = prdata; check(prdata == model[i], "spill read"); end
    @(negedge clk); dwe = 1; pdepth = 0; @(negedge clk); dwe = 0;
    check(empty, $sformatf("empty after spill (depth %0d)", depth));
    // fill back with the privileged port
    for (int i = 0; i < 128; i++) begin pwe = 1; paddr = 8'(i); pwdata = saved[i]; @(negedge clk); end
    pwe = 0; dwe = 1; pdepth = 128; @(negedge clk); dwe = 0;
    while (model.size() > 0) begin
      check(top == model[$], "LIFO after refill");
      pop = 1; @(negedge clk); pop = 0; void'(model.pop_back());
    end
    check(empty, "empty at the end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
