// tb_pns_itlb -- self-checking test of the 32-entry instruction TLB: refills,
// hits for any address in a mapped page (including the two resolved
// addresses of the paper's example), round-robin eviction of the oldest
// entry after 33 refills, and flush.
module tb_pns_itlb;
  import pns_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  va_t lva; logic hit, fill, flush; logic [19:0] ppn, fvpn, fppn;
  pns_itlb dut (.clk, .rst_n, .lookup_va_i(lva), .hit_o(hit), .ppn_o(ppn),
                .fill_i(fill), .fill_vpn_i(fvpn), .fill_ppn_i(fppn), .flush_i(flush));

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

  function automatic logic [19:0] pmap(logic [19:0] v); return v * 20'd7 + 20'h1234; endfunction
  logic [19:0] vpns [33];
  initial begin
    fill = 0; flush = 0; fvpn = 0; fppn = 0; lva = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    // the paper's example page: 0x00BB_F000 -> 0x0011_D000
    fill = 1; fvpn = 20'h00BBF; fppn = 20'h0011D; @(negedge clk); fill = 0;
    lva = 32'h00BB_FFF8; #1 check(hit && {ppn, lva[11:0]} == 32'h0011_DFF8, "example page");
    lva = 32'h00BB_FFF4 + 2*2; #1 check(hit && ppn == 20'h0011D, "phantom 2 name resolves to same entry");
    for (int i = 1; i < 33; i++) begin
      vpns[i] = 20'h40000 + 20'(i) * 20'd3;
      fill = 1; fvpn = vpns[i]; fppn = pmap(vpns[i]); @(negedge clk);
    end
    fill = 0;
    // the 33rd refill replaced the first entry
    lva = 32'h00BB_FFF8; #1 check(!hit, "oldest entry evicted");
    for (int i = 1; i < 33; i++) begin
      lva = {vpns[i], 12'($urandom)}; #1 check(hit && ppn == pmap(vpns[i]), $sformatf("page %0d", i));
    end
    lva = 32'h7FFF_F000; #1 check(!hit, "unmapped page misses");
    flush = 1; @(negedge clk); flush = 0;
    for (int i = 1; i < 33; i++) begin lva = {vpns[i], 12'h0}; #1 check(!hit, "flushed"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
