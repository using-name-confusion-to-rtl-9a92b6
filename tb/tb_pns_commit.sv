// tb_pns_commit -- self-checking test of the commit-stage branch unit.
// Commit records are driven directly and every expected redirect, BTB and
// direction training, link value and exception is worked out in the
// testbench from the PNS equations: fall-throughs stay in their phantom,
// taken targets are re-named by nextPC = {p_next, PC_new - (p_next -
// p_new)*4}, predictions are judged by resolved address, a call's phantom
// goes to the SDS and a return joins it with the stacked address, a forged
// return address lands on PC + p*4 of the wrong instruction, a TRAP reached
// by a jump raises the security exception. The SDS is cut to 4 entries to
// reach its overflow and underflow handshakes quickly.
module tb_pns_commit;
  import pns_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  commit_t c; logic ready, redir, linkv, sexc, ovf, unf;
  xpc_t rpc; btb_train_t bt; bdb_train_t dt; va_t link; phantom_t prand, prd;
  logic pwe, dwe; logic [1:0] paddr; phantom_t pwd; logic [2:0] pdep, depth;

  pns_commit #(.SDS_DEPTH(4)) dut (.clk, .rst_n, .cmt_i(c), .cmt_ready_o(ready),
    .p_rand_i(prand), .redirect_valid_o(redir), .redirect_pc_o(rpc),
    .btb_train_o(bt), .bdb_train_o(dt), .link_valid_o(linkv), .link_lo_o(link),
    .security_exc_o(sexc), .sds_overflow_o(ovf), .sds_underflow_o(unf),
    .sds_priv_we_i(pwe), .sds_priv_addr_i(paddr), .sds_priv_wdata_i(pwd),
    .sds_priv_rdata_o(prd), .sds_priv_depth_we_i(dwe), .sds_priv_depth_i(pdep),
    .sds_depth_o(depth));

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

  function automatic va_t res(xpc_t x); return x.pc + 32'(x.p) * 4; endfunction
  function automatic xpc_t nm(int p, va_t va); return '{p: phantom_t'(p), pc: va - 32'(p) * 4}; endfunction

  // drive one record, look at the outputs, let it commit
  task automatic drive(xpc_t pc, cf_kind_t k, bit tk, va_t tgt, xpc_t pred);
    c = '{valid: 1'b1, pc: pc, kind: k, taken: tk, target: tgt, pred_next: pred};
    prand = phantom_t'($urandom);
    #1;
  endtask
  task automatic retire(); @(negedge clk); c.valid = 0; endtask

  xpc_t exp;
  initial begin
    c = '0; prand = 0; {pwe, dwe} = '0; paddr = 0; pwd = 0; pdep = 0;
    repeat (2) @(negedge clk); rst_n = 1; @(negedge clk);

    // 1. plain instruction, predicted sequential, in phantom 9
    drive(nm(9, 32'h1000), CF_NONE, 0, 0, nm(9, 32'h1004));
    check(!redir && !bt.valid && !dt.valid, "sequential: nothing to do"); retire();
    // 2. plain instruction, a stale BTB entry predicted a jump
    drive(nm(9, 32'h1004), CF_NONE, 0, 0, nm(3, 32'h2000));
    check(redir && rpc == nm(9, 32'h1008), "wrong taken prediction -> {p, PC+4}"); retire();
    // 3. jump correctly predicted in another phantom: no redirect, BTB re-randomised
    for (int i = 0; i < 50; i++) begin
      drive(nm(4, 32'h1010), CF_JUMP, 0, 32'h3000, nm($urandom % 256, 32'h3000));
      exp = '{p: prand, pc: 32'h3000 - 32'(prand) * 4};
      check(!redir, "jump predicted by address");
      check(bt.valid && bt.va == 32'h1010 && bt.btype == BT_JUMP && bt.target == exp, "BTB trained with nextPC");
      retire();
    end
    // 4. jump mispredicted (sequential) -> redirect to random phantom of target
    drive(nm(4, 32'h1010), CF_JUMP, 0, 32'h3000, nm(4, 32'h1014));
    check(redir && rpc == '{p: prand, pc: 32'h3000 - 32'(prand) * 4} && res(rpc) == 32'h3000, "jump redirect");
    retire();
    // 5. conditional not taken / taken
    drive(nm(2, 32'h3000), CF_COND, 0, 32'h4000, nm(2, 32'h3004));
    check(!redir && !bt.valid && dt.valid && !dt.taken && dt.va == 32'h3000, "cond not taken");
    retire();
    drive(nm(2, 32'h3004), CF_COND, 1, 32'h4000, nm(2, 32'h3008));
    check(redir && res(rpc) == 32'h4000 && rpc.p == prand && dt.valid && dt.taken && bt.valid && bt.btype == BT_COND, "cond taken, mispredicted");
    retire();
    // 6. call from phantom 5, return with the untouched stacked address
    drive(nm(5, 32'h4000), CF_CALL, 0, 32'h5000, nm(77, 32'h5000));
    check(linkv && link == nm(5, 32'h4004).pc, "link is low 32 bits of return name");
    check(!redir && bt.btype == BT_CALL, "call predicted"); retire();
    check(depth == 1, "SDS holds one index");
    drive(nm(77, 32'h5010), CF_RET, 0, nm(5, 32'h4004).pc, nm(5, 32'h4004));
    check(!redir && bt.valid && bt.btype == BT_RET, "return joins SDS index and stack address");
    retire(); check(depth == 0, "SDS popped");
    // 7. forged return address: attacker writes gadget G as seen in phantom 0
    drive(nm(7, 32'h4100), CF_CALL, 0, 32'h5000, nm(1, 32'h5000)); retire();
    drive(nm(1, 32'h5010), CF_RET, 0, 32'h6004, nm(7, 32'h4104));
    check(redir && res(rpc) == 32'h6004 + 7*4, "forged address lands 7 instructions away");
    retire();
    // 8. TRAP reached by a jump vs by fall-through
    drive(nm(3, 32'h6000), CF_TRAP, 0, 0, nm(3, 32'h6004));
    check(sexc, "TRAP after a taken return raises the security exception"); retire();
    drive(nm(3, 32'h6004), CF_NONE, 0, 0, nm(3, 32'h6008)); retire();
    drive(nm(3, 32'h6008), CF_TRAP, 0, 0, nm(3, 32'h600C));
    check(!sexc && !redir, "TRAP reached by fall-through is a no-op"); retire();
    // 9. SDS overflow with 4 entries, spilled by the handler
    for (int i = 0; i < 4; i++) begin drive(nm(10 + i, 32'h7000), CF_CALL, 0, 32'h8000, nm(0, 32'h8000)); retire(); end
    drive(nm(20, 32'h7000), CF_CALL, 0, 32'h8000, nm(0, 32'h8000));
    check(!ready && ovf && !linkv && !bt.valid, "overflow holds the call");
    @(negedge clk); check(depth == 4, "depth unchanged while held");
    paddr = 2; #1 check(prd == 8'd12, "handler reads entry 2");
    dwe = 1; pdep = 0; @(negedge clk); dwe = 0; #1;
    check(ready && !ovf && linkv, "call completes after spill"); retire();
    check(depth == 1, "pushed after spill");
    drive(nm(0, 32'h8010), CF_RET, 0, nm(20, 32'h7004).pc, nm(20, 32'h7004));
    check(ready && !redir, "return after spill"); retire();
    // 10. underflow: handler refills one entry (phantom 13)
    drive(nm(0, 32'h8010), CF_RET, 0, nm(13, 32'h7004).pc, nm(13, 32'h7004));
    check(!ready && unf, "underflow holds the return");
    @(negedge clk); pwe = 1; paddr = 0; pwd = 8'd13; @(negedge clk); pwe = 0;
    dwe = 1; pdep = 1; @(negedge clk); dwe = 0; #1;
    check(ready && !unf && !redir, "return completes with the refilled index");
    retire();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
