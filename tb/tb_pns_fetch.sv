// tb_pns_fetch -- self-checking test of the PNS fetch stage. With a page
// walker and memory model below it, and commit-side redirects and training
// driven by the testbench, it checks that every delivered instruction's
// address is its name resolved (PC + p*4) and its word is the memory word at
// the translated physical address; that fall-throughs stay in the phantom;
// that a redirect re-names the stream; that a trained jump, call, return
// (through the RAS) and conditional branch (through the bi-mode predictor)
// are followed to the trained names; that the back-end can stall it; and
// that the ITLB and I-cache fill once per page and per line.
module tb_pns_fetch;
  import pns_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic redir, ovalid, oready, wreq, wresp, mreqv, mreqr, mrespv;
  xpc_t rpc, opc, opred; va_t ova; logic [31:0] oinsn, maddr, mdata;
  btb_train_t bt; bdb_train_t dt; logic [19:0] wvpn, wppn;

  pns_fetch dut (.clk, .rst_n, .redirect_valid_i(redir), .redirect_pc_i(rpc),
    .btb_train_i(bt), .bdb_train_i(dt), .out_valid_o(ovalid), .out_ready_i(oready),
    .out_pc_o(opc), .out_va_o(ova), .out_insn_o(oinsn), .out_pred_next_o(opred),
    .walk_req_o(wreq), .walk_vpn_o(wvpn), .walk_resp_i(wresp), .walk_ppn_i(wppn),
    .itlb_flush_i(1'b0), .mem_req_valid_o(mreqv), .mem_req_ready_i(mreqr),
    .mem_req_addr_o(maddr), .mem_resp_valid_i(mrespv), .mem_resp_data_i(mdata));

  pns_tb_memsys u_mem (.clk, .rst_n, .walk_req(wreq), .walk_vpn(wvpn), .walk_resp(wresp),
    .walk_ppn(wppn), .mem_req_valid(mreqv), .mem_req_ready(mreqr), .mem_req_addr(maddr),
    .mem_resp_valid(mrespv), .mem_resp_data(mdata));

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

  function automatic xpc_t nm(int p, va_t va); return '{p: phantom_t'(p), pc: va - 32'(p) * 4}; endfunction
  function automatic logic [31:0] image(logic [31:0] pa); return pa ^ 32'hA5A5_0000; endfunction

  int stall_pct = 0;
  // receive one instruction, with checks of name, address and word
  task automatic take(output xpc_t pc, output va_t va, output xpc_t pred);
    do begin
      @(negedge clk);
      oready = ($urandom % 100) >= stall_pct;
      #1;
    end while (!(ovalid && oready));
    pc = opc; va = ova; pred = opred;
    check(va == pc.pc + 32'(pc.p) * 4, "address is resolved name");
    check(oinsn == image({va[31:12] ^ 20'h10, va[11:0]}), $sformatf("word at %h: %h ppn %h", va, oinsn, dut.tlb_ppn));
    @(posedge clk); #1 oready = 0;
  endtask
  task automatic redirect(xpc_t to);
    @(negedge clk); redir = 1; rpc = to; @(negedge clk); redir = 0;
  endtask
  task automatic train_btb(va_t va, br_type_t t, xpc_t tgt);
    @(negedge clk); bt = '{valid: 1'b1, va: va, btype: t, target: tgt}; @(negedge clk); bt = '0;
  endtask

  xpc_t pc, pred; va_t va;
  initial begin
    redir = 0; rpc = '0; oready = 0; bt = '0; dt = '0;
    for (int i = 0; i < 32768; i++) u_mem.mem[i] = image(32'(i) * 4);
    repeat (2) @(negedge clk); rst_n = 1;
    // reset PC 0x1000, phantom 0, sequential
    for (int i = 0; i < 40; i++) begin
      take(pc, va, pred);
      check(pc == nm(0, 32'h1000 + 32'(i) * 4), $sformatf("sequential %0d", i));
      check(pred == '{p: pc.p, pc: pc.pc + 4}, "sequential prediction keeps phantom");
    end
    check(u_mem.walks == 1, "one page walk");
    check(u_mem.refills == 3, "three line refills for 40 words");
    // redirect into phantom 3
    redirect(nm(3, 32'h2000));
    stall_pct = 40;
    for (int i = 0; i < 20; i++) begin
      take(pc, va, pred);
      check(pc == nm(3, 32'h2000 + 32'(i) * 4), "renamed stream stays in phantom 3");
    end
    // train: jump at 0x2010 -> {9, 0x1800}; call at 0x1810 -> {4, 0x1900};
    // return at 0x1908; conditional at 0x1820 -> {6, 0x1A00}
    train_btb(32'h2010, BT_JUMP, nm(9, 32'h1800));
    train_btb(32'h1810, BT_CALL, nm(4, 32'h1900));
    train_btb(32'h1908, BT_RET,  nm(0, 32'h0));
    train_btb(32'h1820, BT_COND, nm(6, 32'h1A00));
    for (int i = 0; i < 6; i++) begin
      @(negedge clk); dt = '{valid: 1'b1, va: 32'h1820, taken: 1'b1}; @(negedge clk); dt = '0;
    end
    for (int round = 0; round < 3; round++) begin
      redirect(nm(round * 50, 32'h200C));
      take(pc, va, pred); check(pc == nm(round * 50, 32'h200C), "redirect target");
      take(pc, va, pred); check(va == 32'h2010 && pred == nm(9, 32'h1800), "jump predicted from BTB");
      for (int i = 0; i < 5; i++) begin
        take(pc, va, pred); check(pc == nm(9, 32'h1800 + 32'(i) * 4), "jump target in phantom 9");
      end
      for (int i = 0; i < 3; i++) begin
        take(pc, va, pred); check(pc == nm(4, 32'h1900 + 32'(i) * 4), "call target in phantom 4");
      end
      take(pc, va, pred); check(pc == nm(9, 32'h1814), "return predicted by RAS in caller's phantom");
      for (int i = 0; i < 3; i++) take(pc, va, pred);
      check(va == 32'h1820 && pred == nm(6, 32'h1A00), "conditional predicted taken");
      take(pc, va, pred); check(pc == nm(6, 32'h1A00), "conditional target");
    end
    check(u_mem.walks == 2, "ITLB: pages 0x1 and 0x2 walked once each");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
