// tb_pns_top -- end-to-end test of the PNS front-end at its default sizes.
//
// A small program is generated into memory in a test-only encoding
// (bits 31:28 opcode; 27:24 loop count; 23:0 target address):
//   0 NOP   1 COND (taken while its count of taken runs is below N, then
//   falls through once)   2 JUMP   3 CALL   4 RET   5 TRAP
//   6 DCOND (taken when the call depth has reached D_RECURSE)
// Every basic block starts with a TRAP and every branch target points one
// instruction past it, as PNS-TRAP binaries are laid out; a block entered by
// falling through steps over its TRAP. The program is a main loop calling
// a chain of functions with inner loops and a recursive function that
// recurses D_RECURSE deep, beyond both the 48-entry RAS and the 256-entry SDS.
//
// The testbench plays the back-end: it takes fetched instructions into a
// 4-deep queue, commits them in order with random stalls, executes them
// against its own architectural model (program counter, return-address
// stack in "memory", call depth, loop counts), and checks that
//   * every committed instruction is the one the program reaches next, and
//     its resolved address is PC + p*4 of the name it was fetched with;
//   * the unit redirects exactly when the predicted name resolves elsewhere
//     than the real successor, and the redirect and BTB training name it;
//   * the link value of a call is the low 32 bits of its return name.
// It also acts as the operating system: it spills the SDS on overflow into a
// stack of saved stacks and refills it on underflow. Finally it mounts
// return-address attacks: forged return addresses aimed at a basic block as
// seen from a guessed phantom. A guess one phantom off lands on the block's
// TRAP and must raise the security exception; a phantom-0 guess must land at
// gadget + p*4. After each attack the program is restarted.
// Each mechanism (phantom switch, correct taken prediction, misprediction,
// RAS return, fall-through TRAP, fetch stall, ITLB walk, I-cache refill, SDS
// overflow/underflow, TRAP security exception, diverted attack) is counted,
// and one that never happens counts as a failure.
module tb_pns_top;
  import pns_pkg::*;
  localparam int D_RECURSE = 300;
  localparam int ITERS     = 4;
  localparam int NFUNC     = 12;
  localparam int N_ATTACKS = 24;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic ovalid, oready, cready, linkv, sexc, ovf, unf, beredir;
  xpc_t opc, opred, beredir_pc; va_t ova, link; logic [31:0] oinsn;
  commit_t cmt;
  logic pwe, dwe; logic [7:0] paddr; phantom_t pwd, prd; logic [8:0] pdep, sdepth;
  logic wreq, wresp, mreqv, mreqr, mrespv; logic [19:0] wvpn, wppn; logic [31:0] maddr, mdata;

  pns_top dut (.clk, .rst_n,
    .out_valid_o(ovalid), .out_ready_i(oready), .out_pc_o(opc), .out_va_o(ova),
    .out_insn_o(oinsn), .out_pred_next_o(opred),
    .cmt_i(cmt), .cmt_ready_o(cready), .link_valid_o(linkv), .link_lo_o(link),
    .security_exc_o(sexc), .sds_overflow_o(ovf), .sds_underflow_o(unf),
    .be_redirect_valid_i(beredir), .be_redirect_pc_i(beredir_pc),
    .sds_priv_we_i(pwe), .sds_priv_addr_i(paddr), .sds_priv_wdata_i(pwd),
    .sds_priv_rdata_o(prd), .sds_priv_depth_we_i(dwe), .sds_priv_depth_i(pdep),
    .sds_depth_o(sdepth),
    .walk_req_o(wreq), .walk_vpn_o(wvpn), .walk_resp_i(wresp), .walk_ppn_i(wppn),
    .itlb_flush_i(1'b0),
    .mem_req_valid_o(mreqv), .mem_req_ready_i(mreqr), .mem_req_addr_o(maddr),
    .mem_resp_valid_i(mrespv), .mem_resp_data_i(mdata));

  pns_tb_memsys u_mem (.clk, .rst_n, .walk_req(wreq), .walk_vpn(wvpn), .walk_resp(wresp),
    .walk_ppn(wppn), .mem_req_valid(mreqv), .mem_req_ready(mreqr), .mem_req_addr(maddr),
    .mem_resp_valid(mrespv), .mem_resp_data(mdata));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  // ---------------- program ----------------
  localparam logic [3:0] OP_NOP = 0, OP_COND = 1, OP_JUMP = 2, OP_CALL = 3,
                         OP_RET = 4, OP_TRAP = 5, OP_DCOND = 6;
  localparam va_t MAIN = 32'h1000, FUNCS = 32'h2000, RECUR = 32'h6000;
  function automatic logic [31:0] enc(logic [3:0] op, int n, va_t t);
    return {op, 4'(n), t[23:0]};
  endfunction
  function automatic logic [31:0] pa_of(va_t va); return {va[31:12] ^ 20'h10, va[11:0]}; endfunction
  task automatic put(va_t va, logic [31:0] w); u_mem.mem[15'(pa_of(va) >> 2)] = w; endtask

  va_t main_loop, gadgets [NFUNC];
  task automatic build();
    va_t a;
    for (int i = 0; i < 32768; i++) u_mem.mem[i] = '0;   // NOP everywhere
    a = MAIN;
    put(a, enc(OP_TRAP, 0, 0)); a += 4;
    main_loop = a;
    put(a, enc(OP_NOP, 0, 0)); a += 4;
    for (int f = 0; f < NFUNC; f += 2) begin
      put(a, enc(OP_CALL, 0, FUNCS + 32'(f) * 32'h100 + 4)); a += 4;
      put(a, enc(OP_NOP, 0, 0)); a += 4;
    end
    put(a, enc(OP_COND, 2, main_loop)); a += 4;      // repeat the calls 3 times
    put(a, enc(OP_TRAP, 0, 0)); a += 4;              // fall-through block
    put(a, enc(OP_CALL, 0, RECUR + 4)); a += 4;
    put(a, enc(OP_NOP, 0, 0)); a += 4;
    put(a, enc(OP_JUMP, 0, main_loop)); a += 4;
    for (int f = 0; f < NFUNC; f++) begin
      va_t b;
      b = FUNCS + 32'(f) * 32'h100;
      gadgets[f] = b + 4;
      put(b + 0,  enc(OP_TRAP, 0, 0));
      put(b + 4,  enc(OP_NOP, 0, 0));
      put(b + 8,  enc(OP_TRAP, 0, 0));               // fall-through block: loop head
      put(b + 12, enc(OP_NOP, 0, 0));
      put(b + 16, enc(OP_NOP, 0, 0));
      put(b + 20, enc(OP_COND, f % 4, b + 12));
      put(b + 24, enc(OP_TRAP, 0, 0));
      if (f + 1 < NFUNC) begin
        put(b + 28, enc(OP_CALL, 0, FUNCS + 32'(f + 1) * 32'h100 + 4));
        put(b + 32, enc(OP_NOP, 0, 0));
        put(b + 36, enc(OP_RET, 0, 0));
      end else begin
        put(b + 28, enc(OP_RET, 0, 0));
      end
    end
    put(RECUR + 0,  enc(OP_TRAP, 0, 0));
    put(RECUR + 4,  enc(OP_NOP, 0, 0));
    put(RECUR + 8,  enc(OP_DCOND, 0, RECUR + 32'h18));
    put(RECUR + 12, enc(OP_CALL, 0, RECUR + 4));
    put(RECUR + 16, enc(OP_NOP, 0, 0));
    put(RECUR + 20, enc(OP_TRAP, 0, 0));
    put(RECUR + 24, enc(OP_RET, 0, 0));
  endtask

  // ---------------- architectural model ----------------
  typedef struct packed { xpc_t pc; va_t va; logic [31:0] insn; xpc_t pred; } fetched_t;
  fetched_t q [$];
  va_t      arch_pc;
  va_t      arch_stack [$];   // return addresses as stored in memory
  va_t      gold_ret   [$];   // return targets a correct program reaches
  phantom_t gold_p     [$];   // phantom of each open call (what the SDS should hold)
  int       loopcnt [va_t];
  bit       prev_taken;
  phantom_t kstack [$];       // OS "stack of stacks" for SDS spills, 256 entries per spill
  phantom_t last_p;

  // mechanism counters
  int n_commit, n_phantom_switch, n_taken_ok, n_mispredict, n_ras_ok, n_ft_trap,
      n_stall, n_overflow, n_underflow, n_sec_exc, n_diverted, n_succeeded, n_iter;

  function automatic va_t res(xpc_t x); return x.pc + 32'(x.p) * 4; endfunction

  task automatic reset_model(va_t start);
    arch_pc = start; arch_stack.delete(); gold_ret.delete(); gold_p.delete();
    loopcnt.delete(); kstack.delete(); q.delete();
  endtask

  // OS handlers, run while the back-end is held
  task automatic os_spill();
    for (int i = 0; i < 256; i++) begin paddr = 8'(i); #1 kstack.push_back(prd); end
    @(negedge clk); dwe = 1; pdep = 0; @(negedge clk); dwe = 0;
    n_overflow++;
  endtask
  task automatic os_fill();
    check(kstack.size() >= 256, "underflow with a saved stack available");
    if (kstack.size() < 256) return;
    for (int i = 255; i >= 0; i--) begin
      @(negedge clk); pwe = 1; paddr = 8'(i); pwd = kstack.pop_back();
    end
    @(negedge clk); pwe = 0; dwe = 1; pdep = 9'd256; @(negedge clk); dwe = 0;
    n_underflow++;
  endtask

  // attack state
  int  attack_mode;      // 0 none, 1 armed: one-off guess, 2 armed: phantom-0 guess
  bit  attack_landing;   // next commit is the landing instruction
  bit  restart_pending;
  int  attacks_done;

  // ---------------- back-end loop ----------------
  int cycles;
  initial begin
    n_commit = 0; n_phantom_switch = 0; n_taken_ok = 0; n_mispredict = 0; n_ras_ok = 0;
    n_ft_trap = 0; n_stall = 0; n_overflow = 0; n_underflow = 0; n_sec_exc = 0;
    n_diverted = 0; n_succeeded = 0; n_iter = 0;
    attack_mode = 0; attack_landing = 0; restart_pending = 0; attacks_done = 0;
    oready = 0; cmt = '0; beredir = 0; beredir_pc = '0;
    {pwe, dwe} = '0; paddr = 0; pwd = 0; pdep = 0;
    build();
    reset_model(MAIN);
    prev_taken = 0; last_p = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    forever begin
      @(negedge clk);
      cycles++;
      beredir = 0;
      cmt = '0;
      if (restart_pending) begin
        // the program is killed and restarted from main by the back-end
        restart_pending = 0;
        beredir = 1; beredir_pc.p = phantom_t'($urandom);
        beredir_pc.pc = main_loop - 32'(beredir_pc.p) * 4;   // any name of main_loop
        dwe = 1; pdep = 0;
        reset_model(main_loop);
        oready = 0;
        @(negedge clk); dwe = 0; beredir = 0;
        continue;
      end
      oready = (q.size() < 4) && (($urandom % 100) < 80);
      if (q.size() > 0 && ($urandom % 100) < 85) begin
        fetched_t h;
        logic [3:0] op; va_t t, next_va; bit tk; cf_kind_t k;
        h = q[0];
        op = h.insn[31:28]; t = {8'h0, h.insn[23:0]};
        tk = 0; k = CF_NONE;
        unique case (op)
          OP_NOP:  k = CF_NONE;
          OP_TRAP: k = CF_TRAP;
          OP_COND: begin
            int c;
            c = loopcnt.exists(h.va) ? loopcnt[h.va] : 0;
            k = CF_COND; tk = c < int'(h.insn[27:24]);
          end
          OP_DCOND: begin k = CF_COND; tk = gold_ret.size() >= D_RECURSE; end
          OP_JUMP: begin k = CF_JUMP; tk = 1; end
          OP_CALL: begin k = CF_CALL; tk = 1; end
          OP_RET:  begin
            k = CF_RET; tk = 1;
            if (attack_mode != 0 && arch_stack.size() > 0 && gold_p.size() > 0) begin
              // the attacker overwrites the stacked return address with a gadget
              int g, pg;
              g  = $urandom % NFUNC;
              pg = (attack_mode == 1) ? int'(gold_p[$]) + 1 : 0;
              arch_stack[$] = gadgets[g] - 32'(pg) * 4;
            end
            t = (arch_stack.size() > 0) ? arch_stack[$] : 32'h0;
          end
          default: k = CF_NONE;
        endcase
        cmt = '{valid: 1'b1, pc: h.pc, kind: k, taken: tk, target: t, pred_next: h.pred};
        #1;
        if (!cready) begin
          // SDS exception: the OS runs, the instruction commits afterwards
          cmt = '0; oready = 0;
          if (ovf) os_spill();
          else if (unf) os_fill();
          else check(0, "commit held without an SDS exception");
          continue;
        end
        // ---- checks on the committed instruction ----
        n_commit++;
        check(h.va == arch_pc, $sformatf("commit %0d: va %h expected %h", n_commit, h.va, arch_pc));
        check(h.va == res(h.pc), "resolved address of the fetched name");
        if (h.pc.p != last_p) n_phantom_switch++;
        last_p = h.pc.p;
        if (k == CF_RET) begin
          phantom_t ps;
          ps = gold_p.size() > 0 ? gold_p[$] : phantom_t'(0);
          next_va = t + 32'(ps) * 4;
        end else
          next_va = tk ? t : h.va + 4;
        check(sexc == (k == CF_TRAP && prev_taken), $sformatf("security exception at %h", h.va));
        if (k == CF_TRAP && !prev_taken) n_ft_trap++;
        check(dut.c_redirect == (res(h.pred) != next_va), $sformatf("redirect decision at %h", h.va));
        if (dut.c_redirect) begin
          n_mispredict++;
          check(res(dut.c_redirect_pc) == next_va, "redirect names the real successor");
        end else if (tk) begin
          n_taken_ok++;
          if (k == CF_RET) n_ras_ok++;
        end
        if (tk) check(dut.btb_train.valid && res(dut.btb_train.target) == next_va, "BTB trained with a name of the successor");
        if (k == CF_CALL) check(linkv && link == h.pc.pc + 4, "link value is the low half of the return name");
        // attack bookkeeping
        if (attack_landing) begin
          attack_landing = 0;
          if (k == CF_TRAP) n_sec_exc += int'(sexc);
          restart_pending = 1;
        end
        if (k == CF_RET && attack_mode != 0) begin
          // where did the forged return go?
          if (attack_mode == 1) check(next_va + 4 == arch_stack[$] + 32'(int'(gold_p[$]) + 1) * 4 && (u_mem.mem[15'(pa_of(next_va) >> 2)][31:28] == OP_TRAP),
                                      "one-off guess lands on the TRAP before the gadget");
          if (gold_p[$] == 0) n_succeeded++; else n_diverted++;
          attack_mode = 0; attack_landing = 1; attacks_done++;
        end
        // ---- architectural update ----
        if (op == OP_COND) loopcnt[h.va] = tk ? (loopcnt.exists(h.va) ? loopcnt[h.va] + 1 : 1) : 0;
        if (k == CF_CALL) begin
          arch_stack.push_back(link); gold_ret.push_back(h.va + 4); gold_p.push_back(h.pc.p);
        end
        if (k == CF_RET) begin
          if (attack_landing == 0) check(next_va == gold_ret[$], "return reaches its call site");
          void'(arch_stack.pop_back()); void'(gold_ret.pop_back()); void'(gold_p.pop_back());
        end
        if (op == OP_JUMP && t == main_loop) n_iter++;
        prev_taken = tk;
        arch_pc = next_va;
        void'(q.pop_front());
        if (dut.c_redirect) begin
          q.delete();
          oready = 0;      // whatever fetch offers in this cycle is wrong-path
        end
        // arm attacks once the main loop has run ITERS times
        if (n_iter >= ITERS && attack_mode == 0 && !attack_landing && !restart_pending
            && attacks_done < N_ATTACKS && gold_p.size() > 0)
          attack_mode = (attacks_done % 2 == 0) ? 1 : 2;
      end else begin
        #1;
      end
      if (ovalid && !oready) n_stall++;
      if (ovalid && oready) q.push_back('{pc: opc, va: ova, insn: oinsn, pred: opred});
      if (attacks_done >= N_ATTACKS && !attack_landing && !restart_pending) break;
    end
    report();
  end

  task automatic report();
    $display("commits %0d cycles %0d: phantom switches %0d, taken predicted %0d, mispredicts %0d, RAS returns %0d,",
             n_commit, cycles, n_phantom_switch, n_taken_ok, n_mispredict, n_ras_ok);
    $display("  fall-through TRAPs %0d, fetch stalls %0d, ITLB walks %0d, I-cache refills %0d,",
             n_ft_trap, n_stall, u_mem.walks, u_mem.refills);
    $display("  SDS overflows %0d underflows %0d, TRAP exceptions %0d, attacks diverted %0d succeeded %0d",
             n_overflow, n_underflow, n_sec_exc, n_diverted, n_succeeded);
    check(n_phantom_switch > 0, "phantom switches happened");
    check(n_taken_ok > 0, "taken branches predicted");
    check(n_mispredict > 0, "mispredictions happened");
    check(n_ras_ok > 0, "returns predicted by the RAS");
    check(n_ft_trap > 0, "fall-through TRAPs stepped over");
    check(n_stall > 0, "fetch stalled by the back-end");
    check(u_mem.walks > 0, "ITLB walks happened");
    check(u_mem.refills > 0, "I-cache refills happened");
    check(n_overflow > 0, "SDS overflow handled");
    check(n_underflow > 0, "SDS underflow handled");
    check(n_sec_exc > 0, "TRAP security exceptions raised");
    check(n_diverted > 0, "attacks diverted");
    check(n_iter >= ITERS, "main loop completed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    report();
  end
endmodule
