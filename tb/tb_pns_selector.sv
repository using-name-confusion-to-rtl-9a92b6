// tb_pns_selector -- self-checking test of the selector's re-naming.
// Checks the paper's worked example (p_new = 5 to p_next = 8 gives
// PC_new - 3*delta, to p_next = 2 gives PC_new + 3*delta), that random
// re-namings keep the resolved address (PC + p*delta unchanged), and that a
// fall-through (s = 0) leaves the name alone.
module tb_pns_selector;
  import pns_pkg::*;
  int checks = 0, failures = 0;
  xpc_t     pc_new, nxt;
  logic     s;
  phantom_t pn;

  pns_selector dut (.pc_new_i(pc_new), .s_i(s), .p_next_i(pn), .next_pc_o(nxt));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #100000 failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    s = 1;
    pc_new = '{p: 8'd5, pc: 32'h0001_0040}; pn = 8'd8; #1;
    check(nxt.p == 8'd8 && nxt.pc == 32'h0001_0040 - 3*4, "5 -> 8 gives -3 delta");
    pn = 8'd2; #1;
    check(nxt.p == 8'd2 && nxt.pc == 32'h0001_0040 + 3*4, "5 -> 2 gives +3 delta");
    for (int i = 0; i < 3000; i++) begin
      pc_new.p  = phantom_t'($urandom);
      pc_new.pc = $urandom & ~32'h3;
      pn        = phantom_t'($urandom);
      s         = ($urandom % 4) != 0;
      #1;
      if (s) begin
        check(nxt.p == pn, "phantom index is the random one");
        check(nxt.pc == va_t'(longint'(pc_new.pc) - (longint'(pn) - longint'(pc_new.p)) * 4),
              $sformatf("Eq.2 for {%0d,%h} -> %0d", pc_new.p, pc_new.pc, pn));
        check(va_t'(nxt.pc + 32'(nxt.p) * 4) == va_t'(pc_new.pc + 32'(pc_new.p) * 4),
              "same virtual address");
      end else begin
        check(nxt == pc_new, "s=0 keeps the name");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
