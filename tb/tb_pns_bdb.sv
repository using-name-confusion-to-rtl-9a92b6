// tb_pns_bdb -- self-checking test of the bi-mode direction predictor. A
// reference bi-mode model in the testbench (choice table, taken- and
// not-taken-biased tables, global history) is trained with the same random
// branch stream and every prediction is compared. Also checks that an
// always-taken branch and a loop branch are learnt. Runs at reduced table
// sizes (256 entries, 8 history bits) to keep the reference small.
module tb_pns_bdb;
  import pns_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  va_t lva; logic pred; bdb_train_t tr;
  pns_bdb #(.CHOICE_ENTRIES(256), .DIR_ENTRIES(256), .HIST_BITS(8)) dut (
    .clk, .rst_n, .lookup_va_i(lva), .predict_taken_o(pred), .train_i(tr));

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

  int ch [256], tk [256], nt [256];
  int h;
  function automatic int up(int c, bit t); return t ? (c < 3 ? c + 1 : 3) : (c > 0 ? c - 1 : 0); endfunction
  function automatic bit ref_pred(va_t va);
    int ci = int'(va[9:2]), di = int'(va[9:2]) ^ h;
    return (ch[ci] >= 2) ? (tk[di] >= 2) : (nt[di] >= 2);
  endfunction
  task automatic ref_train(va_t va, bit t);
    int ci = int'(va[9:2]), di = int'(va[9:2]) ^ h;
    bit use_tk = ch[ci] >= 2;
    bit dpred = use_tk ? (tk[di] >= 2) : (nt[di] >= 2);
    if (use_tk) tk[di] = up(tk[di], t); else nt[di] = up(nt[di], t);
    if (!(use_tk != t && dpred == t)) ch[ci] = up(ch[ci], t);
    h = ((h << 1) | int'(t)) & 8'hFF;
  endtask

  va_t pcs [8];
  int  correct;
  initial begin
    tr = '0; lva = 0; h = 0;
    foreach (ch[i]) begin ch[i] = 1; tk[i] = 2; nt[i] = 1; end
    foreach (pcs[i]) pcs[i] = 32'h1000 + 32'(i) * 32'h24;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 4000; i++) begin
      va_t va;
      bit  t;
      va = pcs[$urandom % 8];
      t  = (va[5] ? ($urandom % 8 != 0) : ($urandom % 8 == 0));
      lva = va; #1;
      check(pred == ref_pred(va), $sformatf("prediction %0d", i));
      tr = '{valid: 1'b1, va: va, taken: t};
      ref_train(va, t);
      @(negedge clk); tr = '0;
    end
    // an always-taken branch is learnt
    for (int i = 0; i < 20; i++) begin
      tr = '{valid: 1'b1, va: 32'h2000, taken: 1'b1}; ref_train(32'h2000, 1); @(negedge clk);
    end
    tr = '0; lva = 32'h2000; #1 check(pred == 1'b1, "always-taken learnt");
    // a loop branch (taken 3 times, then not) is mostly predicted with history
    correct = 0;
    for (int i = 0; i < 400; i++) begin
      bit t;
      t = (i % 4) != 3;
      lva = 32'h3000; #1;
      if (i >= 200 && pred == t) correct++;
      tr = '{valid: 1'b1, va: 32'h3000, taken: t}; ref_train(32'h3000, t);
      @(negedge clk); tr = '0;
    end
    check(correct > 190, $sformatf("loop pattern learnt (%0d/200)", correct));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
