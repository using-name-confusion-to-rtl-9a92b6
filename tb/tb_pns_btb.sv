// tb_pns_btb -- self-checking test of the 4096-entry BTB: writes random
// entries, then checks hits, stored type and target against a reference
// table, misses for unwritten entries and for a tag conflict, and that two
// names of one branch (which resolve to the same address) share one entry.
module tb_pns_btb;
  import pns_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  va_t        lva;
  logic       hit;
  br_type_t   bt;
  xpc_t       tgt;
  btb_train_t tr;

  pns_btb dut (.clk, .rst_n, .lookup_va_i(lva), .hit_o(hit), .btype_o(bt),
               .target_o(tgt), .train_i(tr));

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

  typedef struct { va_t va; br_type_t bt; xpc_t tgt; } ref_t;
  ref_t ref_tbl [int];    // keyed by index
  initial begin
    tr = '0; lva = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 64; i++) begin lva = $urandom & ~32'h3; #1 check(!hit, "empty after reset"); end
    for (int i = 0; i < 1500; i++) begin
      tr.valid = 1; tr.va = $urandom & ~32'h3; tr.btype = br_type_t'($urandom % 4);
      tr.target = '{p: phantom_t'($urandom), pc: $urandom & ~32'h3};
      ref_tbl[int'(tr.va[13:2])] = '{tr.va, tr.btype, tr.target};
      @(negedge clk);
    end
    tr.valid = 0;
    foreach (ref_tbl[k]) begin
      lva = ref_tbl[k].va; #1;
      check(hit && bt == ref_tbl[k].bt && tgt == ref_tbl[k].tgt, $sformatf("entry %0d", k));
      lva = ref_tbl[k].va ^ 32'h8000_0000; #1;       // same index, other tag
      check(!hit, "tag conflict misses");
    end
    for (int k = 0; k < 4096; k += 97) if (!ref_tbl.exists(k)) begin
      lva = {18'h0, 12'(k), 2'b00}; #1 check(!hit, "unwritten index misses");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
