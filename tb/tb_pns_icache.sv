// tb_pns_icache -- self-checking test of the 32 KiB 2-way I-cache: a miss
// refills the line from a memory model (word at physical address a is a
// fixed function of a), after which every word of the line hits with the
// right value; the refill takes 16 beats; a third line in a set evicts the
// least recently used one; two virtual addresses with different set bits
// for one physical page are kept apart (virtually indexed).
module tb_pns_icache;
  import pns_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic rd_en, hit, refill, busy, mreq, mready, mrv;
  va_t va; logic [19:0] ppn; logic [31:0] word, maddr, mdata;

  pns_icache dut (.clk, .rst_n, .rd_en_i(rd_en), .rd_va_i(va), .rd_ppn_i(ppn),
    .hit_o(hit), .word_o(word), .refill_i(refill), .busy_o(busy),
    .mem_req_valid_o(mreq), .mem_req_ready_i(mready), .mem_req_addr_o(maddr),
    .mem_resp_valid_i(mrv), .mem_resp_data_i(mdata));

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

  function automatic logic [31:0] memword(logic [31:0] a); return a * 32'h9E37_79B9 ^ 32'h5A5A_0000; endfunction

  // memory model: accept a request, answer 16 beats after a few cycles
  int beats_seen;
  initial begin
    mready = 0; mrv = 0; mdata = 0;
    forever begin
      @(negedge clk);
      if (mreq) begin
        logic [31:0] base;
        mready = 1; base = maddr; @(negedge clk); mready = 0;
        repeat (3) @(negedge clk);
        for (int b = 0; b < 16; b++) begin
          mrv = 1; mdata = memword(base + 32'(b) * 4); beats_seen++; @(negedge clk);
        end
        mrv = 0;
      end
    end
  end

  task automatic access(va_t v, logic [19:0] p, output bit was_hit);
    va = v; ppn = p; rd_en = 0; #1;
    was_hit = hit;
    if (!hit) begin
      refill = 1; @(negedge clk); refill = 0;
      while (busy) @(negedge clk);
      #1;
    end
    check(hit, $sformatf("hit after refill %h", v));
    check(word == memword({p, v[11:0]}), $sformatf("word at %h", v));
    rd_en = 1; @(negedge clk); rd_en = 0;
  endtask

  bit h;
  initial begin
    rd_en = 0; refill = 0; va = 0; ppn = 0; beats_seen = 0;
    repeat (2) @(negedge clk); rst_n = 1; @(negedge clk);
    access(32'h0000_1040, 20'h00077, h); check(!h, "cold miss");
    check(beats_seen == 16, "one line of 16 beats");
    for (int w = 0; w < 16; w++) begin access(32'h0000_1040 + 32'(w)*4, 20'h00077, h); check(h, "same line hits"); end
    // same set (VA[13:6]) in two more pages -> 3 lines in a 2-way set
    access(32'h0000_5040, 20'h00099, h); check(!h, "second line misses");
    access(32'h0000_1044, 20'h00077, h); check(h, "first still there");     // A most recent
    access(32'h0000_9040, 20'h000AA, h); check(!h, "third line misses");    // evicts B
    access(32'h0000_1048, 20'h00077, h); check(h, "MRU line kept");
    access(32'h0000_5040, 20'h00099, h); check(!h, "LRU line was evicted");
    // virtual index: same page offset, different VA[13:12] -> different set
    access(32'h0000_2040, 20'h00077, h); check(!h, "other set misses");
    for (int i = 0; i < 300; i++) begin
      va_t v;
      v = {18'h0, 8'($urandom), 6'($urandom) & 6'h3C};
      access(v, {12'h0, v[19:12]} ^ 20'h00300, h);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
