// pns_selector -- the PNS selector: re-names a control-flow target into a
// randomly chosen phantom.
//
// Given a target name PC_new from phantom p_new and a random index p_next, it
// produces the paper's adjusted next PC
//     nextPC = {p_next, PC_new - (p_next - p_new) * delta}
// which names the same virtual address from phantom p_next. The arithmetic
// is done modulo 2**32 as PC_new - (p_next << S) + (p_new << S), S being
// log2(delta). When s_i is low (no taken target, i.e. a fall-through) the
// name passes unchanged, so execution stays in the current phantom as the
// paper prescribes for correctly predicted fall-throughs.
//
// Combinational. It sits at commit (the paper's first optimisation), so its
// adder is off the fetch critical path; the result both redirects fetch
// after a misprediction and is written into the BTB.
module pns_selector
  import pns_pkg::*;
#(
  parameter int unsigned DELTA_SHIFT = 2
) (
  input  xpc_t     pc_new_i,  // resolved target, in phantom pc_new_i.p
  input  logic     s_i,       // 1: a taken target to randomise
  input  phantom_t p_next_i,  // random phantom index from the entropy source
  output xpc_t     next_pc_o
);

  always_comb begin
    if (s_i) begin
      next_pc_o.p  = p_next_i;
      next_pc_o.pc = pc_new_i.pc
                   - (va_t'(p_next_i) << DELTA_SHIFT)
                   + (va_t'(pc_new_i.p) << DELTA_SHIFT);
    end else begin
      next_pc_o = pc_new_i;
    end
  end

endmodule
