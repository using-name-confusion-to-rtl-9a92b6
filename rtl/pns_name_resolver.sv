// pns_name_resolver -- inverse name mapping f^-1 of the Phantom Name System.
//
// Maps an extended PC {p, PC} (a phantom name) to the virtual address of the
// instruction it names: va = PC + (p << DELTA_SHIFT). This is the shift and
// add of the paper's mapping figure: the phantom index is shifted left by the
// security shift and added to the low 32 bits. Every PC-indexed structure
// (BTB, direction predictor, ITLB, I-cache) is accessed with this address, so
// all 256 names of an instruction share one entry.
//
// Purely combinational. DELTA_SHIFT is log2 of the security shift delta in
// bytes. The paper's own example ({2, 0x00BB_FFF4} and {0, 0x00BB_FFF8} name
// the same address) uses a 2-byte delta; the default of 2 (delta = 4 bytes,
// one instruction) follows the paper's rule that on RISC machines delta is a
// multiple of the instruction size.
module pns_name_resolver
  import pns_pkg::*;
#(
  parameter int unsigned DELTA_SHIFT = 2
) (
  input  xpc_t name_i,  // extended PC
  output va_t  va_o     // virtual address
);

  assign va_o = name_i.pc + (va_t'(name_i.p) << DELTA_SHIFT);

endmodule
