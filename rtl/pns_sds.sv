// pns_sds -- Secret Domain Stack (SDS).
//
// On a call the return address is split in two: its low 32 bits go to the
// ordinary architectural stack in memory, and its n-bit phantom index goes
// here, out of reach of loads and stores. A return pops the index and joins
// it to the address software reloaded. An attacker who rewrites the stacked
// address cannot see which phantom it will be joined with, so the joined
// name lands on a wrong instruction. Only 8 bits are kept per entry; 256
// entries (256 bytes) cover the deepest SPEC call depth the paper measured.
//
// Interface
//   push_i/push_data_i   push one index (call). Ignored when full, and
//                        overflow_o is raised instead.
//   pop_i/top_o          pop the top index (return); top_o is valid while
//                        !empty_o. Ignored when empty, and underflow_o is
//                        raised instead.
//   overflow_o, underflow_o  the paper's hardware-stack-overflow and
//                        -underflow exceptions. They stay high for as long
//                        as the offending request is held, so the trusted
//                        handler can spill (read every entry, then set the
//                        depth to 0) or fill (write entries, set the depth)
//                        and the request then completes.
//   priv_*               privileged access: read/write any entry and read or
//                        set the depth. It serves spill/fill, saving the SDS
//                        in the process control block on a context switch,
//                        and setting the index back after longjmp.
// Timing: push, pop and privileged writes take effect at the clock edge;
// top_o, priv_rdata_o and depth_o are combinational reads of the state.
// The spill/fill policy itself is software (the OS), as in the paper.
module pns_sds
  import pns_pkg::*;
#(
  parameter int unsigned DEPTH = 256,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       push_i,
  input  phantom_t   push_data_i,
  input  logic       pop_i,
  output phantom_t   top_o,
  output logic       empty_o,
  output logic       full_o,
  output logic       overflow_o,
  output logic       underflow_o,
  // privileged port
  input  logic       priv_we_i,
  input  logic [AW-1:0] priv_addr_i,
  input  phantom_t   priv_wdata_i,
  output phantom_t   priv_rdata_o,
  input  logic       priv_depth_we_i,
  input  logic [AW:0] priv_depth_i,
  output logic [AW:0] depth_o
);

  phantom_t     mem [DEPTH];
  logic [AW:0]  depth_q;

  assign empty_o     = (depth_q == '0);
  assign full_o      = (depth_q == (AW+1)'(DEPTH));
  assign overflow_o  = push_i && full_o;
  assign underflow_o = pop_i && empty_o;
  assign top_o       = empty_o ? '0 : mem[AW'(depth_q - 1'b1)];
  assign priv_rdata_o = mem[priv_addr_i];
  assign depth_o     = depth_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      depth_q <= '0;
    end else if (priv_depth_we_i) begin
      depth_q <= priv_depth_i;
    end else if (push_i && !full_o) begin
      depth_q <= depth_q + 1'b1;
    end else if (pop_i && !empty_o) begin
      depth_q <= depth_q - 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (priv_we_i)
      mem[priv_addr_i] <= priv_wdata_i;
    else if (push_i && !full_o && !priv_depth_we_i)
      mem[AW'(depth_q)] <= push_data_i;
  end

  // A call and a return never commit in the same cycle.
  assert property (@(posedge clk) disable iff (!rst_n) !(push_i && pop_i));

endmodule
