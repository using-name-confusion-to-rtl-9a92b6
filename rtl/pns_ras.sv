// pns_ras -- return address stack of extended return names.
//
// A circular stack of DEPTH entries (48 by default, as in the evaluated
// core). Fetch pushes the name of the instruction after a predicted call,
// {p, PC+4}, keeping the caller's phantom, and pops it to predict the target
// of a predicted return. When more than DEPTH calls are outstanding the
// oldest entry is overwritten; the count saturates at DEPTH, and a pop with
// no entries leaves valid_o low so fetch falls back to the sequential path.
// The stack is only a predictor: commit checks every return against the
// address joined from the architectural stack and the SDS.
//
// top_o/valid_o are combinational; push and pop act at the clock edge and
// are never requested together. Reset clears the count.
module pns_ras
  import pns_pkg::*;
#(
  parameter int unsigned DEPTH = 48,
  localparam int unsigned PW   = $clog2(DEPTH),
  localparam int unsigned CW   = $clog2(DEPTH + 1)
) (
  input  logic clk,
  input  logic rst_n,
  input  logic push_i,
  input  xpc_t push_data_i,
  input  logic pop_i,
  output xpc_t top_o,
  output logic valid_o
);

  xpc_t          stk [DEPTH];
  logic [PW-1:0] tos_q;     // slot of the current top entry
  logic [CW-1:0] count_q;

  function automatic logic [PW-1:0] wrap_inc(logic [PW-1:0] v);
    return (v == PW'(DEPTH - 1)) ? '0 : v + 1'b1;
  endfunction
  function automatic logic [PW-1:0] wrap_dec(logic [PW-1:0] v);
    return (v == '0) ? PW'(DEPTH - 1) : v - 1'b1;
  endfunction

  assign top_o   = stk[tos_q];
  assign valid_o = (count_q != '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tos_q   <= PW'(DEPTH - 1);
      count_q <= '0;
    end else if (push_i) begin
      tos_q   <= wrap_inc(tos_q);
      if (count_q != CW'(DEPTH)) count_q <= count_q + 1'b1;
    end else if (pop_i && valid_o) begin
      tos_q   <= wrap_dec(tos_q);
      count_q <= count_q - 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (push_i) stk[wrap_inc(tos_q)] <= push_data_i;
  end

  assert property (@(posedge clk) disable iff (!rst_n) !(push_i && pop_i));

endmodule
