// pns_entropy_source -- BEHAVIOURAL MODEL of the selector's random source.
//
// The paper draws the n-bit phantom index from n metastable flip-flops, one
// random bit each. That is an analog, process-specific circuit with no
// logic function, so it is modelled here, not designed: each clock edge every
// bit takes a fresh value from $urandom, standing in for the resolution of a
// metastable flop. The ports are those of the real part: a clock and the
// n-bit index, registered, valid every cycle. Reset only clears the
// output register so that simulations start from a known value.
module pns_entropy_source
  import pns_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  output phantom_t rnd_o
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rnd_o <= '0;
    else        rnd_o <= phantom_t'($urandom);
  end

endmodule
