// pns_itlb -- instruction TLB looked up with the resolved virtual address.
//
// PNS gives every code page 256 virtual names, which would fill a TLB with
// copies of one translation. Looking it up with the resolved virtual address
// instead keeps a single entry per page for all phantoms, and the stored
// physical page number is not touched. The paper's example: names
// {2, 0x00BB_FFF4} and {0, 0x00BB_FFF8} both resolve to 0x00BB_FFF8 and
// share the entry that maps it to 0x0011_DDFC.
//
// Fully associative, ENTRIES entries of 4 KiB pages, round-robin
// replacement; the size, page size and policy are this design's choice, the
// paper gives none. lookup is combinational (hit_o, ppn_o). A refill from
// the page-table walker (fill_i with vpn/ppn) and a flush act at the clock
// edge. Reset clears all valid bits.
module pns_itlb
  import pns_pkg::*;
#(
  parameter int unsigned ENTRIES   = 32,
  parameter int unsigned PAGE_BITS = 12,
  localparam int unsigned NW = VA_BITS - PAGE_BITS,
  localparam int unsigned EW = $clog2(ENTRIES)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  va_t           lookup_va_i,
  output logic          hit_o,
  output logic [NW-1:0] ppn_o,
  input  logic          fill_i,
  input  logic [NW-1:0] fill_vpn_i,
  input  logic [NW-1:0] fill_ppn_i,
  input  logic          flush_i
);

  logic [NW-1:0]      vpn_q [ENTRIES];
  logic [NW-1:0]      ppn_q [ENTRIES];
  logic [ENTRIES-1:0] valid_q;
  logic [EW-1:0]      victim_q;

  logic [NW-1:0] lvpn;
  assign lvpn = lookup_va_i[VA_BITS-1:PAGE_BITS];

  always_comb begin
    hit_o = 1'b0;
    ppn_o = '0;
    for (int i = 0; i < int'(ENTRIES); i++) begin
      if (valid_q[i] && vpn_q[i] == lvpn) begin
        hit_o = 1'b1;
        ppn_o = ppn_q[i];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_q  <= '0;
      victim_q <= '0;
    end else if (flush_i) begin
      valid_q  <= '0;
    end else if (fill_i) begin
      valid_q[victim_q] <= 1'b1;
      victim_q <= (victim_q == EW'(ENTRIES - 1)) ? '0 : victim_q + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (fill_i && !flush_i) begin
      vpn_q[victim_q] <= fill_vpn_i;
      ppn_q[victim_q] <= fill_ppn_i;
    end
  end

endmodule
