// pns_btb -- branch target buffer indexed by the resolved virtual address.
//
// A direct-mapped table of ENTRIES entries (4096 by default, as in the
// evaluated core). Each entry holds a valid bit, an address tag, the branch
// type and the extended name of the next PC. Because the lookup address is
// the resolved virtual address, not the phantom name, all 256 names of a
// branch hit the same entry and the table keeps its full capacity. The
// stored target is already randomised: commit writes the selector's output,
// so the next execution of the branch continues in a phantom chosen at the
// branch's last commit.
//
// Lookup is combinational (index and tag from lookup_va_i). A write from
// commit (train_i) takes effect at the clock edge. Index bits are va[2 +:
// log2(ENTRIES)], skipping the byte offset of 4-byte instructions; the rest
// above is the tag. Only the valid bits are reset.
module pns_btb
  import pns_pkg::*;
#(
  parameter int unsigned ENTRIES = 4096,
  localparam int unsigned IW = $clog2(ENTRIES),
  localparam int unsigned TW = VA_BITS - 2 - IW
) (
  input  logic       clk,
  input  logic       rst_n,
  input  va_t        lookup_va_i,
  output logic       hit_o,
  output br_type_t   btype_o,
  output xpc_t       target_o,
  input  btb_train_t train_i
);

  typedef struct packed {
    logic [TW-1:0] tag;
    br_type_t      btype;
    xpc_t          target;
  } entry_t;

  entry_t             tbl [ENTRIES];
  logic [ENTRIES-1:0] valid_q;

  logic [IW-1:0] ridx, widx;
  assign ridx = lookup_va_i[2 +: IW];
  assign widx = train_i.va[2 +: IW];

  entry_t rd;
  assign rd       = tbl[ridx];
  assign hit_o    = valid_q[ridx] && (rd.tag == lookup_va_i[VA_BITS-1 -: TW]);
  assign btype_o  = rd.btype;
  assign target_o = rd.target;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)             valid_q <= '0;
    else if (train_i.valid) valid_q[widx] <= 1'b1;
  end

  always_ff @(posedge clk) begin
    if (train_i.valid)
      tbl[widx] <= '{tag: train_i.va[VA_BITS-1 -: TW], btype: train_i.btype,
                     target: train_i.target};
  end

endmodule
