// pns_icache -- L1 instruction cache, indexed with the resolved virtual
// address, tagged with the physical page number.
//
// If the cache were indexed with phantom names, each of the 256 names of a
// line would take its own slot and the effective capacity would shrink to
// 1/256. PNS resolves the name first (the shift and add is hidden inside the
// cache access), so all names of a line meet in one set. Geometry follows the
// evaluated core: 32 KiB, 2-way, 64-byte lines, LRU replacement; 256 sets.
// The tag is the physical page number from the ITLB (virtually indexed,
// physically tagged); PNS leaves physical addresses untouched.
//
// Read side: set and word come from rd_va_i, the tag from rd_ppn_i; hit_o and
// word_o are combinational from those inputs, which the fetch stage holds in
// a register, so the arrays behave like synchronous-read RAMs and a hit costs
// the two fetch stages. rd_en_i marks a real access (updates LRU on a hit).
// Refill: refill_i (one cycle, while !busy_o) latches the missing line; the
// cache sends the line's physical address on mem_req (valid/ready) and
// takes LINE_BYTES/4 32-bit beats on mem_resp, lowest word first, into the
// LRU way, which is invalidated while it fills. busy_o is high meanwhile.
// The refill protocol is this design's choice. Reset clears valid and LRU bits.
module pns_icache
  import pns_pkg::*;
#(
  parameter int unsigned SETS       = 256,
  parameter int unsigned LINE_BYTES = 64,
  parameter int unsigned PAGE_BITS  = 12,
  localparam int unsigned WAYS  = 2,
  localparam int unsigned WPL   = LINE_BYTES / 4,        // words per line
  localparam int unsigned OW    = $clog2(LINE_BYTES),
  localparam int unsigned SW    = $clog2(SETS),
  localparam int unsigned BW    = $clog2(WPL),
  localparam int unsigned NW    = VA_BITS - PAGE_BITS
) (
  input  logic          clk,
  input  logic          rst_n,
  // lookup
  input  logic          rd_en_i,
  input  va_t           rd_va_i,
  input  logic [NW-1:0] rd_ppn_i,
  output logic          hit_o,
  output logic [31:0]   word_o,
  // refill control
  input  logic          refill_i,
  output logic          busy_o,
  // line fill from the next level
  output logic          mem_req_valid_o,
  input  logic          mem_req_ready_i,
  output logic [31:0]   mem_req_addr_o,
  input  logic          mem_resp_valid_i,
  input  logic [31:0]   mem_resp_data_i
);

  logic [31:0]   data_q  [WAYS][SETS*WPL];
  logic [NW-1:0] tag_q   [WAYS][SETS];
  logic [SETS-1:0] valid_q [WAYS];
  logic [SETS-1:0] lru_q;          // way to replace next in each set

  logic [SW-1:0] rset;
  logic [BW-1:0] rword;
  assign rset  = rd_va_i[OW +: SW];
  assign rword = rd_va_i[2 +: BW];

  logic [WAYS-1:0] way_hit;
  always_comb begin
    for (int w = 0; w < int'(WAYS); w++)
      way_hit[w] = valid_q[w][rset] && (tag_q[w][rset] == rd_ppn_i);
  end
  assign hit_o  = |way_hit;
  assign word_o = way_hit[1] ? data_q[1][{rset, rword}] : data_q[0][{rset, rword}];

  // refill engine
  typedef enum logic [1:0] {S_IDLE, S_REQ, S_RESP} state_t;
  state_t        state_q;
  logic [SW-1:0] f_set_q;
  logic [31:0]   f_addr_q;
  logic          f_way_q;
  logic [BW-1:0] f_beat_q;

  assign busy_o          = (state_q != S_IDLE);
  assign mem_req_valid_o = (state_q == S_REQ);
  assign mem_req_addr_o  = f_addr_q;

  logic victim;
  assign victim = !valid_q[0][rset] ? 1'b0 :
                  !valid_q[1][rset] ? 1'b1 : lru_q[rset];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q  <= S_IDLE;
      valid_q  <= '{default: '0};
      lru_q    <= '0;
      f_set_q  <= '0;
      f_addr_q <= '0;
      f_way_q  <= 1'b0;
      f_beat_q <= '0;
    end else begin
      unique case (state_q)
        S_IDLE: begin
          if (refill_i) begin
            state_q  <= S_REQ;
            f_set_q  <= rset;
            f_addr_q <= {rd_ppn_i, rd_va_i[PAGE_BITS-1:OW], OW'(0)};
            f_way_q  <= victim;
            f_beat_q <= '0;
            valid_q[victim][rset] <= 1'b0;
          end else if (rd_en_i && hit_o) begin
            lru_q[rset] <= ~way_hit[1];   // the other way becomes LRU
          end
        end
        S_REQ:  if (mem_req_ready_i) state_q <= S_RESP;
        S_RESP: if (mem_resp_valid_i) begin
          f_beat_q <= f_beat_q + 1'b1;
          if (f_beat_q == BW'(WPL - 1)) begin
            state_q <= S_IDLE;
            valid_q[f_way_q][f_set_q] <= 1'b1;
            lru_q[f_set_q] <= ~f_way_q;
          end
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (state_q == S_IDLE && refill_i) tag_q[victim][rset] <= rd_ppn_i;
    if (state_q == S_RESP && mem_resp_valid_i)
      data_q[f_way_q][{f_set_q, f_beat_q}] <= mem_resp_data_i;
  end

  // Beats only arrive for a requested line.
  assert property (@(posedge clk) disable iff (!rst_n)
                   mem_resp_valid_i |-> state_q == S_RESP);
  assert property (@(posedge clk) disable iff (!rst_n)
                   refill_i |-> state_q == S_IDLE);

endmodule
