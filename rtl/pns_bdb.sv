// pns_bdb -- branch direction buffer: a bi-mode direction predictor indexed
// by the resolved virtual address.
//
// PNS leaves direction prediction as it is and only changes the index: the
// phantom name is mapped to its virtual address first, so every name of a
// branch trains and reads the same counters. The evaluated core used a
// bi-mode predictor, which is built here in its textbook form: a choice table
// of 2-bit counters indexed by address, and two direction tables (one biased
// taken, one biased not-taken) indexed by address XOR global history. The
// choice counter picks which direction table gives the prediction.
// Update: only the selected direction table is trained; the choice counter
// moves toward the outcome unless it pointed away from the outcome while the
// selected direction table was right anyway. The global history is shifted
// at commit, with the outcome, so lookups use committed history.
//
// Table sizes and history length are not given by the paper and are this
// design's choice. predict_taken_o is combinational from lookup_va_i;
// updates take effect at the clock edge. Reset sets the choice counters and
// the not-taken table to weakly not-taken and the taken table to weakly taken.
module pns_bdb
  import pns_pkg::*;
#(
  parameter int unsigned CHOICE_ENTRIES = 4096,
  parameter int unsigned DIR_ENTRIES    = 4096,
  parameter int unsigned HIST_BITS      = 12,
  localparam int unsigned CW = $clog2(CHOICE_ENTRIES),
  localparam int unsigned DW = $clog2(DIR_ENTRIES)
) (
  input  logic       clk,
  input  logic       rst_n,
  input  va_t        lookup_va_i,
  output logic       predict_taken_o,
  input  bdb_train_t train_i
);

  logic [1:0] choice_t [CHOICE_ENTRIES];
  logic [1:0] dir_tk   [DIR_ENTRIES];   // taken-biased table
  logic [1:0] dir_nt   [DIR_ENTRIES];   // not-taken-biased table
  logic [HIST_BITS-1:0] ghr_q;

  function automatic logic [DW-1:0] dir_index(va_t va, logic [HIST_BITS-1:0] h);
    return va[2 +: DW] ^ DW'(h);
  endfunction

  // lookup
  logic [CW-1:0] rc;
  logic [DW-1:0] rd;
  logic          r_choose_tk;
  assign rc = lookup_va_i[2 +: CW];
  assign rd = dir_index(lookup_va_i, ghr_q);
  assign r_choose_tk     = choice_t[rc][1];
  assign predict_taken_o = r_choose_tk ? dir_tk[rd][1] : dir_nt[rd][1];

  // update
  logic [CW-1:0] uc;
  logic [DW-1:0] ud;
  logic          u_choose_tk, u_dir_pred;
  logic [1:0]    u_dir_ctr, u_choice_ctr;
  assign uc           = train_i.va[2 +: CW];
  assign ud           = dir_index(train_i.va, ghr_q);
  assign u_choice_ctr = choice_t[uc];
  assign u_choose_tk  = u_choice_ctr[1];
  assign u_dir_ctr    = u_choose_tk ? dir_tk[ud] : dir_nt[ud];
  assign u_dir_pred   = u_dir_ctr[1];

  function automatic logic [1:0] sat(logic [1:0] c, logic up);
    if (up) return (c == 2'b11) ? c : c + 1'b1;
    else    return (c == 2'b00) ? c : c - 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ghr_q <= '0;
      for (int i = 0; i < int'(CHOICE_ENTRIES); i++) choice_t[i] <= 2'b01;
      for (int i = 0; i < int'(DIR_ENTRIES); i++) begin
        dir_tk[i] <= 2'b10;
        dir_nt[i] <= 2'b01;
      end
    end else if (train_i.valid) begin
      ghr_q <= {ghr_q[HIST_BITS-2:0], train_i.taken};
      if (u_choose_tk) dir_tk[ud] <= sat(u_dir_ctr, train_i.taken);
      else             dir_nt[ud] <= sat(u_dir_ctr, train_i.taken);
      if (!((u_choose_tk != train_i.taken) && (u_dir_pred == train_i.taken)))
        choice_t[uc] <= sat(u_choice_ctr, train_i.taken);
    end
  end

endmodule
