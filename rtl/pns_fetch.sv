// pns_fetch -- PNS fetch stage: extended PC, next-PC prediction, ITLB and
// I-cache access.
//
// The PC register holds a phantom name {p, PC}. Each cycle the name is first
// resolved to its virtual address (pns_name_resolver), and that address, not
// the name, indexes the BTB, the bi-mode direction predictor, the ITLB and
// the I-cache. The next name is chosen the usual way:
//   BTB hit, return    -> top of the RAS (sequential if the RAS is empty)
//   BTB hit, call/jump -> the BTB target (a name the selector randomised at
//                         the branch's last commit), and a call pushes
//                         {p, PC+4} on the RAS
//   BTB hit, cond      -> the BTB target if predicted taken, else {p, PC+4}
//   BTB miss           -> {p, PC+4}: a fall-through stays in its phantom.
// So randomisation costs nothing in fetch: the random phantom of a taken
// branch is already in the BTB.
//
// Two stages, one instruction per cycle (the width is this design's choice).
//   F1: PC register, resolve, predict, advance PC.
//   F2: ITLB and I-cache lookup with the resolved address registered from F1;
//       the instruction leaves on out_* (valid/ready) with its name, its
//       resolved address and the predicted next name, which the back-end
//       returns at commit. An ITLB miss asks the page-table walker
//       (walk_req pulse, walk_resp pulse with the PPN) and an I-cache miss
//       starts a line refill; F2 retries once either is done.
// A stall in F2 (miss or !out_ready_i) holds both stages. redirect_valid_i
// loads the PC at the next edge and discards F2. BTB/BDB training from
// commit is written at the clock edge.
module pns_fetch
  import pns_pkg::*;
#(
  parameter int unsigned DELTA_SHIFT    = 2,
  parameter int unsigned BTB_ENTRIES    = 4096,
  parameter int unsigned BDB_ENTRIES    = 4096,
  parameter int unsigned BDB_HIST_BITS  = 12,
  parameter int unsigned RAS_DEPTH      = 48,
  parameter int unsigned ITLB_ENTRIES   = 32,
  parameter int unsigned IC_SETS        = 256,
  parameter int unsigned IC_LINE_BYTES  = 64,
  parameter int unsigned PAGE_BITS      = 12,
  parameter logic [31:0] RESET_PC       = 32'h0000_1000,
  localparam int unsigned NW = VA_BITS - PAGE_BITS
) (
  input  logic          clk,
  input  logic          rst_n,
  // from commit
  input  logic          redirect_valid_i,
  input  xpc_t          redirect_pc_i,
  input  btb_train_t    btb_train_i,
  input  bdb_train_t    bdb_train_i,
  // to decode
  output logic          out_valid_o,
  input  logic          out_ready_i,
  output xpc_t          out_pc_o,
  output va_t           out_va_o,
  output logic [31:0]   out_insn_o,
  output xpc_t          out_pred_next_o,
  // page-table walker
  output logic          walk_req_o,
  output logic [NW-1:0] walk_vpn_o,
  input  logic          walk_resp_i,
  input  logic [NW-1:0] walk_ppn_i,
  input  logic          itlb_flush_i,
  // I-cache line refill
  output logic          mem_req_valid_o,
  input  logic          mem_req_ready_i,
  output logic [31:0]   mem_req_addr_o,
  input  logic          mem_resp_valid_i,
  input  logic [31:0]   mem_resp_data_i
);

  // ---------------- F1 ----------------
  xpc_t pc_q;
  va_t  va1;

  pns_name_resolver #(.DELTA_SHIFT(DELTA_SHIFT)) u_resolve (
    .name_i(pc_q), .va_o(va1));

  logic     btb_hit;
  br_type_t btb_type;
  xpc_t     btb_target;
  pns_btb #(.ENTRIES(BTB_ENTRIES)) u_btb (
    .clk, .rst_n, .lookup_va_i(va1), .hit_o(btb_hit), .btype_o(btb_type),
    .target_o(btb_target), .train_i(btb_train_i));

  logic bdb_taken;
  pns_bdb #(.CHOICE_ENTRIES(BDB_ENTRIES), .DIR_ENTRIES(BDB_ENTRIES),
            .HIST_BITS(BDB_HIST_BITS)) u_bdb (
    .clk, .rst_n, .lookup_va_i(va1), .predict_taken_o(bdb_taken),
    .train_i(bdb_train_i));

  xpc_t seq_next, ras_top, pred_next;
  logic ras_valid, ras_push, ras_pop, advance;
  assign seq_next = '{p: pc_q.p, pc: pc_q.pc + va_t'(INSN_BYTES)};

  always_comb begin
    pred_next = seq_next;
    ras_push  = 1'b0;
    ras_pop   = 1'b0;
    if (btb_hit) begin
      unique case (btb_type)
        BT_RET:  if (ras_valid) begin pred_next = ras_top; ras_pop = advance; end
        BT_CALL: begin pred_next = btb_target; ras_push = advance; end
        BT_JUMP: pred_next = btb_target;
        BT_COND: if (bdb_taken) pred_next = btb_target;
        default: ;
      endcase
    end
    if (redirect_valid_i) begin
      ras_push = 1'b0;
      ras_pop  = 1'b0;
    end
  end

  pns_ras #(.DEPTH(RAS_DEPTH)) u_ras (
    .clk, .rst_n, .push_i(ras_push), .push_data_i(seq_next), .pop_i(ras_pop),
    .top_o(ras_top), .valid_o(ras_valid));

  // ---------------- F2 ----------------
  logic f2_valid_q;
  xpc_t f2_pc_q, f2_pred_q;
  va_t  f2_va_q;

  logic          tlb_hit;
  logic [NW-1:0] tlb_ppn;
  logic          walk_busy_q;
  logic [NW-1:0] walk_vpn_q;

  assign walk_req_o = f2_valid_q && !tlb_hit && !walk_busy_q;
  assign walk_vpn_o = f2_va_q[VA_BITS-1:PAGE_BITS];

  pns_itlb #(.ENTRIES(ITLB_ENTRIES), .PAGE_BITS(PAGE_BITS)) u_itlb (
    .clk, .rst_n, .lookup_va_i(f2_va_q), .hit_o(tlb_hit), .ppn_o(tlb_ppn),
    .fill_i(walk_busy_q && walk_resp_i), .fill_vpn_i(walk_vpn_q),
    .fill_ppn_i(walk_ppn_i), .flush_i(itlb_flush_i));

  logic        ic_hit, ic_busy, ic_refill;
  logic [31:0] ic_word;
  assign out_valid_o = f2_valid_q && tlb_hit && ic_hit && !ic_busy;
  assign ic_refill   = f2_valid_q && tlb_hit && !ic_hit && !ic_busy;

  pns_icache #(.SETS(IC_SETS), .LINE_BYTES(IC_LINE_BYTES),
               .PAGE_BITS(PAGE_BITS)) u_icache (
    .clk, .rst_n, .rd_en_i(out_valid_o && out_ready_i), .rd_va_i(f2_va_q),
    .rd_ppn_i(tlb_ppn), .hit_o(ic_hit), .word_o(ic_word),
    .refill_i(ic_refill), .busy_o(ic_busy),
    .mem_req_valid_o, .mem_req_ready_i, .mem_req_addr_o,
    .mem_resp_valid_i, .mem_resp_data_i);

  assign out_pc_o        = f2_pc_q;
  assign out_va_o        = f2_va_q;
  assign out_insn_o      = ic_word;
  assign out_pred_next_o = f2_pred_q;

  assign advance = !f2_valid_q || (out_valid_o && out_ready_i);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pc_q        <= '{p: '0, pc: RESET_PC};
      f2_valid_q  <= 1'b0;
      f2_pc_q     <= '0;
      f2_va_q     <= '0;
      f2_pred_q   <= '0;
      walk_busy_q <= 1'b0;
      walk_vpn_q  <= '0;
    end else begin
      if (redirect_valid_i) begin
        pc_q       <= redirect_pc_i;
        f2_valid_q <= 1'b0;
      end else if (advance) begin
        pc_q       <= pred_next;
        f2_valid_q <= 1'b1;
        f2_pc_q    <= pc_q;
        f2_va_q    <= va1;
        f2_pred_q  <= pred_next;
      end
      if (walk_req_o) begin
        walk_busy_q <= 1'b1;
        walk_vpn_q  <= walk_vpn_o;
      end else if (walk_resp_i) begin
        walk_busy_q <= 1'b0;
      end
    end
  end

  // The output must stay stable while it waits for the back-end.
  assert property (@(posedge clk) disable iff (!rst_n)
                   out_valid_o && !out_ready_i && !redirect_valid_i
                   |=> $stable(out_pc_o));

endmodule
