// pns_commit -- PNS branch unit at commit: resolution, re-randomisation,
// return-address split/join and TRAP check.
//
// The back-end hands over every committed instruction in program order
// (commit_t): the name it was fetched with, its control-flow kind, the
// branch outcome and target, and the name fetch predicted to follow it.
// For each one this unit
//   * works out the real successor. A fall-through or not-taken branch stays
//     in its phantom, {p, PC+4}. A taken branch, jump or call goes to its
//     target virtual address, i.e. the name {0, target}. A return joins the
//     phantom index popped from the Secret Domain Stack with the address the
//     program reloaded from its architectural stack, {p_sds, target};
//   * passes a taken successor through the selector (pns_selector) with a
//     fresh random phantom index, giving nextPC;
//   * compares the successor with the prediction by resolved virtual address
//     (both names through f^-1) and, if they differ, redirects fetch to
//     nextPC (or to {p, PC+4} for a wrong taken prediction);
//   * writes nextPC into the BTB for every taken control-flow instruction,
//     right or wrong, so its next execution lands in a new random phantom,
//     and trains the direction predictor with every conditional outcome;
//   * on a call, pushes the caller's phantom index on the SDS and returns
//     the low 32 bits of the return name (PC+4) on link_lo_o for the
//     back-end to store on the architectural stack; on a return, pops it;
//   * raises security_exc_o when a TRAP is reached by a control transfer.
//     TRAPs sit at the start of every basic block and branch targets point
//     past them, so only a fall-through reaches one legitimately; that case
//     is treated as a no-operation.
// A call with the SDS full or a return with it empty is held (cmt_ready_o
// low) while the SDS raises its overflow/underflow exception, until the
// trusted handler has spilled or filled it through the privileged port.
//
// All outputs are combinational from cmt_i; the redirect, training and SDS
// update act at the next clock edge. Which instructions count as taken for
// the selector's s input, the held-commit exception handshake and the
// fall-through TRAP rule are this design's reading of the paper.
module pns_commit
  import pns_pkg::*;
#(
  parameter int unsigned DELTA_SHIFT = 2,
  parameter int unsigned SDS_DEPTH   = 256,
  localparam int unsigned SAW = $clog2(SDS_DEPTH)
) (
  input  logic       clk,
  input  logic       rst_n,
  input  commit_t    cmt_i,
  output logic       cmt_ready_o,
  input  phantom_t   p_rand_i,
  // to fetch
  output logic       redirect_valid_o,
  output xpc_t       redirect_pc_o,
  output btb_train_t btb_train_o,
  output bdb_train_t bdb_train_o,
  // to the back-end
  output logic       link_valid_o,
  output va_t        link_lo_o,
  output logic       security_exc_o,
  output logic       sds_overflow_o,
  output logic       sds_underflow_o,
  // privileged SDS port
  input  logic       sds_priv_we_i,
  input  logic [SAW-1:0] sds_priv_addr_i,
  input  phantom_t   sds_priv_wdata_i,
  output phantom_t   sds_priv_rdata_o,
  input  logic       sds_priv_depth_we_i,
  input  logic [SAW:0] sds_priv_depth_i,
  output logic [SAW:0] sds_depth_o
);

  logic     is_call, is_ret, is_cond, taken;
  logic     sds_empty, sds_full, fire;
  phantom_t sds_top;

  assign is_call = cmt_i.valid && cmt_i.kind == CF_CALL;
  assign is_ret  = cmt_i.valid && cmt_i.kind == CF_RET;
  assign is_cond = cmt_i.valid && cmt_i.kind == CF_COND;
  assign taken   = cmt_i.kind inside {CF_JUMP, CF_CALL, CF_RET} ||
                   (cmt_i.kind == CF_COND && cmt_i.taken);

  assign cmt_ready_o = !(is_call && sds_full) && !(is_ret && sds_empty);
  assign fire        = cmt_i.valid && cmt_ready_o;

  pns_sds #(.DEPTH(SDS_DEPTH)) u_sds (
    .clk, .rst_n,
    .push_i(is_call), .push_data_i(cmt_i.pc.p),
    .pop_i(is_ret), .top_o(sds_top),
    .empty_o(sds_empty), .full_o(sds_full),
    .overflow_o(sds_overflow_o), .underflow_o(sds_underflow_o),
    .priv_we_i(sds_priv_we_i), .priv_addr_i(sds_priv_addr_i),
    .priv_wdata_i(sds_priv_wdata_i), .priv_rdata_o(sds_priv_rdata_o),
    .priv_depth_we_i(sds_priv_depth_we_i), .priv_depth_i(sds_priv_depth_i),
    .depth_o(sds_depth_o));

  // successor names
  xpc_t seq_name, tgt_name, sel_name;
  assign seq_name = '{p: cmt_i.pc.p, pc: cmt_i.pc.pc + va_t'(INSN_BYTES)};
  assign tgt_name = '{p: (cmt_i.kind == CF_RET) ? sds_top : phantom_t'(0),
                      pc: cmt_i.target};

  pns_selector #(.DELTA_SHIFT(DELTA_SHIFT)) u_sel (
    .pc_new_i(tgt_name), .s_i(taken), .p_next_i(p_rand_i), .next_pc_o(sel_name));

  va_t pc_va, pred_va, tgt_va, next_va;
  pns_name_resolver #(.DELTA_SHIFT(DELTA_SHIFT)) u_res_pc (
    .name_i(cmt_i.pc), .va_o(pc_va));
  pns_name_resolver #(.DELTA_SHIFT(DELTA_SHIFT)) u_res_pred (
    .name_i(cmt_i.pred_next), .va_o(pred_va));
  pns_name_resolver #(.DELTA_SHIFT(DELTA_SHIFT)) u_res_tgt (
    .name_i(tgt_name), .va_o(tgt_va));

  assign next_va = taken ? tgt_va : pc_va + va_t'(INSN_BYTES);

  assign redirect_valid_o = fire && (pred_va != next_va);
  assign redirect_pc_o    = taken ? sel_name : seq_name;

  br_type_t btype;
  always_comb begin
    unique case (cmt_i.kind)
      CF_CALL: btype = BT_CALL;
      CF_RET:  btype = BT_RET;
      CF_JUMP: btype = BT_JUMP;
      default: btype = BT_COND;
    endcase
  end

  assign btb_train_o = '{valid: fire && taken, va: pc_va, btype: btype,
                         target: sel_name};
  assign bdb_train_o = '{valid: fire && is_cond, va: pc_va, taken: cmt_i.taken};

  assign link_valid_o = fire && is_call;
  assign link_lo_o    = seq_name.pc;

  // TRAP check: was this instruction reached by a taken transfer?
  logic prev_taken_q;
  assign security_exc_o = fire && cmt_i.kind == CF_TRAP && prev_taken_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    prev_taken_q <= 1'b0;
    else if (fire) prev_taken_q <= taken;
  end

endmodule
