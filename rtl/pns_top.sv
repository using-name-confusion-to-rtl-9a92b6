// pns_top -- Phantom Name System front-end of a 32-bit processor.
//
// PNS gives each instruction 256 names (phantoms) and lets hardware pick a
// random one every time a basic block is entered. Names of one instruction
// differ by a multiple of a small security shift, so a return address or
// gadget address forged for one phantom points to a different instruction
// in every other; the phantom index lives only in the extended PC and in
// the Secret Domain Stack, never in memory, so an attacker cannot know it.
// Everything the processor indexes by PC first maps the name back to its
// single virtual address, so caches and predictors keep their capacity and
// timing.
//
// This top joins the parts the scheme changes:
//   pns_fetch          extended PC, BTB/bi-mode/RAS prediction, ITLB, I-cache
//   pns_commit         branch resolution at commit, selector, SDS, TRAP check
//   pns_entropy_source random phantom index (behavioural model of the
//                      metastable flip-flops)
// The unmodified back-end (decode, execute, write-back) connects through the
// fetch output (out_*) and the in-order commit port (cmt_*). The page-table
// walker and the next memory level connect through walk_* and mem_*. The
// back-end may redirect fetch for its own exceptions (be_redirect_*); a
// redirect from commit takes priority. The SDS privileged port (sds_priv_*)
// is for the operating system's overflow/underflow, context-switch and
// longjmp handling.
// Timing: fetch delivers at most one instruction per cycle two cycles after
// its PC; a redirect at commit loads the PC at the next clock edge.
module pns_top
  import pns_pkg::*;
#(
  parameter int unsigned DELTA_SHIFT   = 2,
  parameter int unsigned BTB_ENTRIES   = 4096,
  parameter int unsigned BDB_ENTRIES   = 4096,
  parameter int unsigned BDB_HIST_BITS = 12,
  parameter int unsigned RAS_DEPTH     = 48,
  parameter int unsigned ITLB_ENTRIES  = 32,
  parameter int unsigned IC_SETS       = 256,
  parameter int unsigned IC_LINE_BYTES = 64,
  parameter int unsigned PAGE_BITS     = 12,
  parameter int unsigned SDS_DEPTH     = 256,
  parameter logic [31:0] RESET_PC      = 32'h0000_1000,
  localparam int unsigned NW  = VA_BITS - PAGE_BITS,
  localparam int unsigned SAW = $clog2(SDS_DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  // fetched instructions to decode
  output logic          out_valid_o,
  input  logic          out_ready_i,
  output xpc_t          out_pc_o,
  output va_t           out_va_o,
  output logic [31:0]   out_insn_o,
  output xpc_t          out_pred_next_o,
  // committed instructions from the back-end
  input  commit_t       cmt_i,
  output logic          cmt_ready_o,
  output logic          link_valid_o,
  output va_t           link_lo_o,
  output logic          security_exc_o,
  output logic          sds_overflow_o,
  output logic          sds_underflow_o,
  // back-end exception redirect
  input  logic          be_redirect_valid_i,
  input  xpc_t          be_redirect_pc_i,
  // SDS privileged port
  input  logic          sds_priv_we_i,
  input  logic [SAW-1:0] sds_priv_addr_i,
  input  phantom_t      sds_priv_wdata_i,
  output phantom_t      sds_priv_rdata_o,
  input  logic          sds_priv_depth_we_i,
  input  logic [SAW:0]  sds_priv_depth_i,
  output logic [SAW:0]  sds_depth_o,
  // page-table walker
  output logic          walk_req_o,
  output logic [NW-1:0] walk_vpn_o,
  input  logic          walk_resp_i,
  input  logic [NW-1:0] walk_ppn_i,
  input  logic          itlb_flush_i,
  // next memory level
  output logic          mem_req_valid_o,
  input  logic          mem_req_ready_i,
  output logic [31:0]   mem_req_addr_o,
  input  logic          mem_resp_valid_i,
  input  logic [31:0]   mem_resp_data_i
);

  phantom_t   p_rand;
  logic       c_redirect, redirect;
  xpc_t       c_redirect_pc, redirect_pc;
  btb_train_t btb_train;
  bdb_train_t bdb_train;

  pns_entropy_source u_rng (.clk, .rst_n, .rnd_o(p_rand));

  pns_commit #(.DELTA_SHIFT(DELTA_SHIFT), .SDS_DEPTH(SDS_DEPTH)) u_commit (
    .clk, .rst_n, .cmt_i, .cmt_ready_o, .p_rand_i(p_rand),
    .redirect_valid_o(c_redirect), .redirect_pc_o(c_redirect_pc),
    .btb_train_o(btb_train), .bdb_train_o(bdb_train),
    .link_valid_o, .link_lo_o, .security_exc_o, .sds_overflow_o, .sds_underflow_o,
    .sds_priv_we_i, .sds_priv_addr_i, .sds_priv_wdata_i, .sds_priv_rdata_o,
    .sds_priv_depth_we_i, .sds_priv_depth_i, .sds_depth_o);

  assign redirect    = c_redirect || be_redirect_valid_i;
  assign redirect_pc = c_redirect ? c_redirect_pc : be_redirect_pc_i;

  pns_fetch #(
    .DELTA_SHIFT(DELTA_SHIFT), .BTB_ENTRIES(BTB_ENTRIES), .BDB_ENTRIES(BDB_ENTRIES),
    .BDB_HIST_BITS(BDB_HIST_BITS), .RAS_DEPTH(RAS_DEPTH), .ITLB_ENTRIES(ITLB_ENTRIES),
    .IC_SETS(IC_SETS), .IC_LINE_BYTES(IC_LINE_BYTES), .PAGE_BITS(PAGE_BITS),
    .RESET_PC(RESET_PC)
  ) u_fetch (
    .clk, .rst_n,
    .redirect_valid_i(redirect), .redirect_pc_i(redirect_pc),
    .btb_train_i(btb_train), .bdb_train_i(bdb_train),
    .out_valid_o, .out_ready_i, .out_pc_o, .out_va_o, .out_insn_o, .out_pred_next_o,
    .walk_req_o, .walk_vpn_o, .walk_resp_i, .walk_ppn_i, .itlb_flush_i,
    .mem_req_valid_o, .mem_req_ready_i, .mem_req_addr_o,
    .mem_resp_valid_i, .mem_resp_data_i);

endmodule
