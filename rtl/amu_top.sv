// amu_top: the Asynchronous Memory Access Unit, ALSU and ASMC joined.
//
// An out-of-order core hands AMI instructions (aload, astore, getfin, cfgrr,
// cfgrw, with their register values) to the AMU in program order. The
// decoder cracks them into micro-ops, the ALSU executes them speculatively,
// reports results (request ID for aload/astore, completed ID for getfin, 0
// for none) and releases requests to the ASMC as the core commits them. The
// ASMC keeps request metadata in the L2 scratchpad, sends line requests to
// far memory and collects the responses. The core's normal loads and stores
// to the scratchpad use the spm_* port. In the paper the ALSU reaches the
// ASMC through the L1 cache's ports; here the channel is direct.
//
// Core-side timing: inst_valid/inst_ready per instruction; each micro-op's
// window slot appears on uop_tag when uop_fire is high; completion on wb_*;
// the core commits completed micro-ops oldest first (commit_valid/ready) and
// squashes from a slot on with squash_valid/squash_tag (the decoder drops a
// half-cracked instruction at the same time).
//
// Tool note: rst_n is an asynchronous reset for the flops and also the disable iff
// of the assertions; the linter's SYNCASYNCNET note about that double use is
// expected and harmless (assertions are not synthesised).
module amu_top
  import amu_pkg::*;
#(
  parameter int unsigned WIN        = 16,
  parameter int unsigned CQ_DEPTH   = 8,
  parameter int unsigned SPM_BYTES  = 65536,
  parameter int unsigned MAX_QLEN   = 512,
  parameter int unsigned PEND_DEPTH = 32,
  parameter int unsigned TAG_W      = $clog2(WIN)
) (
  input  logic             clk,
  input  logic             rst_n,
  // instructions from the pipeline
  input  logic             inst_valid,
  output logic             inst_ready,
  input  ami_inst_t        inst,
  output logic             uop_fire,
  output logic [TAG_W-1:0] uop_tag,
  // results
  output logic             wb_valid,
  output logic [TAG_W-1:0] wb_tag,
  output logic             wb_has_rd,
  output logic [4:0]       wb_rd,
  output logic [XLEN-1:0]  wb_data,
  // commit / squash
  input  logic             commit_valid,
  output logic             commit_ready,
  input  logic             squash_valid,
  input  logic [TAG_W-1:0] squash_tag,
  // core load/store port to the SPM
  input  logic             spm_valid,
  output logic             spm_ready,
  input  spm_req_t         spm_req,
  output logic             spm_rvalid,
  output line_t            spm_rdata,
  // far memory (towards the remote memory controller)
  output logic             mem_req_valid,
  input  logic             mem_req_ready,
  output mem_req_t         mem_req,
  input  logic             mem_rsp_valid,
  output logic             mem_rsp_ready,
  input  mem_rsp_t         mem_rsp,
  // status and events
  output logic [ID_W:0]    inflight,
  output logic             ev_alloc_fail,
  output logic             ev_getfin_empty,
  output logic             ev_batch_fetch,
  output logic             ev_unc_reuse,
  output logic             ev_unc_stall,
  output logic             ev_put_free,
  output logic             ev_squash,
  output logic             ev_init,
  output logic             ev_split
);
  logic      uop_valid, uop_ready;
  uop_t      uop;
  logic      a_req_valid, a_req_ready, a_rsp_valid;
  asmc_req_t a_req;
  asmc_rsp_t a_rsp;

  ami_decoder u_dec (
    .clk, .rst_n, .flush(squash_valid),
    .inst_valid(inst_valid && !squash_valid), .inst_ready, .inst,
    .uop_valid, .uop_ready, .uop);

  assign uop_fire = uop_valid && uop_ready;

  alsu #(.WIN(WIN), .CQ_DEPTH(CQ_DEPTH)) u_alsu (
    .clk, .rst_n,
    .uop_valid, .uop_ready, .uop, .uop_tag,
    .wb_valid, .wb_tag, .wb_has_rd, .wb_rd, .wb_data,
    .commit_valid, .commit_ready, .squash_valid, .squash_tag,
    .asmc_req_valid(a_req_valid), .asmc_req_ready(a_req_ready), .asmc_req(a_req),
    .asmc_rsp_valid(a_rsp_valid), .asmc_rsp(a_rsp),
    .ev_alloc_fail, .ev_getfin_empty, .ev_batch_fetch, .ev_unc_reuse,
    .ev_unc_stall, .ev_put_free, .ev_squash);

  asmc #(.SPM_BYTES(SPM_BYTES), .MAX_QLEN(MAX_QLEN), .PEND_DEPTH(PEND_DEPTH)) u_asmc (
    .clk, .rst_n,
    .req_valid(a_req_valid), .req_ready(a_req_ready), .req(a_req),
    .rsp_valid(a_rsp_valid), .rsp(a_rsp),
    .cpu_spm_valid(spm_valid), .cpu_spm_ready(spm_ready), .cpu_spm_req(spm_req),
    .cpu_spm_rvalid(spm_rvalid), .cpu_spm_rdata(spm_rdata),
    .mem_req_valid, .mem_req_ready, .mem_req,
    .mem_rsp_valid, .mem_rsp_ready, .mem_rsp,
    .inflight, .ev_init, .ev_split);
endmodule
