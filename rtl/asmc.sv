// asmc: Asynchronous Scratchpad Memory Controller, the AMU's half beside the L2.
//
// The ASMC owns the SPM (l2_spm) and everything stored in its metadata
// area, and turns ALSU requests into far-memory traffic:
//   * aload / astore  -> asmc_req_engine (32-entry pending queue, request
//                        table entry, split into line requests)
//   * far-memory responses -> asmc_rsp_engine (32-entry pending queue, data
//                        into SPM, completion into the finished list)
//   * GET_FREE / GET_FIN -> a batch of IDs from the free / finished list
//                        (asmc_id_list), returned on rsp_*
//   * PUT_FREE        -> the IDs of the batch go back into the free list
//   * CFG_WR / CFG_RD -> asmc_cfg_regs; writing queue_length rebuilds the
//                        lists (free list = IDs 1..queue_length)
// The core's ordinary loads and stores reach the SPM through the cpu_spm_*
// port. A fixed-priority arbiter shares the single SPM port: core, response
// engine, request engine, finished list, free list.
//
// Commands are taken in order, one at a time (req_valid/req_ready); an ID
// batch or config value comes back on rsp_valid (one-cycle pulse). The
// command set follows the paper's description; the encodings, PUT_FREE as
// the write-back of released IDs, the arbiter and its priorities are this
// design's own. inflight counts requests accepted and not yet finished.
//
// Tool note: rst_n is an asynchronous reset for the flops and also the disable iff
// of the assertions; the linter's SYNCASYNCNET note about that double use is
// expected and harmless (assertions are not synthesised).
// The busy and pending outputs of the two engines are wired to local
// signals that are not read (debug visibility); the linter reports them as
// unused.
module asmc
  import amu_pkg::*;
#(
  parameter int unsigned SPM_BYTES  = 65536,
  parameter int unsigned MAX_QLEN   = 512,
  parameter int unsigned PEND_DEPTH = 32
) (
  input  logic       clk,
  input  logic       rst_n,
  // ALSU channel
  input  logic       req_valid,
  output logic       req_ready,
  input  asmc_req_t  req,
  output logic       rsp_valid,
  output asmc_rsp_t  rsp,
  // core load/store port to the SPM
  input  logic       cpu_spm_valid,
  output logic       cpu_spm_ready,
  input  spm_req_t   cpu_spm_req,
  output logic       cpu_spm_rvalid,
  output line_t      cpu_spm_rdata,
  // far memory
  output logic       mem_req_valid,
  input  logic       mem_req_ready,
  output mem_req_t   mem_req,
  input  logic       mem_rsp_valid,
  output logic       mem_rsp_ready,
  input  mem_rsp_t   mem_rsp,
  // status
  output logic [ID_W:0] inflight,
  output logic       ev_init,
  output logic       ev_split
);
  localparam int unsigned LNW = SPM_AW - LINE_OFF_W;

  // ---------------- configuration
  logic [15:0]    granularity;
  logic [LNW-1:0] amart_line, free_line, fin_line, list_lines;
  id_t            queue_length;
  logic [XLEN-1:0] cfg_rd_data;
  logic           cfg_wr;

  asmc_cfg_regs #(.MAX_QLEN(MAX_QLEN)) u_cfg (
    .clk, .rst_n,
    .wr_valid(cfg_wr), .wr_sel(cfg_sel_e'(req.addr[1:0])), .wr_data(req.data),
    .rd_sel(cfg_sel_e'(req.addr[1:0])), .rd_data(cfg_rd_data),
    .granularity, .amart_line, .free_line, .fin_line, .list_lines, .queue_length);

  // ---------------- SPM and its arbiter
  localparam int NC = 5;   // 0 core, 1 rsp engine, 2 req engine, 3 fin list, 4 free list
  logic     [NC-1:0] c_valid, c_gnt;
  spm_req_t          c_req [NC];
  logic              spm_valid;
  spm_req_t          spm_req;
  line_t             spm_rdata;

  always_comb begin
    c_gnt     = '0;
    spm_valid = 1'b0;
    spm_req   = c_req[0];
    for (int i = NC - 1; i >= 0; i--) begin
      if (c_valid[i]) begin
        c_gnt     = '0;
        c_gnt[i]  = 1'b1;
        spm_valid = 1'b1;
        spm_req   = c_req[i];
      end
    end
  end

  l2_spm #(.SPM_BYTES(SPM_BYTES)) u_spm (
    .clk, .req_valid(spm_valid), .req(spm_req), .rdata(spm_rdata));

  assign c_valid[0]    = cpu_spm_valid;
  assign c_req[0]      = cpu_spm_req;
  assign cpu_spm_ready = c_gnt[0];
  assign cpu_spm_rdata = spm_rdata;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) cpu_spm_rvalid <= 1'b0;
    else        cpu_spm_rvalid <= c_gnt[0] && !cpu_spm_req.we;
  end

  // ---------------- ID lists
  typedef enum logic [2:0] {C_IDLE, C_GET_FREE, C_GET_FIN, C_PUT, C_INIT_A, C_INIT_B} cstate_e;
  cstate_e cs;

  logic free_push_valid, free_push_ready, free_get, free_done, free_busy, lists_init;
  logic fin_push_valid, fin_push_ready, fin_get, fin_done, fin_busy;
  id_t  free_push_id, fin_push_id;
  lvr_t free_vec, fin_vec, put_vec;
  logic [POS_W-1:0] put_idx;
  logic [ID_W:0] free_cnt, fin_cnt;

  asmc_id_list u_free (
    .clk, .rst_n, .base_line(free_line), .cap_lines(list_lines),
    .init_valid(lists_init), .init_count(queue_length),
    .push_valid(free_push_valid), .push_ready(free_push_ready), .push_id(free_push_id),
    .get_valid(free_get), .get_done(free_done), .get_vec(free_vec), .busy(free_busy),
    .id_count(free_cnt),
    .spm_req_valid(c_valid[4]), .spm_req(c_req[4]), .spm_gnt(c_gnt[4]), .spm_rdata);

  asmc_id_list u_fin (
    .clk, .rst_n, .base_line(fin_line), .cap_lines(list_lines),
    .init_valid(lists_init), .init_count('0),
    .push_valid(fin_push_valid), .push_ready(fin_push_ready), .push_id(fin_push_id),
    .get_valid(fin_get), .get_done(fin_done), .get_vec(fin_vec), .busy(fin_busy),
    .id_count(fin_cnt),
    .spm_req_valid(c_valid[3]), .spm_req(c_req[3]), .spm_gnt(c_gnt[3]), .spm_rdata);

  // ---------------- request and response engines
  asmc_job_t job;
  logic      eng_in_valid, eng_in_ready, req_busy, rsp_busy;
  logic [$clog2(PEND_DEPTH+1)-1:0] req_pend, rsp_pend;

  always_comb begin
    job          = '0;
    job.is_store = (req.cmd == CMD_ASTORE);
    job.id       = req.data[SPM_AW +: ID_W];
    job.spm_addr = req.data[SPM_AW-1:0];
    job.mem_addr = req.addr;
    job.size     = granularity;
  end

  asmc_req_engine #(.PEND_DEPTH(PEND_DEPTH)) u_req (
    .clk, .rst_n,
    .in_valid(eng_in_valid), .in_ready(eng_in_ready), .in_job(job), .amart_line,
    .spm_req_valid(c_valid[2]), .spm_req(c_req[2]), .spm_gnt(c_gnt[2]), .spm_rdata,
    .mem_req_valid, .mem_req_ready, .mem_req,
    .busy(req_busy), .pending(req_pend), .ev_split);

  asmc_rsp_engine #(.PEND_DEPTH(PEND_DEPTH)) u_rsp (
    .clk, .rst_n,
    .mem_rsp_valid, .mem_rsp_ready, .mem_rsp, .amart_line,
    .spm_req_valid(c_valid[1]), .spm_req(c_req[1]), .spm_gnt(c_gnt[1]), .spm_rdata,
    .fin_valid(fin_push_valid), .fin_ready(fin_push_ready), .fin_id(fin_push_id),
    .busy(rsp_busy), .pending(rsp_pend));

  // ---------------- command sequencing
  wire is_access = (req.cmd == CMD_ALOAD) || (req.cmd == CMD_ASTORE);
  wire idle      = (cs == C_IDLE);

  always_comb begin
    req_ready    = 1'b0;
    eng_in_valid = 1'b0;
    cfg_wr       = 1'b0;
    if (idle && req_valid) begin
      if (is_access) begin
        eng_in_valid = 1'b1;
        req_ready    = eng_in_ready;
      end else begin
        req_ready = 1'b1;
        cfg_wr    = (req.cmd == CMD_CFG_WR);
      end
    end
  end

  assign free_get        = (cs == C_GET_FREE);
  assign fin_get         = (cs == C_GET_FIN);
  assign free_push_valid = (cs == C_PUT) && (put_idx != put_vec.pos);
  assign free_push_id    = put_vec.ids[put_idx];
  assign lists_init      = (cs == C_INIT_A) && !free_busy && !fin_busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cs <= C_IDLE; rsp_valid <= 1'b0; rsp <= '0; put_vec <= '0; put_idx <= '0;
    end else begin
      rsp_valid <= 1'b0;
      unique case (cs)
        C_IDLE: if (req_valid && req_ready && !is_access) begin
          unique case (req.cmd)
            CMD_GET_FREE: cs <= C_GET_FREE;
            CMD_GET_FIN:  cs <= C_GET_FIN;
            CMD_PUT_FREE: begin cs <= C_PUT; put_vec <= req.vec; put_idx <= '0; end
            CMD_CFG_RD: begin
              rsp_valid <= 1'b1;
              rsp.cmd   <= CMD_CFG_RD;
              rsp.vec   <= lvr_t'(cfg_rd_data);
            end
            CMD_CFG_WR: if (req.addr[1:0] == CFG_QUEUE_LENGTH) cs <= C_INIT_A;
            default: ;
          endcase
        end
        C_GET_FREE: if (free_done) begin
          rsp_valid <= 1'b1; rsp.cmd <= CMD_GET_FREE; rsp.vec <= free_vec; cs <= C_IDLE;
        end
        C_GET_FIN: if (fin_done) begin
          rsp_valid <= 1'b1; rsp.cmd <= CMD_GET_FIN; rsp.vec <= fin_vec; cs <= C_IDLE;
        end
        C_PUT: begin
          if (put_idx == put_vec.pos) cs <= C_IDLE;
          else if (free_push_ready) put_idx <= put_idx + 1'b1;
        end
        C_INIT_A: if (lists_init) cs <= C_INIT_B;
        C_INIT_B: if (!free_busy && !fin_busy) cs <= C_IDLE;
        default: cs <= C_IDLE;
      endcase
    end
  end

  // ---------------- in-flight requests (the memory-level parallelism)
  wire acc_access = req_valid && req_ready && is_access;
  wire completed  = fin_push_valid && fin_push_ready;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) inflight <= '0;
    else inflight <= inflight + (ID_W+1)'(acc_access) - (ID_W+1)'(completed);
  end

  assign ev_init = lists_init;

  // Every ID is somewhere: the free list never holds more IDs than exist.
  assert property (@(posedge clk) disable iff (!rst_n)
                   (cs == C_IDLE) |-> (free_cnt <= (ID_W+1)'(queue_length)));
  assert property (@(posedge clk) disable iff (!rst_n)
                   fin_cnt <= (ID_W+1)'(MAX_QLEN));
endmodule
