// alsu: Asynchronous Load/Store Unit, the AMU's execution unit inside the core.
//
// The ALSU executes the micro-ops of the asynchronous memory instructions.
// ID-management micro-ops (AllocFree, Getfin) run speculatively: they move a
// request ID out of a list vector register into the destination register,
// and fetch a batch of IDs from the ASMC when the register is empty (two
// alsu_id_exec instances, one for the free list and one for the finished
// list). The request micro-ops (ALoadExec / AStoreExec) only record the
// request; like a store it is released to the ASMC when the micro-op
// commits, through a small committed-request buffer. Config writes go the
// same way and act as a fence: no younger micro-op enters until the write
// has reached the ASMC. A config read waits until it is the oldest micro-op.
//
// IDs that getfin hands to software go back to the ASMC's free list when the
// getfin commits. They are gathered in a return vector register (same
// format as the list vector registers) and written back with one PUT_FREE
// request when it is full, just before the ALSU asks the ASMC for free
// IDs, or before a config read, so a free ID is never stranded in the ALSU.
// A committed write of
// queue_length empties the list vector registers and the return register,
// since the ASMC then rebuilds its lists from scratch.
//
// Micro-op window: micro-ops enter in program order (uop_valid/uop_ready),
// each gets a window slot number (uop_tag) and executes in order, one at a
// time. Completion is reported on wb_* (wb_has_rd for results). The core
// commits the oldest completed micro-op with commit_valid/commit_ready and
// squashes a suffix of the window with squash_valid/squash_tag (first
// squashed slot). All IDs, including the value 0 for "none", follow the
// paper; the window, the in-order execution and the return vector register
// are this design's own choices.
//
// Tool note: rst_n is an asynchronous reset for the flops and also the disable iff
// of the assertions; the linter's SYNCASYNCNET note about that double use is
// expected and harmless (assertions are not synthesised).
// ids_held of both list executors and the committed-request buffer's count
// are left unread (kept for debug visibility), and the high bits of the head
// slot (hs) are fields not needed at commit; the linter reports them as unused.
module alsu
  import amu_pkg::*;
#(
  parameter int unsigned WIN      = 16,
  parameter int unsigned CQ_DEPTH = 8,
  parameter int unsigned TAG_W    = $clog2(WIN)
) (
  input  logic             clk,
  input  logic             rst_n,
  // micro-ops from decode
  input  logic             uop_valid,
  output logic             uop_ready,
  input  uop_t             uop,
  output logic [TAG_W-1:0] uop_tag,
  // completion / result
  output logic             wb_valid,
  output logic [TAG_W-1:0] wb_tag,
  output logic             wb_has_rd,
  output logic [4:0]       wb_rd,
  output logic [XLEN-1:0]  wb_data,
  // commit / squash from the ROB
  input  logic             commit_valid,
  output logic             commit_ready,
  input  logic             squash_valid,
  input  logic [TAG_W-1:0] squash_tag,
  // port to the ASMC
  output logic             asmc_req_valid,
  input  logic             asmc_req_ready,
  output asmc_req_t        asmc_req,
  input  logic             asmc_rsp_valid,
  input  asmc_rsp_t        asmc_rsp,
  // event pulses
  output logic             ev_alloc_fail,
  output logic             ev_getfin_empty,
  output logic             ev_batch_fetch,
  output logic             ev_unc_reuse,
  output logic             ev_unc_stall,
  output logic             ev_put_free,
  output logic             ev_squash
);
  typedef struct packed {
    uop_e            op;
    logic            done;
    logic [4:0]      rd;
    id_t             id;
    logic [XLEN-1:0] src1;
    logic [XLEN-1:0] src2;
  } slot_t;

  typedef enum logic [2:0] {X_IDLE, X_POP_FREE, X_POP_FIN, X_CFG_WAIT, X_CFG_RSP} xstate_e;

  slot_t            win [WIN];
  logic [TAG_W-1:0] head, tail, cur;
  logic [TAG_W:0]   cnt;
  xstate_e          xs;
  id_t              last_alloc_id;
  lvr_t             retbuf;

  // ---------------- squash bookkeeping
  logic [TAG_W-1:0] sq_off;
  logic [TAG_W:0]   sq_len;
  always_comb begin
    sq_off = squash_tag - head;
    sq_len = ({1'b0, sq_off} < cnt) ? cnt - {1'b0, sq_off} : '0;
  end
  wire sq_cur = squash_valid && (xs != X_IDLE) &&
                ({1'b0, TAG_W'(cur - squash_tag)} < sq_len);

  // ---------------- ID executors
  logic free_done, fin_done, free_busy, fin_busy;
  id_t  free_id, fin_id;
  logic free_fetch, fin_fetch, free_fetch_rdy, fin_fetch_rdy;
  logic [POS_W-1:0] free_held, fin_held;
  logic ev_ff, ev_fr, ev_fs, ev_nf, ev_nr, ev_ns;
  logic acc, do_commit, cfg_clear, cfg_owed;
  logic cfgw_in_win, cfgw_in_cq;   // a config write not yet at the ASMC

  alsu_id_exec #(.WIN(WIN)) u_free (
    .clk, .rst_n,
    .acc_valid(acc), .acc_tag(tail),
    .pop_valid(xs == X_POP_FREE), .pop_tag(cur), .pop_done(free_done), .pop_id(free_id),
    .busy(free_busy),
    .fetch_valid(free_fetch), .fetch_ready(free_fetch_rdy),
    .rsp_valid(asmc_rsp_valid && asmc_rsp.cmd == CMD_GET_FREE), .rsp_vec(asmc_rsp.vec),
    .commit_valid(do_commit), .commit_tag(head),
    .squash_valid, .squash_tag, .squash_len(sq_len), .clear(cfg_clear),
    .ids_held(free_held), .ev_fetch(ev_ff), .ev_reuse(ev_fr), .ev_stall(ev_fs));

  alsu_id_exec #(.WIN(WIN)) u_fin (
    .clk, .rst_n,
    .acc_valid(acc), .acc_tag(tail),
    .pop_valid(xs == X_POP_FIN), .pop_tag(cur), .pop_done(fin_done), .pop_id(fin_id),
    .busy(fin_busy),
    .fetch_valid(fin_fetch), .fetch_ready(fin_fetch_rdy),
    .rsp_valid(asmc_rsp_valid && asmc_rsp.cmd == CMD_GET_FIN), .rsp_vec(asmc_rsp.vec),
    .commit_valid(do_commit), .commit_tag(head),
    .squash_valid, .squash_tag, .squash_len(sq_len), .clear(cfg_clear),
    .ids_held(fin_held), .ev_fetch(ev_nf), .ev_reuse(ev_nr), .ev_stall(ev_ns));

  // ---------------- committed request buffer (like the committed store buffer)
  asmc_req_t cq_in, cq_out;
  logic cq_push, cq_in_ready, cq_valid, cq_pop;
  logic [$clog2(CQ_DEPTH+1)-1:0] cq_cnt;
  amu_fifo #(.T(asmc_req_t), .DEPTH(CQ_DEPTH)) u_cq (
    .clk, .rst_n,
    .in_valid(cq_push), .in_ready(cq_in_ready), .in_data(cq_in),
    .out_valid(cq_valid), .out_ready(cq_pop), .out_data(cq_out), .count(cq_cnt));

  // ---------------- ASMC port arbitration
  localparam logic [POS_W-1:0] VEC_FULL = POS_W'(IDS_PER_VEC);
  wire ret_full   = (retbuf.pos == VEC_FULL);
  wire ret_any    = (retbuf.pos != '0);
  wire cfg_rd_head = (xs == X_CFG_WAIT) && (head == cur);
  wire send_put   = ret_full || ((free_fetch || cfg_rd_head) && ret_any);
  wire cfg_rd_go  = cfg_rd_head && !cq_valid && !ret_any && !cfg_owed;

  always_comb begin
    asmc_req       = '0;
    asmc_req_valid = 1'b1;
    free_fetch_rdy = 1'b0;
    fin_fetch_rdy  = 1'b0;
    cq_pop         = 1'b0;
    if (send_put) begin
      asmc_req.cmd = CMD_PUT_FREE;
      asmc_req.vec = retbuf;
    end else if (free_fetch) begin
      asmc_req.cmd   = CMD_GET_FREE;
      free_fetch_rdy = asmc_req_ready;
    end else if (fin_fetch) begin
      asmc_req.cmd  = CMD_GET_FIN;
      fin_fetch_rdy = asmc_req_ready;
    end else if (cfg_rd_go) begin
      asmc_req.cmd  = CMD_CFG_RD;
      asmc_req.addr = mem_addr_t'(win[cur].src2[1:0]);
    end else if (cq_valid) begin
      asmc_req = cq_out;
      cq_pop   = asmc_req_ready;
    end else begin
      asmc_req_valid = 1'b0;
    end
  end
  wire put_sent    = send_put && asmc_req_ready;
  wire cfg_rd_sent = cfg_rd_go && !send_put && !free_fetch && !fin_fetch && asmc_req_ready;

  // ---------------- accept
  assign uop_ready = (xs == X_IDLE) && (cnt != (TAG_W+1)'(WIN)) && !squash_valid &&
                     !cfgw_in_win && !cfgw_in_cq &&
                     !free_busy && !fin_busy && !free_done && !fin_done;
  assign uop_tag   = tail;
  assign acc       = uop_valid && uop_ready;

  // ---------------- commit
  slot_t hs;
  assign hs = win[head];
  wire hs_exec  = (hs.op == UOP_ALOAD_EXEC) || (hs.op == UOP_ASTORE_EXEC);
  wire need_cq  = (hs_exec && hs.id != '0) || (hs.op == UOP_CFG_WR);
  wire need_ret = (hs.op == UOP_GETFIN) && (hs.id != '0);
  assign commit_ready = (cnt != '0) && hs.done && !squash_valid &&
                        (!need_cq || cq_in_ready) && (!need_ret || (!ret_full && !put_sent));
  assign do_commit = commit_valid && commit_ready;

  always_comb begin
    cq_in      = '0;
    cq_in.cmd  = (hs.op == UOP_CFG_WR) ? CMD_CFG_WR :
                 (hs.op == UOP_ASTORE_EXEC) ? CMD_ASTORE : CMD_ALOAD;
    cq_in.addr = (hs.op == UOP_CFG_WR) ? mem_addr_t'(hs.src2[1:0]) : hs.src2[MEM_AW-1:0];
    cq_in.data = (hs.op == UOP_CFG_WR) ? hs.src1 :
                 XLEN'({hs.id, hs.src1[SPM_AW-1:0]});
  end
  assign cq_push = do_commit && need_cq;
  // A committed write of queue_length makes every ID held here stale.
  assign cfg_clear = do_commit && (hs.op == UOP_CFG_WR) &&
                     (hs.src2[1:0] == CFG_QUEUE_LENGTH);

  // ---------------- execute, window and writeback
  always_ff @(posedge clk) begin
    if (acc) begin
      win[tail].op   <= uop.op;
      win[tail].rd   <= uop.rd;
      win[tail].src1 <= uop.src1;
      win[tail].src2 <= uop.src2;
      win[tail].id   <= (uop.op == UOP_ALOAD_EXEC || uop.op == UOP_ASTORE_EXEC) ? last_alloc_id : '0;
      win[tail].done <= (uop.op == UOP_ALOAD_EXEC || uop.op == UOP_ASTORE_EXEC ||
                         uop.op == UOP_CFG_WR);
    end
    if (xs == X_POP_FREE && free_done) begin
      win[cur].id <= free_id;  win[cur].done <= 1'b1;
    end
    if (xs == X_POP_FIN && fin_done) begin
      win[cur].id <= fin_id;   win[cur].done <= 1'b1;
    end
    if (xs == X_CFG_RSP && asmc_rsp_valid && asmc_rsp.cmd == CMD_CFG_RD)
      win[cur].done <= 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      head <= '0; tail <= '0; cnt <= '0; cur <= '0;
      xs <= X_IDLE; last_alloc_id <= '0; retbuf <= '0;
      cfgw_in_win <= 1'b0; cfgw_in_cq <= 1'b0; cfg_owed <= 1'b0;
      wb_valid <= 1'b0; wb_tag <= '0; wb_has_rd <= 1'b0; wb_rd <= '0; wb_data <= '0;
    end else begin
      wb_valid <= 1'b0;
      // accept and start
      if (acc) begin
        tail <= tail + 1'b1;
        cur  <= tail;
        unique case (uop.op)
          UOP_ALLOC_FREE: xs <= X_POP_FREE;
          UOP_GETFIN:     xs <= X_POP_FIN;
          UOP_CFG_RD:     xs <= X_CFG_WAIT;
          default: begin          // request micro-ops and config writes: done at once
            wb_valid  <= 1'b1;
            wb_tag    <= tail;
            wb_has_rd <= 1'b0;
            wb_rd     <= uop.rd;
            wb_data   <= '0;
          end
        endcase
      end
      // finish
      unique case (xs)
        X_POP_FREE: if (free_done) begin
          xs <= X_IDLE; last_alloc_id <= free_id;
          wb_valid <= 1'b1; wb_tag <= cur; wb_has_rd <= 1'b1;
          wb_rd <= win[cur].rd; wb_data <= XLEN'(free_id);
        end
        X_POP_FIN: if (fin_done) begin
          xs <= X_IDLE;
          wb_valid <= 1'b1; wb_tag <= cur; wb_has_rd <= 1'b1;
          wb_rd <= win[cur].rd; wb_data <= XLEN'(fin_id);
        end
        X_CFG_WAIT: if (cfg_rd_sent) xs <= X_CFG_RSP;
        X_CFG_RSP: if (asmc_rsp_valid && asmc_rsp.cmd == CMD_CFG_RD && !cfg_owed) begin
          xs <= X_IDLE;
          wb_valid <= 1'b1; wb_tag <= cur; wb_has_rd <= 1'b1;
          wb_rd <= win[cur].rd; wb_data <= asmc_rsp.vec[XLEN-1:0];
        end
        default: ;
      endcase
      // commit
      if (do_commit) head <= head + 1'b1;
      cnt <= cnt + (TAG_W+1)'(acc) - (TAG_W+1)'(do_commit);
      // config writes serialise the ALSU until the ASMC has them
      if (acc && uop.op == UOP_CFG_WR) cfgw_in_win <= 1'b1;
      if (do_commit && hs.op == UOP_CFG_WR) begin
        cfgw_in_win <= 1'b0;
        cfgw_in_cq  <= 1'b1;
      end
      if (cq_pop && cq_out.cmd == CMD_CFG_WR) cfgw_in_cq <= 1'b0;
      // return vector register
      if (put_sent || cfg_clear) retbuf.pos <= '0;
      if (do_commit && need_ret) begin
        retbuf.ids[put_sent ? '0 : retbuf.pos] <= hs.id;
        retbuf.pos <= put_sent ? POS_W'(1) : retbuf.pos + 1'b1;
      end
      // a config read squashed after its request left is still answered:
      // that answer is dropped, and no new config read is sent before it
      if (asmc_rsp_valid && asmc_rsp.cmd == CMD_CFG_RD && cfg_owed) cfg_owed <= 1'b0;
      if (sq_cur && ((xs == X_CFG_RSP && !(asmc_rsp_valid && asmc_rsp.cmd == CMD_CFG_RD)) ||
                     cfg_rd_sent))
        cfg_owed <= 1'b1;
      // squash: drop the window suffix and any micro-op in flight there
      if (squash_valid && sq_len != '0) begin
        tail <= squash_tag;
        cnt  <= cnt - sq_len;
        cfgw_in_win <= 1'b0;   // a config write is always the youngest
        if (sq_cur) begin
          xs <= X_IDLE;
          wb_valid <= 1'b0;
        end
      end
    end
  end

  assign ev_alloc_fail   = (xs == X_POP_FREE) && free_done && (free_id == '0);
  assign ev_getfin_empty = (xs == X_POP_FIN)  && fin_done  && (fin_id == '0);
  assign ev_batch_fetch  = ev_ff || ev_nf;
  assign ev_unc_reuse    = ev_fr || ev_nr;
  assign ev_unc_stall    = ev_fs || ev_ns;
  assign ev_put_free     = put_sent;
  assign ev_squash       = squash_valid && (sq_len != '0);

  // The ROB only commits completed micro-ops.
  assert property (@(posedge clk) disable iff (!rst_n) commit_valid |-> (cnt != '0));
  // At most one request that expects a response is in flight.
  assert property (@(posedge clk) disable iff (!rst_n) !(free_fetch && fin_fetch));
endmodule
