// tb_alsu: the ALSU between a model core (in-order issue, ROB-style commit,
// random squashes at instruction boundaries) and a model ASMC that keeps
// the free and finished lists as plain queues and answers in order after
// a random delay. Checked:
//   * AllocFree returns IDs that are not in use, or 0 when none is free;
//   * aload/astore requests reach the ASMC only after their micro-op
//     commits, in commit order, with the right ID, SPM and memory address;
//     squashed requests never reach it;
//   * getfin returns only IDs whose requests were sent, each once, or 0;
//   * IDs handed out by committed getfins come back through PUT_FREE;
//   * cfgrr returns the register value; a config write holds back younger
//     micro-ops until it has reached the ASMC;
//   * no ID is lost: after the run every one of the queue_length IDs can be
//     allocated again.
`timescale 1ns/1ps
module tb_alsu;
  import amu_pkg::*;
  import tb_amu_pkg::*;
  localparam int TAG_W = 4;
  localparam int QLEN  = 48;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic uop_valid = 0, uop_ready, wb_valid, wb_has_rd, commit_valid = 0, commit_ready;
  logic squash_valid = 0, asmc_req_valid, asmc_req_ready = 0, asmc_rsp_valid = 0;
  uop_t uop = '0;
  logic [TAG_W-1:0] uop_tag, wb_tag, squash_tag = 0;
  logic [4:0] wb_rd;
  logic [XLEN-1:0] wb_data;
  asmc_req_t asmc_req;
  asmc_rsp_t asmc_rsp = '0;
  logic ev_alloc_fail, ev_getfin_empty, ev_batch_fetch, ev_unc_reuse, ev_unc_stall,
        ev_put_free, ev_squash;
  int checks = 0, failures = 0;
  int n_fail = 0, n_empty = 0, n_fetch = 0, n_reuse = 0, n_stall = 0, n_put = 0, n_sq = 0;

  alsu dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %0t: %s", $time, what); end
  endtask

  // ---------------- model ASMC
  int pool[$];                 // free list
  int fin_pool[$];             // finished list
  logic [63:0] cfg[3];
  typedef struct { longint due; asmc_rsp_t r; } prsp_t;
  prsp_t prsp[$];
  longint now = 0;
  bit fin_handed[int];         // IDs given out by GET_FIN, waiting for PUT_FREE
  asmc_req_t exp_sent[$];      // committed requests, in commit order

  function automatic lvr_t take(ref int q[$]);
    lvr_t v = '0;
    int n = $urandom_range(1, IDS_PER_VEC);
    while (v.pos < POS_W'(n) && q.size() > 0) begin
      v.ids[v.pos] = id_t'(q.pop_front());
      v.pos++;
    end
    return v;
  endfunction

  always @(posedge clk) begin
    now++;
    if (rst_n && asmc_req_valid && asmc_req_ready) begin
      prsp_t p;
      p.due = now + $urandom_range(2, 8);
      p.r = '0;
      p.r.cmd = asmc_req.cmd;
      unique case (asmc_req.cmd)
        CMD_GET_FREE: begin p.r.vec = take(pool); prsp.push_back(p); end
        CMD_GET_FIN: begin
          p.r.vec = take(fin_pool);
          for (int i = 0; i < int'(p.r.vec.pos); i++) fin_handed[int'(p.r.vec.ids[i])] = 1;
          prsp.push_back(p);
        end
        CMD_PUT_FREE: for (int i = 0; i < int'(asmc_req.vec.pos); i++) begin
          int id;
          id = int'(asmc_req.vec.ids[i]);
          check(fin_handed.exists(id), $sformatf("PUT_FREE of ID %0d not from the finished list", id));
          fin_handed.delete(id);
          pool.push_back(id);
        end
        CMD_CFG_RD: begin p.r.vec = lvr_t'(cfg[asmc_req.addr[1:0]]); prsp.push_back(p); end
        CMD_CFG_WR: begin
          cfg[asmc_req.addr[1:0]] = asmc_req.data;
          if (asmc_req.addr[1:0] == CFG_QUEUE_LENGTH) begin
            pool.delete(); fin_pool.delete(); fin_handed.delete();
            for (int i = 1; i <= int'(asmc_req.data); i++) pool.push_back(i);
          end
          if (exp_sent.size() > 0 && exp_sent[0].cmd == CMD_CFG_WR) void'(exp_sent.pop_front());
        end
        default: begin   // ALOAD / ASTORE
          asmc_req_t e;
          checks++;
          if (exp_sent.size() == 0) begin
            failures++; $display("FAIL: request sent before its commit");
          end else begin
            e = exp_sent.pop_front();
            if (asmc_req.cmd != e.cmd || asmc_req.addr != e.addr || asmc_req.data != e.data) begin
              failures++;
              $display("FAIL: request cmd %0d addr %h data %h, expected cmd %0d addr %h data %h",
                       asmc_req.cmd, asmc_req.addr, asmc_req.data, e.cmd, e.addr, e.data);
            end
          end
          fin_pool.push_back(int'(asmc_req.data[SPM_AW +: ID_W]));
        end
      endcase
    end
  end

  always @(negedge clk) begin
    asmc_req_ready = ($urandom_range(0, 9) < 7);
    asmc_rsp_valid = 0;
    if (prsp.size() > 0 && prsp[0].due <= now) begin
      asmc_rsp_valid = 1;
      asmc_rsp = prsp.pop_front().r;
    end
  end

  // ---------------- model core
  typedef struct {
    logic [TAG_W-1:0] tag;
    uop_t u;
    bit   first;       // first micro-op of its instruction
    bit   done;
    logic [63:0] res;
  } rec_t;
  rec_t rob[$];
  uop_t stream[$];     // micro-ops of the instruction being issued
  bit   stream_first;
  bit   auto_gen = 0;
  int   live[int];     // allocated, not yet returned by a committed getfin
  int   sent_ids[int];
  logic [63:0] last_alloc = 0;
  bit   cfgw_open = 0;
  int   n_alloc_ok = 0, n_getfin_ok = 0, n_cfgrd = 0;
  int   mode = 0;      // 0 random; 1 allocate until failure
  int   drain_allocs = 0;

  always @(posedge clk) if (rst_n) begin
    n_fail += int'(ev_alloc_fail); n_empty += int'(ev_getfin_empty); n_fetch += int'(ev_batch_fetch);
    n_reuse += int'(ev_unc_reuse); n_stall += int'(ev_unc_stall); n_put += int'(ev_put_free);
    n_sq += int'(ev_squash);
    if (cfgw_open && uop_ready) begin
      checks++; failures++; $display("FAIL: micro-op accepted behind an unsent config write");
    end
    if (squash_valid) begin
      int k;
      k = -1;
      foreach (rob[i]) if (rob[i].tag == squash_tag) k = i;
      if (k >= 0) while (rob.size() > k) void'(rob.pop_back());
    end
    if (wb_valid) foreach (rob[i]) if (rob[i].tag == wb_tag) begin
      rob[i].done = 1; rob[i].res = wb_data;
    end
    if (uop_valid && uop_ready) begin
      rec_t r;
      r.tag = uop_tag; r.u = uop; r.first = stream_first; r.done = 0; r.res = 0;
      rob.push_back(r);
      if (uop.op == UOP_CFG_WR) cfgw_open = 1;
    end
    if (commit_valid && commit_ready) begin
      rec_t r;
      r = rob.pop_front();
      check(r.done || r.u.op inside {UOP_ALOAD_EXEC, UOP_ASTORE_EXEC, UOP_CFG_WR},
            "commit of a completed micro-op");
      unique case (r.u.op)
        UOP_ALLOC_FREE: begin
          last_alloc = r.res;
          if (r.res != 0) begin
            check(!live.exists(int'(r.res)) && r.res <= QLEN, $sformatf("allocated ID %0d is free", r.res));
            live[int'(r.res)] = 1; n_alloc_ok++;
            if (mode == 1) drain_allocs++;
          end
        end
        UOP_ALOAD_EXEC, UOP_ASTORE_EXEC: if (last_alloc != 0) begin
          asmc_req_t e;
          e = '0;
          e.cmd  = (r.u.op == UOP_ASTORE_EXEC) ? CMD_ASTORE : CMD_ALOAD;
          e.addr = r.u.src2[MEM_AW-1:0];
          e.data = XLEN'({id_t'(last_alloc), r.u.src1[SPM_AW-1:0]});
          exp_sent.push_back(e);
          sent_ids[int'(last_alloc)] = 1;
        end
        UOP_GETFIN: if (r.res != 0) begin
          check(sent_ids.exists(int'(r.res)) && live.exists(int'(r.res)),
                $sformatf("getfin ID %0d belongs to a sent request", r.res));
          sent_ids.delete(int'(r.res)); live.delete(int'(r.res)); n_getfin_ok++;
        end
        UOP_CFG_RD: begin
          check(r.res == cfg[r.u.src2[1:0]], $sformatf("cfgrr %0d gave %0d", r.u.src2[1:0], r.res));
          n_cfgrd++;
        end
        UOP_CFG_WR: exp_sent.push_back('{cmd: CMD_CFG_WR, addr: '0, data: '0, vec: '0});
        default: ;
      endcase
    end
    if (asmc_req_valid && asmc_req_ready && asmc_req.cmd == CMD_CFG_WR) cfgw_open = 0;
  end

  function automatic uop_t mk(uop_e op, logic [63:0] s1, logic [63:0] s2);
    uop_t u = '0;
    u.op = op; u.rd = 5'd10; u.src1 = s1; u.src2 = s2;
    return u;
  endfunction

  task automatic next_inst();
    int k = $urandom_range(0, 99);
    stream_first = 1;
    if (k < 45) begin
      stream.push_back(mk(UOP_ALLOC_FREE, 0, 0));
      stream.push_back(mk(UOP_ALOAD_EXEC, $urandom_range(0, 8191) * 8, $urandom() * 64));
    end else if (k < 60) begin
      stream.push_back(mk(UOP_ALLOC_FREE, 0, 0));
      stream.push_back(mk(UOP_ASTORE_EXEC, $urandom_range(0, 8191) * 8, $urandom() * 64));
    end else if (k < 95) stream.push_back(mk(UOP_GETFIN, 0, 0));
    else stream.push_back(mk(UOP_CFG_RD, 0, $urandom_range(0, 2)));
  endtask

  bit accepted = 0;
  always @(posedge clk) if (uop_valid && uop_ready) accepted = 1;

  always @(negedge clk) if (rst_n) begin
    squash_valid = 0; commit_valid = 0;
    if (accepted) begin
      void'(stream.pop_front()); stream_first = 0; accepted = 0; uop_valid = 0;
    end
    // squash a suffix of the window at an instruction boundary
    if (auto_gen && rob.size() > 0 && $urandom_range(0, 19) == 0) begin
      int k;
      k = $urandom_range(0, rob.size() - 1);
      while (k < rob.size() && !rob[k].first) k++;
      if (k < rob.size()) begin
        squash_valid = 1; squash_tag = rob[k].tag;
        stream.delete(); uop_valid = 0;
      end
    end
    if (!squash_valid) commit_valid = ($urandom_range(0, 9) < 4) && rob.size() > 0;
    // issue
    if (!squash_valid && !uop_valid) begin
      if (stream.size() == 0 && auto_gen) next_inst();
      if (stream.size() > 0) begin
        uop = stream[0];
        uop_valid = ($urandom_range(0, 3) != 0);
      end
    end
  end

  task automatic drain();
    while (stream.size() > 0 || uop_valid || rob.size() > 0) @(negedge clk);
    repeat (20) @(negedge clk);
  endtask

  // run one fixed instruction through the window
  task automatic one(uop_t u);
    @(negedge clk); stream.push_back(u); stream_first = 1;
    drain();
  endtask

  initial begin
    cfg[0] = 8; cfg[1] = 0; cfg[2] = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    // configure through the ALSU: queue_length = QLEN, then read it back
    one(mk(UOP_CFG_WR, QLEN, CFG_QUEUE_LENGTH));
    check(cfg[2] == QLEN, "queue_length reached the ASMC");
    one(mk(UOP_CFG_RD, 0, CFG_QUEUE_LENGTH));
    // random mix
    auto_gen = 1;
    repeat (20000) @(posedge clk);
    @(negedge clk) auto_gen = 0;
    drain();
    $display("alloc %0d, getfin %0d, cfgrr %0d, in use %0d", n_alloc_ok, n_getfin_ok, n_cfgrd, live.num());
    // return everything: getfin until no ID is in use
    while (live.num() > 0) one(mk(UOP_GETFIN, 0, 0));
    check(exp_sent.size() == 0, "every committed request reached the ASMC");
    // every ID can be allocated again
    mode = 1; drain_allocs = 0;
    for (int i = 0; i < QLEN + 4; i++) one(mk(UOP_ALLOC_FREE, 0, 0));
    check(drain_allocs == QLEN, $sformatf("%0d of %0d IDs allocatable", drain_allocs, QLEN));
    $display("events: fail %0d empty %0d fetch %0d reuse %0d stall %0d put %0d squash %0d",
             n_fail, n_empty, n_fetch, n_reuse, n_stall, n_put, n_sq);
    check(n_fail > 0 && n_empty > 0 && n_fetch > 0 && n_put > 0 && n_sq > 0, "mechanisms exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
