// tb_amu_top: end-to-end test of the AMU at its default parameters.
//
// The testbench plays the out-of-order core and a small coroutine runtime.
// The core model issues AMI instructions in order, waits for their
// micro-ops to complete, and commits them from a separate process (which
// can be held back to keep micro-ops speculative). Far memory is
// far_mem_model with a random 100..400-cycle latency.
// Phases:
//  1. configuration: cfgrw granularity / queue_base / queue_length, cfgrr back;
//  2. a GUPS-like random update of 120 distinct 8-byte words, written like the
//     paper's coroutine runtime: aload, getfin, load/modify/store the SPM copy,
//     astore, getfin; allocation failures are retried after a getfin;
//  3. verification: every updated word is read back with aload and compared;
//  4. a 512-byte aload/astore pair (split into 8 line requests);
//  5. speculation: an aload whose ID fetch was speculative is squashed and
//     the next aload must reuse the saved batch (uncommitted ID register);
//     then a sixth allocation with five IDs all held by uncommitted micro-ops
//     must stall, and fail (ID 0) once they commit.
// Every mechanism counter must end above zero.
`timescale 1ns/1ps
module tb_amu_top;
  import amu_pkg::*;
  import tb_amu_pkg::*;

  localparam int TAG_W = 4;
  localparam int NUPD  = 120;
  localparam int QLEN  = 40;
  localparam logic [SPM_AW-1:0] DATA_BASE = 16'h4000;
  localparam logic [MEM_AW-1:0] UPD_BASE  = 48'h10_0000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic             inst_valid = 0, inst_ready;
  ami_inst_t        inst = '0;
  logic             uop_fire;
  logic [TAG_W-1:0] uop_tag;
  logic             wb_valid, wb_has_rd;
  logic [TAG_W-1:0] wb_tag;
  logic [4:0]       wb_rd;
  logic [XLEN-1:0]  wb_data;
  logic             commit_valid, commit_ready;
  logic             squash_valid = 0;
  logic [TAG_W-1:0] squash_tag = '0;
  logic             spm_valid = 0, spm_ready, spm_rvalid;
  spm_req_t         spm_req = '0;
  line_t            spm_rdata;
  logic             mem_req_valid, mem_req_ready, mem_rsp_valid, mem_rsp_ready;
  mem_req_t         mem_req;
  mem_rsp_t         mem_rsp;
  logic [ID_W:0]    inflight;
  logic ev_alloc_fail, ev_getfin_empty, ev_batch_fetch, ev_unc_reuse, ev_unc_stall,
        ev_put_free, ev_squash, ev_init, ev_split;

  amu_top dut (.*);

  far_mem_model #(.MIN_LAT(100), .MAX_LAT(400)) u_mem (
    .clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req(mem_req),
    .rsp_valid(mem_rsp_valid), .rsp_ready(mem_rsp_ready), .rsp(mem_rsp));

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---------------- event counters
  int n_alloc_fail, n_getfin_empty, n_batch_fetch, n_unc_reuse, n_unc_stall,
      n_put_free, n_squash, n_init, n_split, peak_inflight;
  always @(posedge clk) if (rst_n) begin
    n_alloc_fail   += int'(ev_alloc_fail);
    n_getfin_empty += int'(ev_getfin_empty);
    n_batch_fetch  += int'(ev_batch_fetch);
    n_unc_reuse    += int'(ev_unc_reuse);
    n_unc_stall    += int'(ev_unc_stall);
    n_put_free     += int'(ev_put_free);
    n_squash       += int'(ev_squash);
    n_init         += int'(ev_init);
    n_split        += int'(ev_split);
    if (int'(inflight) > peak_inflight) peak_inflight = int'(inflight);
  end

  // ---------------- core model: micro-op bookkeeping and commit
  int           nfired = 0;
  bit           sdone [int];
  logic [63:0]  sdata [int];
  int           tag2seq [16];
  logic [3:0]   seq2tag [int];
  int           rob [$];
  bit           hold = 0;
  bit           cflip;

  always @(posedge clk) if (rst_n) begin
    if (commit_valid && commit_ready) void'(rob.pop_front());
    if (uop_fire) begin
      tag2seq[uop_tag] = nfired;
      seq2tag[nfired] = uop_tag;
      sdone[nfired] = 0;
      rob.push_back(nfired);
      nfired++;
    end
    if (wb_valid) begin
      sdone[tag2seq[wb_tag]] = 1;
      sdata[tag2seq[wb_tag]] = wb_data;
    end
  end
  always @(negedge clk) begin
    cflip = $urandom_range(0, 3) != 0;
    commit_valid <= rst_n && !hold && rob.size() > 0 && sdone[rob[0]] && cflip;
  end

  // Issue one instruction; returns the sequence number of its first micro-op.
  task automatic issue(ami_op_e op, logic [63:0] a, logic [63:0] b, logic [1:0] creg,
                       output int first);
    @(negedge clk);
    inst_valid = 1;
    inst.op = op; inst.rd = 5'd10; inst.rs1_val = a; inst.rs2_val = b; inst.cfgreg = creg;
    first = nfired;
    do @(posedge clk); while (!(inst_valid && inst_ready));
    @(negedge clk);
    inst_valid = 0;
    while (!sdone.exists(nfired - 1) || !sdone[nfired - 1]) @(posedge clk);
  endtask

  task automatic ami(ami_op_e op, logic [63:0] a, logic [63:0] b, logic [1:0] creg,
                     output logic [63:0] res);
    int s;
    issue(op, a, b, creg, s);
    res = sdata[s];
  endtask

  task automatic cfgw(cfg_sel_e r, logic [63:0] v);
    logic [63:0] d;
    ami(AMI_CFGRW, v, 0, r, d);
  endtask

  task automatic drain_rob();
    while (rob.size() != 0) @(posedge clk);
  endtask

  task automatic spm_read(logic [SPM_AW-1:0] addr, output line_t d);
    @(negedge clk);
    spm_valid = 1; spm_req = '0; spm_req.line = addr[SPM_AW-1:LINE_OFF_W];
    do @(posedge clk); while (!spm_ready);
    @(negedge clk); spm_valid = 0;
    while (!spm_rvalid) @(posedge clk);
    d = spm_rdata;
  endtask

  task automatic spm_write8(logic [SPM_AW-1:0] addr, logic [63:0] v);
    @(negedge clk);
    spm_valid = 1; spm_req = '0; spm_req.we = 1; spm_req.line = addr[SPM_AW-1:LINE_OFF_W];
    spm_req.wdata = line_t'(v) << (64 * addr[5:3]);
    spm_req.wmask = bmask_t'(8'hFF) << (8 * addr[5:3]);
    do @(posedge clk); while (!spm_ready);
    @(negedge clk); spm_valid = 0;
  endtask

  function automatic logic [MEM_AW-1:0] upd_addr(int k);
    return UPD_BASE + MEM_AW'(k * 8 * 131);
  endfunction
  function automatic logic [63:0] upd_val(int k);
    return far_word(upd_addr(k)) ^ (64'(k) * 64'h0000_0123_4567_89AB + 64'd1);
  endfunction
  function automatic logic [SPM_AW-1:0] slot(int k);
    return DATA_BASE + SPM_AW'(k * 8);
  endfunction

  // ---------------- the coroutine-style runtime
  int id2k [int];
  bit id2st [int];

  // verify = 0: update pass (load, modify, store); 1: read-back pass.
  task automatic run_pass(bit verify);
    int next_k = 0, done = 0, sq [$];
    logic [63:0] r;
    line_t l;
    while (done < NUPD) begin
      bit try_issue = (sq.size() != 0 || next_k < NUPD) && ($urandom_range(0, 2) != 0);
      if (try_issue) begin
        int k = (sq.size() != 0) ? sq[0] : next_k;
        bit st = (sq.size() != 0);
        ami(st ? AMI_ASTORE : AMI_ALOAD, 64'(slot(k)), 64'(upd_addr(k)), 0, r);
        if (r != 0) begin
          id2k[int'(r)] = k; id2st[int'(r)] = st;
          if (st) void'(sq.pop_front()); else next_k++;
        end
        continue;
      end
      ami(AMI_GETFIN, 0, 0, 0, r);
      if (r == 0) begin repeat (4) @(posedge clk); continue; end
      begin
        int k = id2k[int'(r)];
        if (id2st[int'(r)]) done++;
        else begin
          logic [63:0] got;
          spm_read(slot(k), l);
          got = l[64 * slot(k)[5:3] +: 64];
          if (!verify) begin
            check(got == far_word(upd_addr(k)), $sformatf("aload data k=%0d", k));
            spm_write8(slot(k), upd_val(k));
            sq.push_back(k);
          end else begin
            check(got == upd_val(k), $sformatf("read-back k=%0d got %h exp %h", k, got, upd_val(k)));
            done++;
          end
        end
      end
    end
    drain_rob();
  endtask

  task automatic wait_fin(logic [63:0] id);
    logic [63:0] r;
    do begin
      ami(AMI_GETFIN, 0, 0, 0, r);
      if (r == 0) repeat (8) @(posedge clk);
    end while (r != id);
  endtask

  // ---------------- main
  initial begin : main
    logic [63:0] r, ida, idb;
    int sa, sb, s6;
    line_t l;
    repeat (5) @(posedge clk);
    rst_n = 1;
    repeat (5) @(posedge clk);

    // 1. configuration
    cfgw(CFG_GRANULARITY, 8);
    cfgw(CFG_QUEUE_BASE, 0);
    cfgw(CFG_QUEUE_LENGTH, QLEN);
    ami(AMI_CFGRR, 0, 0, CFG_QUEUE_LENGTH, r);  check(r == QLEN, "cfgrr queue_length");
    ami(AMI_CFGRR, 0, 0, CFG_GRANULARITY, r);   check(r == 8, "cfgrr granularity");

    // 2-3. GUPS-like update, then read back
    run_pass(0);
    $display("update pass done at %0t, peak in-flight %0d", $time, peak_inflight);
    run_pass(1);
    check(peak_inflight >= 16, $sformatf("memory-level parallelism %0d", peak_inflight));
    // no ID was lost on the way: all QLEN of them can be allocated again
    begin
      int n, got;
      n = 0;
      do begin
        ami(AMI_ALOAD, 64'(slot(0)), 64'(upd_addr(0)), 0, r);
        if (r != 0) n++;
      end while (r != 0 && n <= QLEN);
      check(n == QLEN, $sformatf("%0d IDs allocatable, queue_length %0d", n, QLEN));
      got = 0;
      while (got < n) begin
        ami(AMI_GETFIN, 0, 0, 0, r);
        if (r != 0) got++; else repeat (4) @(posedge clk);
      end
      drain_rob();
    end

    // 4. 512-byte requests
    cfgw(CFG_GRANULARITY, 512);
    ami(AMI_ALOAD, 64'h8000, 64'h20_0000, 0, r);  check(r != 0, "512B aload id");
    wait_fin(r);
    for (int i = 0; i < 8; i++) begin
      spm_read(16'h8000 + 16'(64 * i), l);
      check(l == far_line(48'h20_0000 + 48'(64 * i)), $sformatf("512B aload line %0d", i));
    end
    ami(AMI_ASTORE, 64'h8000, 64'h30_0000, 0, r); check(r != 0, "512B astore id");
    wait_fin(r);
    ami(AMI_ALOAD, 64'hA000, 64'h30_0000, 0, r);  wait_fin(r);
    for (int i = 0; i < 8; i++) begin
      spm_read(16'hA000 + 16'(64 * i), l);
      check(l == far_line(48'h20_0000 + 48'(64 * i)), $sformatf("512B round trip line %0d", i));
    end
    cfgw(CFG_GRANULARITY, 8);
    drain_rob();

    // 5a. squash of a speculative batch fetch, then reuse
    cfgw(CFG_QUEUE_LENGTH, 5);
    drain_rob();
    hold = 1;
    begin
      int f0;
      f0 = n_batch_fetch;
      issue(AMI_ALOAD, 64'(slot(0)), 64'(upd_addr(0)), 0, sa);
      ida = sdata[sa];
      check(n_batch_fetch == f0 + 1 && ida != 0,
            $sformatf("speculative aload fetched a batch (%0d fetches, id %0d)", n_batch_fetch - f0, ida));
    end
    @(negedge clk); squash_valid = 1; squash_tag = seq2tag[sa];
    @(posedge clk);
    while (rob.size() != 0 && rob[$] >= sa) void'(rob.pop_back());
    @(negedge clk); squash_valid = 0;
    begin
      int f0, u0;
      f0 = n_batch_fetch; u0 = n_unc_reuse;
      issue(AMI_ALOAD, 64'(slot(0)), 64'(upd_addr(0)), 0, sb);
      idb = sdata[sb];
      check(n_unc_reuse == u0 + 1 && n_batch_fetch == f0,
            $sformatf("batch taken from uncommitted ID register (%0d reuses, %0d fetches)", n_unc_reuse - u0, n_batch_fetch - f0));
      check(idb == ida, "squashed ID handed out again");
    end
    hold = 0;
    drain_rob();
    wait_fin(idb);
    spm_read(slot(0), l);
    check(l[64 * slot(0)[5:3] +: 64] == upd_val(0), "data after squash/reuse");

    // 5b. stall on a live uncommitted batch, then allocation failure
    cfgw(CFG_QUEUE_LENGTH, 5);
    drain_rob();
    hold = 1;
    for (int i = 0; i < 5; i++) begin
      ami(AMI_ALOAD, 64'(slot(i)), 64'(upd_addr(i)), 0, r);
      check(r != 0, "five allocations succeed");
    end
    begin
      int st0, af0;
      st0 = n_unc_stall; af0 = n_alloc_fail;
      fork
        issue(AMI_ALOAD, 64'(slot(5)), 64'(upd_addr(5)), 0, s6);
        begin
          repeat (30) @(posedge clk);
          check(n_unc_stall > st0, "sixth allocation stalls behind uncommitted batch");
          hold = 0;
        end
      join
      check(sdata[s6] == 0 && n_alloc_fail > af0, "sixth allocation fails with ID 0");
    end
    drain_rob();
    for (int i = 0; i < 5; i++) begin
      do begin
        ami(AMI_GETFIN, 0, 0, 0, r);
        if (r == 0) repeat (8) @(posedge clk);
      end while (r == 0);
    end
    drain_rob();

    // mechanism coverage
    check(n_batch_fetch  > 0, "batch fetch happened");
    check(n_unc_reuse    > 0, "uncommitted-register reuse happened");
    check(n_unc_stall    > 0, "uncommitted-register stall happened");
    check(n_alloc_fail   > 0, "allocation failure happened");
    check(n_getfin_empty > 0, "empty getfin happened");
    check(n_put_free     > 0, "free-ID write-back happened");
    check(n_squash       > 0, "squash happened");
    check(n_init         > 0, "metadata init happened");
    check(n_split        > 0, "large request split happened");
    $display("events: fetch=%0d reuse=%0d stall=%0d allocfail=%0d getfin_empty=%0d put=%0d squash=%0d init=%0d split=%0d peak_inflight=%0d mem_reads=%0d mem_writes=%0d",
             n_batch_fetch, n_unc_reuse, n_unc_stall, n_alloc_fail, n_getfin_empty,
             n_put_free, n_squash, n_init, n_split, peak_inflight, u_mem.reads, u_mem.writes);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
