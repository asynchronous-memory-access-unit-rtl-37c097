// tb_asmc_req_engine: request engine on a real SPM. The SPM is preloaded
// with a known byte pattern; random aload/astore requests (sub-line powers
// of two, whole lines and multi-line blocks up to 4096 B) are fed in while
// the memory side and the SPM grant stall at random. Every line request is
// compared with the expected address, tag {ID, chunk}, direction, byte
// mask and (astore) data taken from the SPM and moved to the memory byte
// offset. Afterwards every request-table entry is read back from the SPM
// and compared field by field; this also shows that the masked entry
// writes leave the three neighbours in a line intact. Also checked: the
// 32-entry pending queue fills and applies back-pressure, and ev_split
// counts the multi-line requests.
`timescale 1ns/1ps
module tb_asmc_req_engine;
  import amu_pkg::*;
  import tb_amu_pkg::*;
  localparam int LNW = SPM_AW - LINE_OFF_W;
  localparam logic [LNW-1:0] AMART = 10'd800;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, in_ready, spm_req_valid, spm_gnt, mem_req_valid, mem_req_ready;
  asmc_job_t in_job = '0;
  spm_req_t spm_req;
  line_t spm_rdata;
  mem_req_t mem_req;
  logic busy, ev_split;
  logic [$clog2(33)-1:0] pending;
  logic amart_line_dummy;
  // tb access to the SPM (preload and read-back)
  logic tb_spm = 0;
  spm_req_t tb_req = '0;
  logic gnt_ok = 1, mem_ok = 1;
  int checks = 0, failures = 0, n_split = 0;

  asmc_req_engine dut (.clk, .rst_n, .in_valid, .in_ready, .in_job, .amart_line(AMART),
    .spm_req_valid, .spm_req, .spm_gnt, .spm_rdata, .mem_req_valid, .mem_req_ready,
    .mem_req, .busy, .pending, .ev_split);
  l2_spm spm (.clk, .req_valid(tb_spm || (spm_req_valid && spm_gnt)),
              .req(tb_spm ? tb_req : spm_req), .rdata(spm_rdata));
  assign spm_gnt       = spm_req_valid && gnt_ok && !tb_spm;
  assign mem_req_ready = mem_ok;

  always @(negedge clk) begin
    gnt_ok = ($urandom_range(0, 3) != 0);
    mem_ok = ($urandom_range(0, 2) != 0);
  end
  always @(posedge clk) n_split += int'(ev_split);

  function automatic logic [7:0] pat(int a);
    return 8'(a * 7 + 3) ^ 8'(a >> 8);
  endfunction

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // expected line requests
  mem_req_t exp_q[$];
  asmc_job_t jobs[$];

  task automatic expect_job(asmc_job_t j);
    int n   = (j.size >= LINE_BYTES) ? j.size / LINE_BYTES : 1;
    int len = (j.size >= LINE_BYTES) ? LINE_BYTES : j.size;
    int mo  = (j.size >= LINE_BYTES) ? 0 : int'(j.mem_addr[5:0]);
    int so  = (j.size >= LINE_BYTES) ? 0 : int'(j.spm_addr[5:0]);
    for (int c = 0; c < n; c++) begin
      mem_req_t r = '0;
      r.write = j.is_store;
      r.addr  = {j.mem_addr[MEM_AW-1:6] + (MEM_AW-6)'(c), 6'd0};
      r.tag   = {j.id, 6'(c)};
      if (j.is_store) for (int b = mo; b < mo + len; b++) begin
        r.wmask[b] = 1'b1;
        r.wdata[b*8 +: 8] = pat((int'(j.spm_addr[SPM_AW-1:6]) + c) * 64 + b - mo + so);
      end
      exp_q.push_back(r);
    end
  endtask

  always @(posedge clk) if (rst_n && mem_req_valid && mem_req_ready) begin
    mem_req_t e;
    checks++;
    if (exp_q.size() == 0) begin failures++; $display("FAIL: unexpected request"); end
    else begin
      e = exp_q.pop_front();
      if (mem_req.write !== e.write || mem_req.addr !== e.addr || mem_req.tag !== e.tag ||
          mem_req.wmask !== e.wmask || (mem_req.wdata & expand(e.wmask)) !== e.wdata) begin
        failures++;
        $display("FAIL: request tag %h addr %h w%0d, expected tag %h addr %h w%0d",
                 mem_req.tag, mem_req.addr, mem_req.write, e.tag, e.addr, e.write);
      end
    end
  end

  function automatic line_t expand(bmask_t m);
    line_t r;
    for (int b = 0; b < LINE_BYTES; b++) r[b*8 +: 8] = {8{m[b]}};
    return r;
  endfunction

  task automatic spm_write(int ln, line_t d);
    @(negedge clk); tb_spm = 1; tb_req = '{we: 1'b1, line: LNW'(ln), wdata: d, wmask: '1};
    @(negedge clk); tb_spm = 0;
  endtask
  task automatic spm_read(int ln, output line_t d);
    @(negedge clk); tb_spm = 1; tb_req = '{we: 1'b0, line: LNW'(ln), wdata: '0, wmask: '0};
    @(negedge clk); tb_spm = 0; d = spm_rdata;
  endtask

  task automatic send(asmc_job_t j);
    @(negedge clk); in_valid = 1; in_job = j;
    do @(posedge clk); while (!in_ready);
    #1 in_valid = 0;
  endtask

  function automatic asmc_job_t rand_job(int id);
    asmc_job_t j = '0;
    int k = $urandom_range(0, 9);
    j.is_store = $urandom_range(0, 1);
    j.id = id_t'(id);
    if (k < 6) begin                       // sub-line power of two
      int sz = 1 << $urandom_range(0, 5);
      j.size = 16'(sz);
      j.spm_addr = spm_addr_t'($urandom_range(0, 700 * 64 / sz - 1) * sz);
      j.mem_addr = mem_addr_t'($urandom_range(0, 32'h00FF_FFFF) / sz * sz);
    end else begin                         // 1..64 whole lines
      int nl = (k == 9) ? 64 : $urandom_range(1, 8);
      j.size = 16'(nl * 64);
      j.spm_addr = spm_addr_t'($urandom_range(0, 700 - nl) * 64);
      j.mem_addr = mem_addr_t'($urandom_range(0, 32'h0003_FFFF) * 64);
    end
    return j;
  endfunction

  initial begin
    line_t d;
    asmc_job_t j;
    amart_entry_t e;
    int n, nmulti;
    nmulti = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int ln = 0; ln < 1024; ln++) begin
      for (int b = 0; b < LINE_BYTES; b++) d[b*8 +: 8] = pat(ln * 64 + b);
      spm_write(ln, d);
    end
    // back-pressure: memory side stopped, queue fills
    force mem_req_ready = 1'b0;
    for (int i = 1; i <= 40; i++) begin
      j = rand_job(i);
      @(negedge clk);
      if (!in_ready) break;
      in_valid = 1; in_job = j;
      @(posedge clk); #1 in_valid = 0;
      jobs.push_back(j); expect_job(j);
      if (j.size > 64) nmulti++;
    end
    @(negedge clk);
    check(pending == 32 && !in_ready, $sformatf("queue full at %0d, ready %0d", pending, in_ready));
    check(jobs.size() == 33, $sformatf("%0d accepted (32 queued + 1 in service)", jobs.size()));
    release mem_req_ready;
    for (int i = 41; i <= 300; i++) begin
      j = rand_job(i);
      jobs.push_back(j); expect_job(j);
      if (j.size > 64) nmulti++;
      send(j);
    end
    while (busy || exp_q.size() > 0) @(posedge clk);
    check(exp_q.size() == 0, "all line requests seen");
    check(n_split == nmulti, $sformatf("split events %0d, expected %0d", n_split, nmulti));
    // request table
    foreach (jobs[k]) begin
      j = jobs[k];
      n = (j.size >= LINE_BYTES) ? j.size / LINE_BYTES : 1;
      spm_read(int'(AMART) + int'(j.id) / AMART_PER_LINE, d);
      e = amart_entry_t'(d[(int'(j.id) % AMART_PER_LINE) * 128 +: $bits(amart_entry_t)]);
      check(e.state == AM_PENDING && e.is_store == 8'(j.is_store) && e.size == j.size &&
            e.remaining == 16'(n) && e.spm_addr == j.spm_addr && e.mem_addr == 64'(j.mem_addr),
            $sformatf("table entry of ID %0d", j.id));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
