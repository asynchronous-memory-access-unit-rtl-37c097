// tb_asmc: the whole ASMC (configuration registers, SPM, both ID lists,
// request and response engines, arbiter) against the far-memory model,
// driven through its ALSU command channel and its core SPM port.
// Sequence: reset values and config read-back; a queue_length write
// rebuilds the free list (all IDs 1..N, each once); aload of whole lines
// with many requests in flight, then getfin until every ID has finished
// exactly once and the SPM holds the far-memory lines; astore of a
// pattern written by the core followed by aload of the same far lines into
// another SPM area (the round trip must match); 512 B requests that are
// split into line requests; 4 B sub-line requests; PUT_FREE returning IDs
// to the free list; and a second queue_length write that empties the
// finished list. The core port shares the SPM while requests run.
`timescale 1ns/1ps
module tb_asmc;
  import amu_pkg::*;
  import tb_amu_pkg::*;
  localparam int LNW = SPM_AW - LINE_OFF_W;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic req_valid = 0, req_ready, rsp_valid;
  asmc_req_t req = '0;
  asmc_rsp_t rsp;
  logic cpu_spm_valid = 0, cpu_spm_ready, cpu_spm_rvalid;
  spm_req_t cpu_spm_req = '0;
  line_t cpu_spm_rdata;
  logic mem_req_valid, mem_req_ready, mem_rsp_valid, mem_rsp_ready;
  mem_req_t mem_req;
  mem_rsp_t mem_rsp;
  logic [ID_W:0] inflight;
  logic ev_init, ev_split;
  int checks = 0, failures = 0, n_init = 0, n_split = 0, peak_inflight = 0;

  asmc dut (.*);
  far_mem_model #(.MIN_LAT(20), .MAX_LAT(80)) mem (
    .clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req(mem_req),
    .rsp_valid(mem_rsp_valid), .rsp_ready(mem_rsp_ready), .rsp(mem_rsp));

  always @(posedge clk) begin
    n_init += int'(ev_init); n_split += int'(ev_split);
    if (int'(inflight) > peak_inflight) peak_inflight = int'(inflight);
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic send(asmc_cmd_e c, logic [63:0] addr, logic [63:0] data, lvr_t vec);
    @(negedge clk); req_valid = 1; req.cmd = c; req.addr = MEM_AW'(addr); req.data = data; req.vec = vec;
    do @(posedge clk); while (!req_ready);
    #1 req_valid = 0;
  endtask
  task automatic ask(asmc_cmd_e c, logic [63:0] addr, output lvr_t v);
    int n = 0;
    send(c, addr, 0, '0);
    while (!rsp_valid && n < 2000) begin @(posedge clk); #1 n++; end
    check(rsp_valid && rsp.cmd == c, $sformatf("answer to command %0d", c));
    v = rsp.vec;
  endtask
  task automatic cfg_wr(cfg_sel_e s, logic [63:0] v);
    send(CMD_CFG_WR, 64'(s), v, '0);
    repeat (2) @(negedge clk);
    while (dut.cs != 0) @(negedge clk);
  endtask
  task automatic cfg_rd(cfg_sel_e s, output logic [63:0] v);
    lvr_t r;
    ask(CMD_CFG_RD, 64'(s), r);
    v = 64'(r);
  endtask
  task automatic spm_wr(int ln, line_t d);
    @(negedge clk); cpu_spm_valid = 1; cpu_spm_req = '{we: 1'b1, line: LNW'(ln), wdata: d, wmask: '1};
    do @(posedge clk); while (!cpu_spm_ready);
    #1 cpu_spm_valid = 0;
  endtask
  task automatic spm_rd(int ln, output line_t d);
    @(negedge clk); cpu_spm_valid = 1; cpu_spm_req = '{we: 1'b0, line: LNW'(ln), wdata: '0, wmask: '0};
    do @(posedge clk); while (!cpu_spm_ready);
    #1 cpu_spm_valid = 0;
    @(posedge clk); #1 d = cpu_spm_rdata;
  endtask

  // all free IDs, by repeated GET_FREE until an empty batch
  task automatic get_all_free(ref id_t ids[$]);
    lvr_t v;
    ids.delete();
    do begin
      ask(CMD_GET_FREE, 0, v);
      for (int i = 0; i < int'(v.pos); i++) ids.push_back(v.ids[i]);
    end while (v.pos != 0);
  endtask
  // getfin until n IDs have come back; each must be one of ids, once
  task automatic wait_fin(ref id_t ids[$], input int n);
    lvr_t v;
    int seen[int];
    int tries = 0;
    while (seen.num() < n && tries < 5000) begin
      ask(CMD_GET_FIN, 0, v);
      for (int i = 0; i < int'(v.pos); i++) begin
        checks++;
        if (seen.exists(int'(v.ids[i]))) begin failures++; $display("FAIL: ID %0d finished twice", v.ids[i]); end
        seen[int'(v.ids[i])] = 1;
      end
      tries++;
      repeat (5) @(negedge clk);
    end
    check(seen.num() == n, $sformatf("%0d of %0d requests finished", seen.num(), n));
    foreach (ids[k]) check(seen.exists(int'(ids[k])), $sformatf("ID %0d finished", ids[k]));
  endtask
  task automatic put_free(ref id_t ids[$]);
    lvr_t v;
    int i = 0;
    while (i < ids.size()) begin
      v = '0;
      while (i < ids.size() && v.pos < IDS_PER_VEC) begin v.ids[v.pos] = ids[i]; v.pos++; i++; end
      send(CMD_PUT_FREE, 0, 0, v);
    end
    repeat (4) @(negedge clk);
  endtask

  function automatic logic [63:0] acc(id_t id, int spm_addr);
    return {32'(id), 16'(spm_addr)} & 64'h0000_FFFF_FFFF;
  endfunction

  initial begin
    logic [63:0] v64;
    lvr_t v;
    line_t d, e;
    id_t ids[$];
    int seen[int];
    int n, i0;
    repeat (2) @(posedge clk); rst_n = 1;
    cfg_rd(CFG_GRANULARITY, v64);   check(v64 == 8, "granularity resets to 8");
    cfg_rd(CFG_QUEUE_LENGTH, v64);  check(v64 == 0, "queue_length resets to 0");
    ask(CMD_GET_FREE, 0, v);        check(v.pos == 0, "no IDs before configuration");
    // configuration: metadata from 48 KiB, 100 requests, line granularity
    cfg_wr(CFG_QUEUE_BASE, 64'hC000);
    cfg_wr(CFG_GRANULARITY, 64);
    cfg_wr(CFG_QUEUE_LENGTH, 100);
    cfg_rd(CFG_QUEUE_BASE, v64);    check(v64 == 64'hC000, "queue_base read-back");
    cfg_rd(CFG_GRANULARITY, v64);   check(v64 == 64, "granularity read-back");
    cfg_rd(CFG_QUEUE_LENGTH, v64);  check(v64 == 100, "queue_length read-back");
    check(n_init == 1, "list rebuild on queue_length write");
    get_all_free(ids);
    foreach (ids[k]) seen[int'(ids[k])]++;
    check(ids.size() == 100 && seen.num() == 100, $sformatf("%0d free IDs", ids.size()));
    foreach (seen[k]) check(k >= 1 && k <= 100 && seen[k] == 1, $sformatf("free ID %0d", k));
    // aload, one line each, the core reading the SPM in between
    foreach (ids[k]) begin
      send(CMD_ALOAD, 64'h10_0000 + 64 * k * 3, acc(ids[k], 64 * k), '0);
      if (k % 7 == 0) spm_rd(700, d);
    end
    wait_fin(ids, 100);
    check(peak_inflight > 20, $sformatf("peak in flight %0d", peak_inflight));
    check(inflight == 0, "nothing in flight after getfin");
    foreach (ids[k]) begin
      spm_rd(k, d);
      check(d == far_line(MEM_AW'(64'h10_0000 + 64 * k * 3)), $sformatf("aload data, line %0d", k));
    end
    // astore then aload back
    put_free(ids);
    get_all_free(ids);
    check(ids.size() == 100, "IDs back in the free list after PUT_FREE");
    for (int k = 0; k < 40; k++) begin
      for (int w = 0; w < 16; w++) d[w*32 +: 32] = $urandom();
      spm_wr(200 + k, d);
      send(CMD_ASTORE, 64'h20_0000 + 64 * k, acc(ids[k], 64 * (200 + k)), '0);
    end
    i0 = 0;
    begin
      id_t a[$];
      for (int k = 0; k < 40; k++) a.push_back(ids[k]);
      wait_fin(a, 40);
      a.delete();
      for (int k = 40; k < 80; k++) begin
        a.push_back(ids[k]);
        send(CMD_ALOAD, 64'h20_0000 + 64 * (k - 40), acc(ids[k], 64 * (300 + k - 40)), '0);
      end
      wait_fin(a, 40);
    end
    for (int k = 0; k < 40; k++) begin
      spm_rd(200 + k, d); spm_rd(300 + k, e);
      check(d == e, $sformatf("astore/aload round trip, line %0d", k));
    end
    // 512 B requests: split into 8 line requests each
    cfg_wr(CFG_GRANULARITY, 512);
    n = n_split;
    begin
      id_t a[$];
      for (int k = 0; k < 8; k++) begin
        a.push_back(ids[80 + k]);
        send(CMD_ALOAD, 64'h40_0000 + 512 * k, acc(ids[80 + k], 512 * k), '0);
      end
      wait_fin(a, 8);
    end
    check(n_split == n + 8, $sformatf("%0d split events", n_split - n));
    for (int l = 0; l < 64; l++) begin
      spm_rd(l, d);
      check(d == far_line(MEM_AW'(64'h40_0000 + 64 * l)), $sformatf("512 B aload, line %0d", l));
    end
    // 4 B requests into one SPM line
    cfg_wr(CFG_GRANULARITY, 4);
    spm_wr(500, '0);
    begin
      id_t a[$];
      for (int k = 0; k < 8; k++) begin
        a.push_back(ids[88 + k]);
        send(CMD_ALOAD, 64'h50_0000 + 4 * (7 * k + 3), acc(ids[88 + k], 500 * 64 + 4 * k), '0);
      end
      wait_fin(a, 8);
    end
    spm_rd(500, d);
    for (int k = 0; k < 8; k++)
      for (int b = 0; b < 4; b++)
        check(d[(4 * k + b) * 8 +: 8] == far_byte(MEM_AW'(64'h50_0000 + 4 * (7 * k + 3) + b)),
              $sformatf("4 B aload %0d byte %0d", k, b));
    check(d[511:256] == '0, "bytes beyond the 4 B requests untouched");
    // finished list left non-empty, then rebuilt by a new queue_length
    cfg_wr(CFG_GRANULARITY, 64);
    send(CMD_ALOAD, 64'h60_0000, acc(ids[96], 0), '0);
    while (inflight != 0) @(negedge clk);
    cfg_wr(CFG_QUEUE_LENGTH, 40);
    check(n_init == 2, "second rebuild");
    ask(CMD_GET_FIN, 0, v);  check(v.pos == 0, "finished list empty after rebuild");
    get_all_free(ids);
    check(ids.size() == 40, $sformatf("%0d free IDs after rebuild", ids.size()));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
