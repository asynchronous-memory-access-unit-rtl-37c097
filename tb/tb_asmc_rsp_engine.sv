// tb_asmc_rsp_engine: response engine on a real SPM. Request-table entries
// for a set of aload/astore requests (sub-line, whole-line, multi-line) are
// written into the SPM, the SPM data area is filled with a background
// pattern, and the line responses of all requests are fed in a random
// order with random gaps. Checked: each ID enters the finished list exactly
// once and only after its last chunk, every entry ends DONE with zero
// outstanding sub-requests, aload data lands at the SPM offset and length
// of its request (taken from the memory byte offset), bytes outside the
// requests keep the background pattern, and astore responses write no data.
// The finished-list side (fin_ready) stalls at random.
`timescale 1ns/1ps
module tb_asmc_rsp_engine;
  import amu_pkg::*;
  import tb_amu_pkg::*;
  localparam int LNW = SPM_AW - LINE_OFF_W;
  localparam logic [LNW-1:0] AMART = 10'd900;
  localparam int NREQ = 120;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic mem_rsp_valid = 0, mem_rsp_ready, spm_req_valid, spm_gnt, fin_valid, fin_ready, busy;
  mem_rsp_t mem_rsp = '0;
  spm_req_t spm_req;
  line_t spm_rdata;
  id_t fin_id;
  logic [$clog2(33)-1:0] pending;
  logic tb_spm = 0;
  spm_req_t tb_req = '0;
  logic gnt_ok = 1, fin_ok = 1;
  int checks = 0, failures = 0;

  asmc_rsp_engine dut (.clk, .rst_n, .mem_rsp_valid, .mem_rsp_ready, .mem_rsp,
    .amart_line(AMART), .spm_req_valid, .spm_req, .spm_gnt, .spm_rdata,
    .fin_valid, .fin_ready, .fin_id, .busy, .pending);
  l2_spm spm (.clk, .req_valid(tb_spm || (spm_req_valid && spm_gnt)),
              .req(tb_spm ? tb_req : spm_req), .rdata(spm_rdata));
  assign spm_gnt   = spm_req_valid && gnt_ok && !tb_spm;
  assign fin_ready = fin_ok;

  always @(negedge clk) begin
    gnt_ok = ($urandom_range(0, 3) != 0);
    fin_ok = ($urandom_range(0, 2) != 0);
  end

  function automatic logic [7:0] bg(int a);
    return 8'(a * 13 + 5);
  endfunction

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  amart_entry_t ents[int];
  int left[int];
  int fins[int];
  logic [7:0] exp_spm[int];      // expected bytes of the data area

  always @(posedge clk) if (rst_n && fin_valid && fin_ready) begin
    int id;
    id = int'(fin_id);
    checks++;
    if (!ents.exists(id) || left[id] != 0 || fins.exists(id)) begin
      failures++; $display("FAIL: ID %0d finished early or twice", id);
    end
    fins[id] = 1;
  end

  task automatic spm_write(int ln, line_t d, bmask_t m);
    @(negedge clk); tb_spm = 1; tb_req = '{we: 1'b1, line: LNW'(ln), wdata: d, wmask: m};
    @(negedge clk); tb_spm = 0;
  endtask
  task automatic spm_read(int ln, output line_t d);
    @(negedge clk); tb_spm = 1; tb_req = '{we: 1'b0, line: LNW'(ln), wdata: '0, wmask: '0};
    @(negedge clk); tb_spm = 0; d = spm_rdata;
  endtask

  initial begin
    line_t d;
    amart_entry_t e;
    mem_rsp_t rs[$];
    mem_rsp_t r;
    int id, n, k, used_line, slot, mo, so, len;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int ln = 0; ln < 800; ln++) begin
      for (int b = 0; b < LINE_BYTES; b++) d[b*8 +: 8] = bg(ln * 64 + b);
      spm_write(ln, d, '1);
    end
    // requests: each gets its own SPM lines so expectations do not overlap
    used_line = 0;
    for (id = 1; id <= NREQ; id++) begin
      e = '0;
      e.state = AM_PENDING;
      e.is_store = 8'($urandom_range(0, 3) == 0);
      k = $urandom_range(0, 3);
      if (k < 2) begin
        e.size = 16'(1 << $urandom_range(0, 5));
        e.spm_addr = spm_addr_t'(used_line * 64 + $urandom_range(0, 64 / e.size - 1) * e.size);
        e.mem_addr = 64'($urandom_range(0, 32'hFFFFFF) / e.size * e.size);
        n = 1;
      end else begin
        n = (k == 3) ? $urandom_range(2, 8) : 1;
        e.size = 16'(n * 64);
        e.spm_addr = spm_addr_t'(used_line * 64);
        e.mem_addr = 64'($urandom_range(0, 32'h3FFFF) * 64);
      end
      used_line += n;
      e.remaining = 16'(n);
      ents[id] = e; left[id] = n;
      slot = id % AMART_PER_LINE;
      spm_write(int'(AMART) + id / AMART_PER_LINE, line_t'(e) << (slot * 128),
                bmask_t'(16'hFFFF) << (slot * 16));
      len = (n == 1 && e.size < 64) ? int'(e.size) : 64;
      mo  = (len < 64) ? int'(e.mem_addr[5:0]) : 0;
      so  = (len < 64) ? int'(e.spm_addr[5:0]) : 0;
      for (int c = 0; c < n; c++) begin
        r.tag   = {id_t'(id), 6'(c)};
        r.rdata = far_line(MEM_AW'({e.mem_addr[MEM_AW-1:6] + (MEM_AW-6)'(c), 6'd0}));
        rs.push_back(r);
        if (!e.is_store[0]) for (int b = 0; b < len; b++)
          exp_spm[(int'(e.spm_addr[SPM_AW-1:6]) + c) * 64 + so + b] = r.rdata[(mo + b) * 8 +: 8];
      end
    end
    rs.shuffle();
    foreach (rs[i]) begin
      @(negedge clk); mem_rsp_valid = 1; mem_rsp = rs[i];
      do @(posedge clk); while (!mem_rsp_ready);
      #1 mem_rsp_valid = 0;
      left[int'(rs[i].tag[MEM_TAG_W-1:CHUNK_W])]--;
      repeat ($urandom_range(0, 3)) @(negedge clk);
    end
    while (busy) @(posedge clk);
    repeat (4) @(posedge clk);
    check(fins.num() == NREQ, $sformatf("%0d of %0d IDs finished", fins.num(), NREQ));
    for (id = 1; id <= NREQ; id++) begin
      spm_read(int'(AMART) + id / AMART_PER_LINE, d);
      e = amart_entry_t'(d[(id % AMART_PER_LINE) * 128 +: $bits(amart_entry_t)]);
      check(e.state == AM_DONE && e.remaining == 0 && e.size == ents[id].size &&
            e.spm_addr == ents[id].spm_addr, $sformatf("entry of ID %0d", id));
    end
    for (int ln = 0; ln < used_line; ln++) begin
      spm_read(ln, d);
      for (int b = 0; b < LINE_BYTES; b++) begin
        int a;
        a = ln * 64 + b;
        check(d[b*8 +: 8] == (exp_spm.exists(a) ? exp_spm[a] : bg(a)),
              $sformatf("SPM byte %0d", a));
      end
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
