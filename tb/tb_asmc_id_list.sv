// tb_asmc_id_list: one ID list on a real SPM, checked against a reference
// model of the same structure (FIFO of full batches in the SPM plus a
// one-vector buffer). Covers init with IDs 1..N, batch gets from the SPM and
// from the buffer, empty gets (POS = 0), single pushes with spills, the
// wrap of the circular FIFO, id_count, a grant that is sometimes withheld
// (SPM busy with other clients), and that no SPM write leaves the list area.
`timescale 1ns/1ps
module tb_asmc_id_list;
  import amu_pkg::*;
  import tb_amu_pkg::*;
  localparam int LNW = SPM_AW - LINE_OFF_W;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [LNW-1:0] base_line = 10'd100, cap_lines = '0;
  logic init_valid = 0, push_valid = 0, get_valid = 0, spm_gnt;
  id_t init_count = 0, push_id = 0;
  logic push_ready, get_done, busy, spm_req_valid;
  lvr_t get_vec;
  logic [ID_W:0] id_count;
  spm_req_t spm_req;
  line_t spm_rdata;
  logic gnt_ok = 1;
  int checks = 0, failures = 0;

  asmc_id_list dut (.*);
  l2_spm spm (.clk, .req_valid(spm_req_valid && spm_gnt), .req(spm_req), .rdata(spm_rdata));
  assign spm_gnt = spm_req_valid && gnt_ok;

  always @(negedge clk) gnt_ok = ($urandom_range(0, 3) != 0);

  // reference model
  lvr_t m_lines[$];
  lvr_t m_buf;
  int   m_cap;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) if (rst_n && spm_req_valid && spm_gnt && spm_req.we) begin
    checks++;
    if (spm_req.line < base_line || spm_req.line >= base_line + cap_lines) begin
      failures++; $display("FAIL: write to line %0d outside the list", spm_req.line);
    end
  end

  function automatic lvr_t m_append(lvr_t v, id_t id);
    lvr_t r = v;
    r.ids[v.pos] = id;
    r.pos = v.pos + 1'b1;
    return r;
  endfunction

  task automatic wait_idle();
    int n = 0;
    do begin @(posedge clk); #1 n++; end while ((busy || push_valid) && n < 1000);
  endtask

  task automatic do_init(int n);
    m_lines.delete(); m_buf = '0; m_cap = (n + IDS_PER_VEC - 1) / IDS_PER_VEC + 1;
    for (int i = 1; i <= n; i++) begin
      m_buf = m_append(m_buf, id_t'(i));
      if (m_buf.pos == IDS_PER_VEC) begin m_lines.push_back(m_buf); m_buf = '0; end
    end
    @(negedge clk); cap_lines = LNW'(m_cap); init_count = id_t'(n); init_valid = 1;
    @(negedge clk); init_valid = 0;
    wait_idle();
    check(id_count == (ID_W+1)'(n), $sformatf("id_count %0d after init %0d", id_count, n));
  endtask

  task automatic do_push(id_t id);
    @(negedge clk); push_valid = 1; push_id = id;
    do @(posedge clk); while (!push_ready);
    #1 push_valid = 0;
    m_buf = m_append(m_buf, id);
    if (m_buf.pos == IDS_PER_VEC) begin m_lines.push_back(m_buf); m_buf = '0; end
    wait_idle();
  endtask

  task automatic do_get(output lvr_t v);
    lvr_t exp;
    int n = 0;
    if (m_lines.size() > 0) exp = m_lines.pop_front();
    else begin exp = m_buf; m_buf = '0; end
    @(negedge clk); get_valid = 1;
    do begin @(posedge clk); #1 n++; end while (!get_done && n < 1000);
    get_valid = 0;
    v = get_vec;
    check(v.pos == exp.pos, $sformatf("get pos %0d, expected %0d", v.pos, exp.pos));
    for (int i = 0; i < int'(exp.pos); i++)
      check(v.ids[i] == exp.ids[i], $sformatf("get id[%0d] %0d, expected %0d", i, v.ids[i], exp.ids[i]));
    wait_idle();
  endtask

  function automatic int m_count();
    return m_lines.size() * IDS_PER_VEC + int'(m_buf.pos);
  endfunction

  initial begin
    lvr_t v;
    int seen[int];
    id_t held[$];
    m_buf = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    // full-size free list: 512 IDs, every one exactly once
    do_init(512);
    while (m_count() > 0) begin
      do_get(v);
      for (int i = 0; i < int'(v.pos); i++) begin
        seen[int'(v.ids[i])]++; held.push_back(v.ids[i]);
      end
    end
    check(seen.num() == 512, $sformatf("%0d distinct IDs", seen.num()));
    foreach (seen[k]) check(seen[k] == 1 && k >= 1 && k <= 512, $sformatf("ID %0d seen %0d times", k, seen[k]));
    do_get(v); check(v.pos == 0, "empty list gives POS 0");
    check(id_count == 0, "id_count 0 when empty");
    // all IDs back in random order: the FIFO of lines wraps around
    held.shuffle();
    while (held.size() > 0) do_push(held.pop_front());
    check(id_count == 512, "all 512 IDs back");
    while (m_count() > 0) begin
      do_get(v);
      for (int i = 0; i < int'(v.pos); i++) held.push_back(v.ids[i]);
    end
    check(held.size() == 512, "512 IDs again");
    // random pushes and gets
    for (int round = 0; round < 400; round++) begin
      if (held.size() > 0 && $urandom_range(0, 2) != 0) begin
        int k;
        id_t id;
        k = $urandom_range(0, held.size() - 1);
        id = held[k];
        held.delete(k);
        do_push(id);
      end else begin
        do_get(v);
        for (int i = 0; i < int'(v.pos); i++) held.push_back(v.ids[i]);
      end
      check(id_count == (ID_W+1)'(m_count()), $sformatf("id_count %0d vs %0d", id_count, m_count()));
    end
    // small list, not a multiple of a batch
    do_init(5);
    do_get(v); check(v.pos == 5 && v.ids[4] == 5, "five IDs from the buffer");
    do_init(0);
    do_get(v); check(v.pos == 0, "empty list after init 0");
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
