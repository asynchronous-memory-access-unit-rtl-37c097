// tb_asmc_cfg_regs: writes and reads the three configuration registers,
// checks clamping and line alignment, and checks the metadata layout
// (request table, free list, finished list) against a computed reference.
`timescale 1ns/1ps
module tb_asmc_cfg_regs;
  import amu_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic wr_valid = 0;
  cfg_sel_e wr_sel = CFG_GRANULARITY, rd_sel = CFG_GRANULARITY;
  logic [XLEN-1:0] wr_data = '0, rd_data;
  logic [15:0] granularity;
  logic [9:0] amart_line, free_line, fin_line, list_lines;
  id_t queue_length;
  int checks = 0, failures = 0;

  asmc_cfg_regs dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic wr(cfg_sel_e s, logic [63:0] v);
    @(negedge clk); wr_valid = 1; wr_sel = s; wr_data = v;
    @(negedge clk); wr_valid = 0;
  endtask

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    #1 check(granularity == 8 && queue_length == 0, "reset values");
    for (int n = 0; n < 300; n++) begin
      int g, qb, ql, eg, eql, eqb, al, ll;
      g  = $urandom_range(0, 5000);
      ql = $urandom_range(0, 700);
      eg = (g == 0) ? 1 : (g > 4096 ? 4096 : g);
      eql = ql > 512 ? 512 : ql;
      // keep the whole metadata area inside the 64 KB SPM
      qb = $urandom_range(0, 65536 - 64 * ((eql + 4) / 4 + 2 * ((eql + 30) / 31 + 1)));
      eqb = qb & ~63;
      wr(CFG_GRANULARITY, g); wr(CFG_QUEUE_BASE, qb); wr(CFG_QUEUE_LENGTH, ql);
      rd_sel = CFG_GRANULARITY;  #1 check(rd_data == 64'(eg), "granularity read");
      rd_sel = CFG_QUEUE_BASE;   #1 check(rd_data == 64'(eqb), "queue_base read");
      rd_sel = CFG_QUEUE_LENGTH; #1 check(rd_data == 64'(eql), "queue_length read");
      check(granularity == 16'(eg) && queue_length == id_t'(eql), "register outputs");
      al = (eql + 1 + 3) / 4;          // request-table lines, ID 0 unused
      ll = (eql + 30) / 31 + 1;        // lines per ID list
      check(amart_line == 10'(eqb / 64), "request table base");
      check(free_line == 10'(eqb / 64 + al), "free list base");
      check(fin_line == 10'(eqb / 64 + al + ll), "finished list base");
      check(list_lines == 10'(ll), "list size");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
