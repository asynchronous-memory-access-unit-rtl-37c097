// tb_alsu_id_exec: directed test of one ALSU ID executor. Checks: one-cycle
// answer when the list vector register holds IDs (LIFO from POS-1), a batch
// fetch when it is empty, the stall while the uncommitted ID register
// guards a live batch, restoring the register on a squash, reuse of a
// squashed micro-op's batch without a new fetch (also when the squash came
// while the fetch was in flight), clear, and ID 0 for an empty batch.
`timescale 1ns/1ps
module tb_alsu_id_exec;
  import amu_pkg::*;
  import tb_amu_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic acc_valid = 0, pop_valid = 0, fetch_ready = 0, rsp_valid = 0;
  logic commit_valid = 0, squash_valid = 0, clear = 0;
  logic [3:0] acc_tag = 0, pop_tag = 0, commit_tag = 0, squash_tag = 0;
  logic [4:0] squash_len = 0;
  lvr_t rsp_vec = '0;
  logic pop_done, busy, fetch_valid, ev_fetch, ev_reuse, ev_stall;
  id_t pop_id;
  logic [POS_W-1:0] ids_held;
  int checks = 0, failures = 0, n_fetch = 0, n_reuse = 0, n_stall = 0;

  alsu_id_exec dut (.*);

  always @(posedge clk) begin
    n_fetch += int'(ev_fetch); n_reuse += int'(ev_reuse); n_stall += int'(ev_stall);
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // accept + pop; if batch is given, answer the fetch with it. Returns the ID
  // and the number of cycles from pop_valid to pop_done.
  task automatic pop(logic [3:0] t, output id_t id, output int cyc, input bit give = 0,
                     input lvr_t batch = '0);
    @(negedge clk); acc_valid = 1; acc_tag = t;
    @(negedge clk); acc_valid = 0; pop_valid = 1; pop_tag = t; cyc = 0;
    do begin
      @(posedge clk); #1 cyc++;
      if (fetch_valid && give) begin
        @(negedge clk); fetch_ready = 1; @(negedge clk); fetch_ready = 0;
        repeat (3) @(negedge clk);
        rsp_valid = 1; rsp_vec = batch; @(negedge clk); rsp_valid = 0; give = 0;
      end
      if (cyc > 200) break;
    end while (!pop_done);
    id = pop_id;
    @(negedge clk); pop_valid = 0;
  endtask

  task automatic commit(logic [3:0] t);
    @(negedge clk); commit_valid = 1; commit_tag = t; @(negedge clk); commit_valid = 0;
  endtask
  task automatic squash(logic [3:0] t, int len);
    @(negedge clk); squash_valid = 1; squash_tag = t; squash_len = 5'(len);
    @(negedge clk); squash_valid = 0;
  endtask
  task automatic do_clear();
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
  endtask

  initial begin
    id_t id; int cyc, f0, r0;
    repeat (2) @(posedge clk); rst_n = 1;
    // a) fetch a batch of three
    pop(0, id, cyc, 1, make_vec(3, 10));
    check(id == 12 && n_fetch == 1, $sformatf("first batch: id %0d", id));
    // b) register hits: one cycle each
    pop(1, id, cyc); check(id == 11 && cyc == 1, $sformatf("hit id %0d in %0d cycles", id, cyc));
    pop(2, id, cyc); check(id == 10 && cyc == 1, "hit id 10");
    check(ids_held == 0, "register empty");
    // c) empty, owner 0 still live: stall until it commits
    fork
      pop(3, id, cyc, 1, make_vec(31, 20));
      begin
        repeat (12) @(posedge clk);
        check(n_stall > 0 && n_fetch == 1, "stall instead of a second fetch");
        commit(0);
      end
    join
    check(id == 50 && n_fetch == 2, $sformatf("fetch after owner commit: id %0d", id));
    commit(1); commit(2); commit(3);
    // e) squash restores the register
    pop(4, id, cyc); check(id == 49, "pop 49");
    pop(5, id, cyc); check(id == 48, "pop 48");
    squash(4, 2);
    check(ids_held == 30, $sformatf("restored to 30 IDs, have %0d", ids_held));
    pop(4, id, cyc); check(id == 49, "49 again after squash");
    commit(4);
    // f) reuse of a squashed batch
    do_clear();
    pop(5, id, cyc, 1, make_vec(2, 60)); check(id == 61, "batch 60..61");
    squash(5, 1);
    f0 = n_fetch; r0 = n_reuse;
    pop(5, id, cyc);
    check(id == 61 && n_fetch == f0 && n_reuse == r0 + 1, "reuse without fetch");
    commit(5);
    // g) squash while the fetch is in flight
    do_clear();
    @(negedge clk); acc_valid = 1; acc_tag = 6;
    @(negedge clk); acc_valid = 0; pop_valid = 1; pop_tag = 6;
    while (!fetch_valid) @(negedge clk);
    fetch_ready = 1; @(negedge clk); fetch_ready = 0; pop_valid = 0;
    squash(6, 1);
    rsp_valid = 1; rsp_vec = make_vec(3, 70);
    @(posedge clk); #1 rsp_valid = 0;
    @(posedge clk); #1 check(!pop_done, "killed fetch gives no result");
    f0 = n_fetch;
    pop(6, id, cyc);
    check(id == 72 && n_fetch == f0, "killed fetch's batch reused");
    commit(6);
    // h) empty batch
    do_clear();
    pop(7, id, cyc, 1, '0); check(id == 0, "empty batch gives ID 0");
    f0 = n_fetch;
    pop(8, id, cyc, 1, make_vec(1, 90)); check(id == 90 && n_fetch == f0 + 1, "empty batch not kept");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
