// tb_ami_decoder: random AMI instructions through the decoder; checks that
// aload/astore give AllocFree then ALoadExec/AStoreExec, that getfin/cfgrr/
// cfgrw give one micro-op with the right operands, that an instruction is
// accepted only with its last micro-op, and that flush restarts cracking.
`timescale 1ns/1ps
module tb_ami_decoder;
  import amu_pkg::*;
  logic clk = 0, rst_n = 0, flush = 0;
  always #5 clk = ~clk;
  logic inst_valid = 0, inst_ready, uop_valid, uop_ready = 0;
  ami_inst_t inst = '0;
  uop_t uop;
  int checks = 0, failures = 0;

  ami_decoder dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic int n_uops(ami_op_e op);
    return (op == AMI_ALOAD || op == AMI_ASTORE) ? 2 : 1;
  endfunction

  function automatic uop_e exp_op(ami_op_e op, int i);
    case (op)
      AMI_ALOAD:  return i == 0 ? UOP_ALLOC_FREE : UOP_ALOAD_EXEC;
      AMI_ASTORE: return i == 0 ? UOP_ALLOC_FREE : UOP_ASTORE_EXEC;
      AMI_GETFIN: return UOP_GETFIN;
      AMI_CFGRR:  return UOP_CFG_RD;
      default:    return UOP_CFG_WR;
    endcase
  endfunction

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 400; n++) begin
      ami_op_e op;
      int i;
      op = ami_op_e'($urandom_range(0, 4));
      i = 0;
      @(negedge clk);
      inst_valid = 1;
      inst.op = op; inst.rd = 5'($urandom); inst.cfgreg = 2'($urandom_range(0, 2));
      inst.rs1_val = {$urandom, $urandom}; inst.rs2_val = {$urandom, $urandom};
      while (i < n_uops(op)) begin
        uop_ready = ($urandom_range(0, 3) != 0);
        #1;
        check(uop_valid, "uop_valid follows inst_valid");
        check(uop.op == exp_op(op, i), $sformatf("op %0d uop %0d is %0d", op, i, uop.op));
        check(uop.rd == inst.rd && uop.src1 == inst.rs1_val, "rd / src1 passed on");
        if (op == AMI_CFGRR || op == AMI_CFGRW) check(uop.src2 == 64'(inst.cfgreg), "config register number");
        else check(uop.src2 == inst.rs2_val, "memory address passed on");
        check(inst_ready == (uop_ready && i == n_uops(op) - 1), "accepted with last micro-op");
        @(posedge clk);
        if (uop_ready) i++;
        @(negedge clk);
      end
      inst_valid = 0; uop_ready = 0;
    end
    // flush after the first half of an aload
    @(negedge clk);
    inst_valid = 1; inst.op = AMI_ALOAD; uop_ready = 1;
    @(posedge clk); @(negedge clk);
    #1 check(uop.op == UOP_ALOAD_EXEC, "second half pending");
    flush = 1; @(posedge clk); @(negedge clk); flush = 0;
    #1 check(uop.op == UOP_ALLOC_FREE, "flush restarts at AllocFree");
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
