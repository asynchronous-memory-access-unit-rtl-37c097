// ami_decoder: cracks Asynchronous Memory Access Instructions into ALSU micro-ops.
//
// Following the paper, aload and astore each become two micro-ops: an
// ID-management micro-op (AllocFree) that takes a free request ID, then the
// micro-op that builds the asynchronous request (ALoadExec / AStoreExec).
// getfin becomes one Getfin micro-op, cfgrr / cfgrw one config micro-op.
//
// Interface: one instruction in (valid/ready), one micro-op out per cycle
// (valid/ready). A two-micro-op instruction is held for two handshakes; the
// instruction is accepted with its last micro-op. flush drops a half-cracked
// instruction (pipeline squash). Purely combinational apart from one phase
// bit, so a micro-op leaves in the cycle its instruction is presented.
// Own choice: the ALoadExec micro-op takes its ID from the AllocFree just
// before it inside the ALSU rather than through a renamed register.
//
// Tool note: the operand fields of uop are wired straight from the
// instruction's register values, so synthesis counts them as outputs tied to
// inputs; that is the intended pass-through.
module ami_decoder
  import amu_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       flush,
  input  logic       inst_valid,
  output logic       inst_ready,
  input  ami_inst_t  inst,
  output logic       uop_valid,
  input  logic       uop_ready,
  output uop_t       uop
);
  logic second;   // 1: the AllocFree of this aload/astore has been sent
  logic two_uops;

  assign two_uops = (inst.op == AMI_ALOAD) || (inst.op == AMI_ASTORE);

  always_comb begin
    uop      = '0;
    uop.rd   = inst.rd;
    uop.src1 = inst.rs1_val;
    uop.src2 = inst.rs2_val;
    unique case (inst.op)
      AMI_ALOAD:  uop.op = second ? UOP_ALOAD_EXEC  : UOP_ALLOC_FREE;
      AMI_ASTORE: uop.op = second ? UOP_ASTORE_EXEC : UOP_ALLOC_FREE;
      AMI_GETFIN: uop.op = UOP_GETFIN;
      AMI_CFGRR: begin
        uop.op   = UOP_CFG_RD;
        uop.src2 = XLEN'(inst.cfgreg);
      end
      AMI_CFGRW: begin
        uop.op   = UOP_CFG_WR;
        uop.src2 = XLEN'(inst.cfgreg);
      end
      default:    uop.op = UOP_GETFIN;
    endcase
  end

  assign uop_valid  = inst_valid;
  assign inst_ready = uop_ready && (!two_uops || second);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                                  second <= 1'b0;
    else if (flush)                              second <= 1'b0;
    else if (inst_valid && uop_ready && two_uops) second <= !second;
  end
endmodule
