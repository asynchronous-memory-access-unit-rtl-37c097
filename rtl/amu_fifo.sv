// amu_fifo: synchronous first-in first-out queue used for the pending queues
// of the ASMC and the committed-request buffer of the ALSU.
//
// DEPTH entries of type T, valid/ready on both sides, first-word-fall-through
// (out_data shows the head while out_valid). A push and a pop may happen in
// the same cycle. Storage is a plain array; pointers and count reset to empty.
module amu_fifo #(
  parameter type         T     = logic [7:0],
  parameter int unsigned DEPTH = 32
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  output logic in_ready,
  input  T     in_data,
  output logic out_valid,
  input  logic out_ready,
  output T     out_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  T mem [DEPTH];
  logic [PW-1:0] rd_ptr, wr_ptr;

  wire do_push = in_valid && in_ready;
  wire do_pop  = out_valid && out_ready;

  assign in_ready  = (count != DEPTH[$clog2(DEPTH+1)-1:0]);
  assign out_valid = (count != '0);
  assign out_data  = mem[rd_ptr];

  function automatic logic [PW-1:0] inc(logic [PW-1:0] p);
    return (p == PW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (do_push) wr_ptr <= inc(wr_ptr);
      if (do_pop)  rd_ptr <= inc(rd_ptr);
      case ({do_push, do_pop})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: ;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (do_push) mem[wr_ptr] <= in_data;
  end
endmodule
