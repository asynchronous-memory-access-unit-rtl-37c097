// asmc_rsp_engine: completes asynchronous requests as far-memory responses return.
//
// Far-memory responses (tagged {ID, chunk}, in any order) wait in a
// 32-entry pending queue (size from the paper). For each response the
// engine reads the request's AMART entry in the SPM by its ID, writes the
// returned line into the SPM at the request's SPM address (aload only,
// shifted from the memory byte offset to the SPM byte offset and masked to
// the request's bytes), decrements the count of outstanding sub-requests in
// the entry and writes it back. When the count reaches zero the entry
// becomes DONE and the ID is pushed into the finished list, where getfin
// will find it.
//
// The entry is written back with a 16-byte mask so that the request engine
// may write neighbouring entries of the same line in between. One SPM access
// per state; the SPM read data arrives the cycle after the grant.
//
// Tool note: rst_n is an asynchronous reset for the flops and also the disable iff
// of the assertions; the linter's SYNCASYNCNET note about that double use is
// expected and harmless (assertions are not synthesised).
module asmc_rsp_engine
  import amu_pkg::*;
#(
  parameter int unsigned PEND_DEPTH = 32
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       mem_rsp_valid,
  output logic       mem_rsp_ready,
  input  mem_rsp_t   mem_rsp,
  input  logic [SPM_AW-LINE_OFF_W-1:0] amart_line,
  output logic       spm_req_valid,
  output spm_req_t   spm_req,
  input  logic       spm_gnt,
  input  line_t      spm_rdata,
  output logic       fin_valid,
  input  logic       fin_ready,
  output id_t        fin_id,
  output logic       busy,
  output logic [$clog2(PEND_DEPTH+1)-1:0] pending
);
  localparam int unsigned LNW = SPM_AW - LINE_OFF_W;
  typedef enum logic [2:0] {S_IDLE, S_ARD, S_AWAIT, S_DWR, S_AWR, S_FIN} state_e;

  state_e        state;
  mem_rsp_t      rsp;
  amart_entry_t  ent;
  logic          q_valid, q_pop;
  mem_rsp_t      q_rsp;

  amu_fifo #(.T(mem_rsp_t), .DEPTH(PEND_DEPTH)) u_pend (
    .clk, .rst_n,
    .in_valid(mem_rsp_valid), .in_ready(mem_rsp_ready), .in_data(mem_rsp),
    .out_valid(q_valid), .out_ready(q_pop), .out_data(q_rsp), .count(pending));

  assign q_pop = (state == S_IDLE) && q_valid;
  assign busy  = (state != S_IDLE) || q_valid;

  wire id_t              rid   = rsp.tag[MEM_TAG_W-1:CHUNK_W];
  wire [CHUNK_W-1:0]     chunk = rsp.tag[CHUNK_W-1:0];
  wire [1:0]             slot  = 2'(rid % id_t'(AMART_PER_LINE));
  wire                   is_small = (ent.size < 16'(LINE_BYTES));
  wire [15:0]            len   = is_small ? ent.size : 16'(LINE_BYTES);
  wire [LINE_OFF_W-1:0]  mem_off = is_small ? ent.mem_addr[LINE_OFF_W-1:0] : '0;
  wire [LINE_OFF_W-1:0]  spm_off = is_small ? ent.spm_addr[LINE_OFF_W-1:0] : '0;

  amart_entry_t ent_rd, upd;
  assign ent_rd = amart_entry_t'(spm_rdata >> (32'(slot) * AMART_ENTRY_BYTES * 8));
  always_comb begin
    upd           = ent;
    upd.remaining = ent.remaining - 1'b1;
    if (ent.remaining == 16'd1) upd.state = AM_DONE;
  end

  always_comb begin
    spm_req_valid = 1'b0;
    spm_req       = '0;
    unique case (state)
      S_ARD: begin
        spm_req_valid = 1'b1;
        spm_req.line  = amart_line_of(amart_line, rid);
      end
      S_DWR: begin
        spm_req_valid = 1'b1;
        spm_req.we    = 1'b1;
        spm_req.line  = ent.spm_addr[SPM_AW-1:LINE_OFF_W] + LNW'(chunk);
        spm_req.wdata = (rsp.rdata >> (32'(mem_off) * 8)) << (32'(spm_off) * 8);
        spm_req.wmask = first_bytes(len) << spm_off;
      end
      S_AWR: begin
        spm_req_valid = 1'b1;
        spm_req.we    = 1'b1;
        spm_req.line  = amart_line_of(amart_line, rid);
        spm_req.wdata = line_t'(upd) << (32'(slot) * AMART_ENTRY_BYTES * 8);
        spm_req.wmask = bmask_t'({AMART_ENTRY_BYTES{1'b1}}) << (32'(slot) * AMART_ENTRY_BYTES);
      end
      default: ;
    endcase
  end

  assign fin_valid = (state == S_FIN);
  assign fin_id    = rid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; rsp <= '0; ent <= '0;
    end else begin
      unique case (state)
        S_IDLE:  if (q_valid) begin rsp <= q_rsp; state <= S_ARD; end
        S_ARD:   if (spm_gnt) state <= S_AWAIT;
        S_AWAIT: begin
          ent   <= ent_rd;
          state <= (ent_rd.is_store != 8'd0) ? S_AWR : S_DWR;
        end
        S_DWR:   if (spm_gnt) state <= S_AWR;
        S_AWR:   if (spm_gnt) begin
          ent   <= upd;
          state <= (ent.remaining == 16'd1) ? S_FIN : S_IDLE;
        end
        S_FIN:   if (fin_ready) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  // A response must belong to a pending request.
  assert property (@(posedge clk) disable iff (!rst_n)
                   (state == S_AWR) |-> (ent.state == AM_PENDING && ent.remaining != 0));
endmodule
