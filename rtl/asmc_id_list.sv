// asmc_id_list: one request-ID list of the ASMC (the free list or the finished list).
//
// The lists live in the SPM metadata area; the ASMC keeps a part of each in
// an on-chip buffer of one list-vector length so that single pushes and
// batch pops rarely touch the SPM (both from the paper). Here the SPM part
// is a circular FIFO of whole lines, each line holding one full batch in the
// list-vector format (POS + 31 IDs), and the buffer collects single IDs:
//   push:  the ID goes into the buffer; a full buffer (31 IDs) is written to
//          the FIFO tail as one line.
//   get:   the ALSU asks for a batch. If the FIFO holds lines, its head line
//          is read and returned; otherwise the buffer is returned (possibly
//          partly filled or empty, POS = 0) and cleared.
//   init:  empties the list and pushes the IDs 1..init_count (free list).
// Batch layout, FIFO of lines and the order of IDs are this design's own.
//
// SPM port: spm_req_valid/spm_req until spm_gnt; read data arrives on
// spm_rdata the cycle after the grant. get_done pulses with get_vec; the
// requester may still hold get_valid in that cycle, it does not start a
// second get.
// Push is accepted (push_ready) only when idle and no get/init is asked.
//
// Tool note: rst_n is an asynchronous reset for the flops and also the disable iff
// of the assertions; the linter's SYNCASYNCNET note about that double use is
// expected and harmless (assertions are not synthesised).
module asmc_id_list
  import amu_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic [SPM_AW-LINE_OFF_W-1:0] base_line,
  input  logic [SPM_AW-LINE_OFF_W-1:0] cap_lines,
  input  logic       init_valid,
  input  id_t        init_count,
  input  logic       push_valid,
  output logic       push_ready,
  input  id_t        push_id,
  input  logic       get_valid,
  output logic       get_done,
  output lvr_t       get_vec,
  output logic       busy,
  output logic [ID_W:0] id_count,
  output logic       spm_req_valid,
  output spm_req_t   spm_req,
  input  logic       spm_gnt,
  input  line_t      spm_rdata
);
  localparam int unsigned LNW = SPM_AW - LINE_OFF_W;
  localparam logic [POS_W-1:0] FULL = POS_W'(IDS_PER_VEC);

  typedef enum logic [2:0] {S_IDLE, S_FILL, S_SPILL, S_GET_RD, S_GET_WAIT} state_e;
  state_e state, after_spill;

  lvr_t           buf_q;
  logic [LNW-1:0] head, tail, used;
  id_t            fill_next, fill_end;

  function automatic logic [LNW-1:0] wrap_inc(logic [LNW-1:0] p);
    return (p + 1'b1 == cap_lines) ? '0 : p + 1'b1;
  endfunction

  function automatic lvr_t append(lvr_t v, id_t id);
    lvr_t r;
    r = v;
    r.ids[v.pos] = id;
    r.pos = v.pos + 1'b1;
    return r;
  endfunction

  assign busy       = (state != S_IDLE);
  assign push_ready = (state == S_IDLE) && !init_valid && !get_valid;
  assign id_count   = (ID_W+1)'(used) * (ID_W+1)'(IDS_PER_VEC) + (ID_W+1)'(buf_q.pos);

  always_comb begin
    spm_req_valid = 1'b0;
    spm_req       = '0;
    if (state == S_SPILL) begin
      spm_req_valid = 1'b1;
      spm_req.we    = 1'b1;
      spm_req.line  = base_line + tail;
      spm_req.wdata = line_t'(buf_q);
      spm_req.wmask = '1;
    end else if (state == S_GET_RD) begin
      spm_req_valid = 1'b1;
      spm_req.line  = base_line + head;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; after_spill <= S_IDLE;
      buf_q <= '0; head <= '0; tail <= '0; used <= '0;
      fill_next <= '0; fill_end <= '0;
      get_done <= 1'b0; get_vec <= '0;
    end else begin
      get_done <= 1'b0;
      unique case (state)
        S_IDLE: begin
          if (init_valid) begin
            buf_q <= '0; head <= '0; tail <= '0; used <= '0;
            fill_next <= id_t'(1); fill_end <= init_count;
            state <= S_FILL;
          end else if (get_valid && !get_done) begin
            if (used != '0) state <= S_GET_RD;
            else begin
              get_vec  <= buf_q;
              get_done <= 1'b1;
              buf_q    <= '0;
            end
          end else if (push_valid && push_ready) begin
            buf_q <= append(buf_q, push_id);
            if (buf_q.pos + 1'b1 == FULL) begin
              state <= S_SPILL; after_spill <= S_IDLE;
            end
          end
        end
        S_FILL: begin
          if (fill_next == '0 || fill_next > fill_end) state <= S_IDLE;
          else begin
            buf_q     <= append(buf_q, fill_next);
            fill_next <= fill_next + 1'b1;
            if (buf_q.pos + 1'b1 == FULL) begin
              state <= S_SPILL; after_spill <= S_FILL;
            end
          end
        end
        S_SPILL: if (spm_gnt) begin
          tail  <= wrap_inc(tail);
          used  <= used + 1'b1;
          buf_q <= '0;
          state <= after_spill;
        end
        S_GET_RD: if (spm_gnt) state <= S_GET_WAIT;
        S_GET_WAIT: begin
          get_vec  <= lvr_t'(spm_rdata);
          get_done <= 1'b1;
          head     <= wrap_inc(head);
          used     <= used - 1'b1;
          state    <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // The FIFO of lines never overflows: the list never holds more IDs than exist.
  assert property (@(posedge clk) disable iff (!rst_n)
                   (state == S_SPILL && spm_gnt) |-> (used + 1'b1 <= cap_lines));
endmodule
