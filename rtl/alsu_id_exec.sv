// alsu_id_exec: AllocFree / Getfin executor of the ALSU for one ID list.
//
// Holds the list vector register (FreeIDVec or FinishIDVec: a POS field and
// 31 16-bit IDs) and hands out one ID per micro-op, like a register move.
// When the register is empty the micro-op fetches a whole batch of IDs from
// the ASMC. Because that fetch changes ASMC state and may be issued
// speculatively, the fetched batch is also kept in the uncommitted ID
// register until the fetching micro-op commits. If that micro-op is
// squashed, the batch stays there and the next micro-op that needs a batch
// takes it from this register instead of from the ASMC, so no ID is lost.
// While the register still guards a live (not yet committed) batch, a
// second fetch stalls until the owner commits (both as in the paper).
//
// Speculation: the list vector register is checkpointed for every micro-op
// the ALSU accepts (acc_valid/acc_tag), as register renaming would keep the
// old physical vector register; a squash restores the checkpoint of the
// first squashed micro-op. Tags are ALSU window slots; a squash covers
// squash_len slots from squash_tag. WIN must be a power of two.
//
// Timing: pop_valid is held until pop_done (one-cycle pulse). An ID present
// in the register answers one cycle after pop_valid; a fetch adds the ASMC
// round trip. clear (a committed rewrite of queue_length) empties the list
// vector register and the uncommitted ID register. pop_id = 0 means no ID was available (allocation failure for
// the free list, "nothing finished" for the finished list).
//
// Tool note: rst_n is an asynchronous reset for the flops and also the disable iff
// of the assertions; the linter's SYNCASYNCNET note about that double use is
// expected and harmless (assertions are not synthesised).
module alsu_id_exec
  import amu_pkg::*;
#(
  parameter int unsigned WIN   = 16,
  parameter int unsigned TAG_W = $clog2(WIN)
) (
  input  logic             clk,
  input  logic             rst_n,
  // every micro-op accepted by the ALSU
  input  logic             acc_valid,
  input  logic [TAG_W-1:0] acc_tag,
  // pop request of the micro-op being executed
  input  logic             pop_valid,
  input  logic [TAG_W-1:0] pop_tag,
  output logic             pop_done,
  output id_t              pop_id,
  output logic             busy,
  // batch fetch to / from the ASMC
  output logic             fetch_valid,
  input  logic             fetch_ready,
  input  logic             rsp_valid,
  input  lvr_t             rsp_vec,
  // commit / squash
  input  logic             commit_valid,
  input  logic [TAG_W-1:0] commit_tag,
  input  logic             squash_valid,
  input  logic [TAG_W-1:0] squash_tag,
  input  logic [TAG_W:0]   squash_len,
  // queue_length rewritten: forget all IDs (the ASMC rebuilds its lists)
  input  logic             clear,
  // status and event pulses
  output logic [POS_W-1:0] ids_held,
  output logic             ev_fetch,
  output logic             ev_reuse,
  output logic             ev_stall
);
  typedef enum logic [1:0] {S_IDLE, S_REQ, S_WAIT} state_e;
  state_e state;

  lvr_t             vec;            // list vector register (speculative)
  lvr_t             ckpt [WIN];     // value before each in-flight micro-op
  lvr_t             unc_vec;        // uncommitted ID register
  logic             unc_valid, unc_live;
  logic [TAG_W-1:0] unc_owner;
  logic [TAG_W-1:0] cur_tag;
  logic             killed;

  function automatic logic in_squash(logic [TAG_W-1:0] t);
    logic [TAG_W-1:0] d;
    d = t - squash_tag;
    return squash_valid && ({1'b0, d} < squash_len);
  endfunction

  function automatic lvr_t take(lvr_t v);
    lvr_t r;
    r = v;
    if (v.pos != '0) r.pos = v.pos - 1'b1;
    return r;
  endfunction

  function automatic id_t top_id(lvr_t v);
    return (v.pos == '0) ? '0 : v.ids[v.pos - 1'b1];
  endfunction

  wire start     = pop_valid && !pop_done && (state == S_IDLE) && !squash_valid;
  wire have_id   = (vec.pos != '0);
  wire can_reuse = unc_valid && !unc_live;
  wire must_wait = unc_valid && unc_live;

  assign busy        = (state != S_IDLE);
  assign fetch_valid = (state == S_REQ);
  assign ids_held    = vec.pos;
  assign ev_fetch    = (state == S_REQ) && fetch_ready;
  assign ev_reuse    = start && !have_id && can_reuse;
  assign ev_stall    = start && !have_id && must_wait;

  always_ff @(posedge clk) begin
    if (acc_valid) ckpt[acc_tag] <= vec;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      vec       <= '0;
      unc_vec   <= '0;
      unc_valid <= 1'b0;
      unc_live  <= 1'b0;
      unc_owner <= '0;
      cur_tag   <= '0;
      killed    <= 1'b0;
      pop_done  <= 1'b0;
      pop_id    <= '0;
    end else begin
      pop_done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          cur_tag <= pop_tag;
          killed  <= 1'b0;
          if (have_id) begin
            pop_id   <= top_id(vec);
            vec      <= take(vec);
            pop_done <= 1'b1;
          end else if (can_reuse) begin
            pop_id    <= top_id(unc_vec);
            vec       <= take(unc_vec);
            unc_owner <= pop_tag;
            unc_live  <= 1'b1;
            pop_done  <= 1'b1;
          end else if (!must_wait) begin
            state <= S_REQ;
          end
        end
        S_REQ: if (fetch_ready) state <= S_WAIT;
        S_WAIT: if (rsp_valid) begin
          state <= S_IDLE;
          if (rsp_vec.pos != '0) begin
            unc_vec   <= rsp_vec;
            unc_valid <= 1'b1;
            unc_live  <= !killed && !in_squash(cur_tag);
            unc_owner <= cur_tag;
          end
          if (!killed) begin
            pop_id   <= top_id(rsp_vec);
            vec      <= take(rsp_vec);
            pop_done <= 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase

      if (commit_valid && unc_valid && unc_live && commit_tag == unc_owner)
        unc_valid <= 1'b0;

      if (clear) begin
        vec       <= '0;
        unc_valid <= 1'b0;
      end

      if (squash_valid && squash_len != '0) begin
        vec <= ckpt[squash_tag];
        if (unc_valid && unc_live && in_squash(unc_owner)) unc_live <= 1'b0;
        if (state != S_IDLE && in_squash(cur_tag)) killed <= 1'b1;
        if (pop_done && in_squash(cur_tag)) pop_done <= 1'b0;
      end
    end
  end

  // The ALSU never commits and squashes the same window slot together.
  assert property (@(posedge clk) disable iff (!rst_n)
                   !(commit_valid && squash_valid && in_squash(commit_tag)));
endmodule
