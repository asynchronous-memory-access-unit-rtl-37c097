// asmc_req_engine: turns committed aload/astore requests into far-memory line requests.
//
// Requests from the ALSU wait in a 32-entry pending queue (size from the
// paper). For each request the engine's state machine
//   1. writes the request's entry in the request table (AMART) in the SPM,
//      indexed by the request ID: state PENDING, SPM address, memory
//      address and, as tags, direction, size and the number of
//      sub-requests still outstanding;
//   2. splits the request into cache-line sub-requests (the paper's
//      splitting state machine) and sends one line request per chunk to
//      far memory, tagged {ID, chunk}. For astore it first reads the chunk
//      from the SPM and shifts it to the memory byte offset.
// Responses are handled by asmc_rsp_engine, which finds the request again
// through the same table entry.
//
// Own choices: requests below one line must be a power of two in size and
// aligned to it at both addresses; larger ones are whole, line-aligned lines.
// The table entry is written with a byte mask, so no read-modify-write is
// needed. One SPM access or memory request per state; ready/valid handshakes.
//
// Tool note: far-memory requests are line aligned, so the low address bits of
// mem_req are constant zero by design.
// Tool note: rst_n is an asynchronous reset for the flops and also the disable iff
// of the assertions; the linter's SYNCASYNCNET note about that double use is
// expected and harmless (assertions are not synthesised).
module asmc_req_engine
  import amu_pkg::*;
#(
  parameter int unsigned PEND_DEPTH = 32
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  output logic       in_ready,
  input  asmc_job_t  in_job,
  input  logic [SPM_AW-LINE_OFF_W-1:0] amart_line,
  output logic       spm_req_valid,
  output spm_req_t   spm_req,
  input  logic       spm_gnt,
  input  line_t      spm_rdata,
  output logic       mem_req_valid,
  input  logic       mem_req_ready,
  output mem_req_t   mem_req,
  output logic       busy,
  output logic [$clog2(PEND_DEPTH+1)-1:0] pending,
  output logic       ev_split          // a request with more than one chunk started
);
  localparam int unsigned LNW = SPM_AW - LINE_OFF_W;
  typedef enum logic [2:0] {S_IDLE, S_AMART, S_DRD, S_DWAIT, S_MEM} state_e;

  state_e            state;
  asmc_job_t         job;
  logic [CHUNK_W:0]  nchunks, chunk;
  logic [15:0]       len;
  line_t             wdata;
  logic              q_valid, q_pop;
  asmc_job_t         q_job;

  amu_fifo #(.T(asmc_job_t), .DEPTH(PEND_DEPTH)) u_pend (
    .clk, .rst_n,
    .in_valid, .in_ready, .in_data(in_job),
    .out_valid(q_valid), .out_ready(q_pop), .out_data(q_job), .count(pending));

  assign q_pop = (state == S_IDLE) && q_valid;
  assign busy  = (state != S_IDLE) || q_valid;

  wire [LINE_OFF_W-1:0] mem_off = (len == 16'(LINE_BYTES)) ? '0 : job.mem_addr[LINE_OFF_W-1:0];
  wire [LINE_OFF_W-1:0] spm_off = (len == 16'(LINE_BYTES)) ? '0 : job.spm_addr[LINE_OFF_W-1:0];
  wire [1:0]            slot    = 2'(job.id % id_t'(AMART_PER_LINE));

  amart_entry_t ent;
  always_comb begin
    ent           = '0;
    ent.is_store  = 8'(job.is_store);
    ent.size      = job.size;
    ent.remaining = 16'(nchunks);
    ent.state     = AM_PENDING;
    ent.spm_addr  = job.spm_addr;
    ent.mem_addr  = 64'(job.mem_addr);
  end

  always_comb begin
    spm_req_valid = 1'b0;
    spm_req       = '0;
    if (state == S_AMART) begin
      spm_req_valid = 1'b1;
      spm_req.we    = 1'b1;
      spm_req.line  = amart_line_of(amart_line, job.id);
      spm_req.wdata = line_t'(ent) << (32'(slot) * AMART_ENTRY_BYTES * 8);
      spm_req.wmask = bmask_t'({AMART_ENTRY_BYTES{1'b1}}) << (32'(slot) * AMART_ENTRY_BYTES);
    end else if (state == S_DRD) begin
      spm_req_valid = 1'b1;
      spm_req.line  = job.spm_addr[SPM_AW-1:LINE_OFF_W] + LNW'(chunk);
    end
  end

  always_comb begin
    mem_req       = '0;
    mem_req_valid = (state == S_MEM);
    mem_req.write = job.is_store;
    mem_req.addr  = {job.mem_addr[MEM_AW-1:LINE_OFF_W] + (MEM_AW-LINE_OFF_W)'(chunk),
                     {LINE_OFF_W{1'b0}}};
    mem_req.tag   = {job.id, CHUNK_W'(chunk)};
    mem_req.wdata = wdata;
    mem_req.wmask = job.is_store ? (first_bytes(len) << mem_off) : '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; job <= '0; nchunks <= '0; chunk <= '0; len <= '0; wdata <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (q_valid) begin
          job   <= q_job;
          chunk <= '0;
          if (q_job.size >= 16'(LINE_BYTES)) begin
            nchunks <= (CHUNK_W+1)'(q_job.size / 16'(LINE_BYTES));
            len     <= 16'(LINE_BYTES);
          end else begin
            nchunks <= (CHUNK_W+1)'(1);
            len     <= q_job.size;
          end
          state <= S_AMART;
        end
        S_AMART: if (spm_gnt) state <= job.is_store ? S_DRD : S_MEM;
        S_DRD:   if (spm_gnt) state <= S_DWAIT;
        S_DWAIT: begin
          wdata <= (spm_rdata >> (32'(spm_off) * 8)) << (32'(mem_off) * 8);
          state <= S_MEM;
        end
        S_MEM: if (mem_req_ready) begin
          chunk <= chunk + 1'b1;
          if (chunk + 1'b1 == nchunks) state <= S_IDLE;
          else state <= job.is_store ? S_DRD : S_MEM;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign ev_split = (state == S_AMART) && spm_gnt && (nchunks > (CHUNK_W+1)'(1));

  // Size and alignment rules of this implementation.
  assert property (@(posedge clk) disable iff (!rst_n) q_pop |->
    (q_job.size != 0 && q_job.size <= 16'(MAX_GRAN) &&
     ((q_job.size < 16'(LINE_BYTES)) ?
        (((q_job.size & (q_job.size - 1'b1)) == 0) &&
         ((16'(q_job.mem_addr[LINE_OFF_W-1:0]) & (q_job.size - 1'b1)) == 0) &&
         ((16'(q_job.spm_addr[LINE_OFF_W-1:0]) & (q_job.size - 1'b1)) == 0)) :
        ((q_job.size % 16'(LINE_BYTES)) == 0 &&
         q_job.mem_addr[LINE_OFF_W-1:0] == 0 && q_job.spm_addr[LINE_OFF_W-1:0] == 0))));
endmodule
