// far_mem_model: behavioural model of the remote memory controller and far
// memory node (not synthesizable). It accepts line requests, keeps them for
// a random latency between MIN_LAT and MAX_LAT cycles and answers each one
// when its time has come, so responses return out of order. Memory starts
// with tb_amu_pkg::far_line() content; writes apply their byte mask at
// acceptance. It counts accepted reads/writes and the peak number of
// requests it held at once (the memory-level parallelism seen at memory).
module far_mem_model
  import amu_pkg::*;
  import tb_amu_pkg::*;
#(
  parameter int unsigned MIN_LAT = 20,
  parameter int unsigned MAX_LAT = 60
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     req_valid,
  output logic     req_ready,
  input  mem_req_t req,
  output logic     rsp_valid,
  input  logic     rsp_ready,
  output mem_rsp_t rsp
);
  line_t store [mem_addr_t];
  typedef struct { longint due; mem_rsp_t r; } pend_t;
  pend_t pend [$];
  longint now;
  int unsigned reads, writes, peak;

  function automatic line_t get_line(mem_addr_t a);
    return store.exists(a) ? store[a] : far_line(a);
  endfunction

  assign req_ready = 1'b1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      now <= 0; rsp_valid <= 1'b0; rsp <= '0; reads <= 0; writes <= 0; peak <= 0;
      pend.delete();
    end else begin
      now <= now + 1;
      if (rsp_valid && rsp_ready) rsp_valid <= 1'b0;
      if (req_valid && req_ready) begin
        automatic pend_t p;
        automatic line_t l = get_line(req.addr);
        if (req.write) begin
          for (int b = 0; b < LINE_BYTES; b++)
            if (req.wmask[b]) l[b*8 +: 8] = req.wdata[b*8 +: 8];
          store[req.addr] = l;
          writes <= writes + 1;
        end else reads <= reads + 1;
        p.due   = now + longint'(MIN_LAT + ($urandom % (MAX_LAT - MIN_LAT + 1)));
        p.r.tag = req.tag;
        p.r.rdata = l;
        pend.push_back(p);
        if (pend.size() > int'(peak)) peak <= pend.size();
      end
      if (!rsp_valid || rsp_ready) begin
        for (int i = 0; i < pend.size(); i++) begin
          if (pend[i].due <= now) begin
            rsp       <= pend[i].r;
            rsp_valid <= 1'b1;
            pend.delete(i);
            break;
          end
        end
      end
    end
  end
endmodule
