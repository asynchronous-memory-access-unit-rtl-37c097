// l2_spm: the scratchpad region of the L2 data array.
//
// The AMU takes part of the private L2 cache as a software-visible
// scratchpad (SPM). It holds the program's data for asynchronous loads and
// stores, and the metadata area (request table, free list, finished list)
// that the ASMC manages. The paper fixes the SPM at 64 KB; the L2's normal
// caching (tags, replacement) is not part of this model, so the SPM region
// is a plain line array: SPM byte address a lives in line a/64. In the L2 it
// would occupy whole ways; the way/set mapping is not modelled.
//
// One port, one 64-byte line per access, byte write mask, read data
// registered: rdata is valid the cycle after a read is presented (req_valid
// with we = 0). Latency beyond one cycle (the L2's 10 cycles) is not modelled.
module l2_spm
  import amu_pkg::*;
#(
  parameter int unsigned SPM_BYTES = 65536
) (
  input  logic     clk,
  input  logic     req_valid,
  input  spm_req_t req,
  output line_t    rdata
);
  localparam int unsigned LINES = SPM_BYTES / LINE_BYTES;
  localparam int unsigned LW    = $clog2(LINES);

  line_t mem [LINES];
  wire [LW-1:0] idx = req.line[LW-1:0];

  always_ff @(posedge clk) begin
    if (req_valid) begin
      if (req.we) begin
        for (int b = 0; b < LINE_BYTES; b++)
          if (req.wmask[b]) mem[idx][b*8 +: 8] <= req.wdata[b*8 +: 8];
      end else begin
        rdata <= mem[idx];
      end
    end
  end
endmodule
