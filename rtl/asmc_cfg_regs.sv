// asmc_cfg_regs: the ASMC configuration registers and the metadata-area layout.
//
// Software sets three registers with cfgrw and reads them with cfgrr:
// granularity (bytes moved by each aload/astore), queue_base (SPM start of
// the metadata area) and queue_length (number of request IDs, i.e. the
// largest number of requests in flight). From queue_base and queue_length
// this block derives where in the SPM the request table (AMART, 16-byte
// entries indexed by ID, ID 0 unused), the free list and the finished list
// live. Writing queue_length makes the ASMC build a fresh free list holding
// IDs 1..queue_length (sequenced in asmc).
//
// Register set and meaning follow the paper. Own choices: the register
// numbers (0 granularity, 1 queue_base, 2 queue_length), line alignment of
// queue_base, the clamp of queue_length to MAX_QLEN and of granularity to
// 1..MAX_GRAN, the reset values, and the order of the three areas.
// Each ID list is kept in whole lines of one list vector (31 IDs), so it
// needs ceil(queue_length/31) + 1 lines. Writes take effect in the next
// cycle; reads are combinational.
//
// Tool note: rd_data is XLEN wide while the registers are at most 16 bits,
// so its upper bits are constant zero by design.
// Tool note: rst_n is an asynchronous reset for the flops and also the disable iff
// of the assertions; the linter's SYNCASYNCNET note about that double use is
// expected and harmless (assertions are not synthesised).
// amart_lines is ID_W+1 bits wide so the division cannot overflow; only the
// low bits are needed for a line count inside the SPM, so the linter reports
// the upper bits as unused.
module asmc_cfg_regs
  import amu_pkg::*;
#(
  parameter int unsigned MAX_QLEN = 512
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             wr_valid,
  input  cfg_sel_e         wr_sel,
  input  logic [XLEN-1:0]  wr_data,
  input  cfg_sel_e         rd_sel,
  output logic [XLEN-1:0]  rd_data,
  output logic [15:0]      granularity,
  output logic [SPM_AW-LINE_OFF_W-1:0] amart_line,   // first line of the request table
  output logic [SPM_AW-LINE_OFF_W-1:0] free_line,    // first line of the free list
  output logic [SPM_AW-LINE_OFF_W-1:0] fin_line,     // first line of the finished list
  output logic [SPM_AW-LINE_OFF_W-1:0] list_lines,   // lines per ID list
  output id_t              queue_length
);
  localparam int unsigned LNW = SPM_AW - LINE_OFF_W;
  spm_addr_t queue_base;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      granularity  <= 16'd8;
      queue_base   <= '0;
      queue_length <= '0;
    end else begin
      if (wr_valid) begin
        unique case (wr_sel)
          CFG_GRANULARITY:
            granularity <= (wr_data == '0) ? 16'd1 :
                           (wr_data > XLEN'(MAX_GRAN)) ? 16'(MAX_GRAN) : wr_data[15:0];
          CFG_QUEUE_BASE:
            queue_base <= {wr_data[SPM_AW-1:LINE_OFF_W], {LINE_OFF_W{1'b0}}};
          CFG_QUEUE_LENGTH:
            queue_length <= (wr_data > XLEN'(MAX_QLEN)) ? id_t'(MAX_QLEN) : wr_data[ID_W-1:0];
          default: ;
        endcase
      end
    end
  end

  always_comb begin
    unique case (rd_sel)
      CFG_GRANULARITY:  rd_data = XLEN'(granularity);
      CFG_QUEUE_BASE:   rd_data = XLEN'(queue_base);
      CFG_QUEUE_LENGTH: rd_data = XLEN'(queue_length);
      default:          rd_data = '0;
    endcase
  end

  // Layout: [AMART][free list][finished list] from queue_base.
  logic [ID_W:0] amart_lines;
  always_comb begin
    amart_lines = ({1'b0, queue_length} + (ID_W+1)'(AMART_PER_LINE)) / (ID_W+1)'(AMART_PER_LINE);
    list_lines  = LNW'(({1'b0, queue_length} + (ID_W+1)'(IDS_PER_VEC - 1)) / (ID_W+1)'(IDS_PER_VEC)) + 1'b1;
    amart_line  = queue_base[SPM_AW-1:LINE_OFF_W];
    free_line   = amart_line + LNW'(amart_lines);
    fin_line    = free_line + list_lines;
  end

  // The metadata area must fit in the SPM once queue_length (which starts
  // the list initialisation) has been written.
  assert property (@(posedge clk) disable iff (!rst_n)
    (wr_valid && wr_sel == CFG_QUEUE_LENGTH) |=>
      (32'(fin_line) + 32'(list_lines) <= 32'(1 << LNW)));
endmodule
