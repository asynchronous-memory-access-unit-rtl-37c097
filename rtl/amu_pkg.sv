// amu_pkg: types and constants shared by the Asynchronous Memory Access Unit (AMU).
//
// The AMU lets a core issue hundreds of far-memory requests without holding
// pipeline resources: aload/astore move data between far memory and a
// scratchpad (SPM) carved out of the L2, and getfin returns the ID of a
// completed request. The ALSU (in the core) and the ASMC (beside the L2)
// exchange requests and batches of request IDs through the types below.
//
// From the paper: 16-bit request IDs, list vector registers of 512 bits
// holding a position field and 31 IDs, the three configuration registers
// (granularity, queue_base, queue_length), the request-table fields (state,
// SPM address, memory address, tags), 64 KB of SPM and 32-entry pending queues.
// Own choices: 64-byte lines, 48-bit memory addresses, the exact bit layout of
// the request-table entry, the command encoding and the value 0 as the
// "no ID" / failure code.
//
// Tool note: the ID array of lvr_t is declared [0:IDS_PER_VEC-1] on purpose so
// that ids[0] is ID0 as in the list-vector picture; the linter reports this
// ascending range (ASCRANGE) in every module that uses the package.
package amu_pkg;

  parameter int unsigned XLEN        = 64;
  parameter int unsigned LINE_BYTES  = 64;
  parameter int unsigned LINE_BITS   = LINE_BYTES * 8;
  parameter int unsigned LINE_OFF_W  = $clog2(LINE_BYTES);
  parameter int unsigned ID_W        = 16;               // 16-bit IDs (Fig 5)
  parameter int unsigned LVR_BITS    = 512;              // list vector register width
  parameter int unsigned IDS_PER_VEC = LVR_BITS / ID_W - 1;  // 31 IDs + POS
  parameter int unsigned POS_W       = ID_W;
  parameter int unsigned SPM_AW      = 16;               // byte address inside a 64 KB SPM
  parameter int unsigned MEM_AW      = 48;
  parameter int unsigned MAX_GRAN    = 4096;             // largest request, bytes
  parameter int unsigned CHUNK_W     = $clog2(MAX_GRAN / LINE_BYTES);  // sub-request index
  parameter int unsigned MEM_TAG_W   = ID_W + CHUNK_W;
  parameter int unsigned AMART_ENTRY_BYTES = 16;
  parameter int unsigned AMART_PER_LINE    = LINE_BYTES / AMART_ENTRY_BYTES;

  typedef logic [ID_W-1:0]       id_t;
  typedef logic [LINE_BITS-1:0]  line_t;
  typedef logic [LINE_BYTES-1:0] bmask_t;
  typedef logic [SPM_AW-1:0]     spm_addr_t;
  typedef logic [MEM_AW-1:0]     mem_addr_t;

  // FreeIDVec / FinishIDVec (Fig 5): POS, then ID0 .. ID30, POS in the top bits.
  // POS counts the unused IDs; the next one handed out is ids[POS-1].
  typedef struct packed {
    logic [POS_W-1:0]            pos;
    id_t [0:IDS_PER_VEC-1]       ids;
  } lvr_t;

  // Commands on the ALSU -> ASMC channel.
  typedef enum logic [2:0] {
    CMD_ALOAD    = 3'd0,
    CMD_ASTORE   = 3'd1,
    CMD_GET_FREE = 3'd2,   // fetch a batch of free IDs
    CMD_GET_FIN  = 3'd3,   // fetch a batch of finished IDs
    CMD_PUT_FREE = 3'd4,   // write back a batch of IDs released by getfin
    CMD_CFG_WR   = 3'd5,
    CMD_CFG_RD   = 3'd6
  } asmc_cmd_e;

  typedef enum logic [1:0] {
    CFG_GRANULARITY  = 2'd0,
    CFG_QUEUE_BASE   = 2'd1,
    CFG_QUEUE_LENGTH = 2'd2
  } cfg_sel_e;

  // Request to the ASMC, shaped like a cache write: command, address, data.
  // aload/astore: addr = memory address, data = {.., id, spm_addr}.
  // config: addr[1:0] = register, data = value.  PUT_FREE: vec = IDs.
  typedef struct packed {
    asmc_cmd_e cmd;
    mem_addr_t addr;
    logic [XLEN-1:0] data;
    lvr_t      vec;
  } asmc_req_t;

  // Response from the ASMC: a batch of IDs, or a config value in vec[XLEN-1:0].
  typedef struct packed {
    asmc_cmd_e cmd;
    lvr_t      vec;
  } asmc_rsp_t;

  // Line request to far memory. Reads return the whole line.
  typedef struct packed {
    logic                  write;
    mem_addr_t             addr;    // line aligned
    logic [MEM_TAG_W-1:0]  tag;     // {id, chunk}
    line_t                 wdata;
    bmask_t                wmask;
  } mem_req_t;

  typedef struct packed {
    logic [MEM_TAG_W-1:0]  tag;
    line_t                 rdata;
  } mem_rsp_t;

  // One SPM line access.
  typedef struct packed {
    logic                          we;
    logic [SPM_AW-LINE_OFF_W-1:0]  line;
    line_t                         wdata;
    bmask_t                        wmask;
  } spm_req_t;

  // Asynchronous Memory Access Request Table entry (Fig 6: state, spm addr,
  // mem addr, tags), 16 bytes, four per SPM line.
  typedef enum logic [7:0] {
    AM_IDLE    = 8'd0,
    AM_PENDING = 8'd1,
    AM_DONE    = 8'd2
  } amart_state_e;

  typedef struct packed {
    logic [7:0]    is_store;    // tags: direction
    logic [15:0]   size;        // tags: bytes
    logic [15:0]   remaining;   // tags: sub-requests still outstanding
    amart_state_e  state;
    spm_addr_t     spm_addr;
    logic [63:0]   mem_addr;
  } amart_entry_t;

  // A committed aload/astore inside the ASMC, with the granularity in force
  // when the ASMC accepted it.
  typedef struct packed {
    logic       is_store;
    id_t        id;
    spm_addr_t  spm_addr;
    mem_addr_t  mem_addr;
    logic [15:0] size;
  } asmc_job_t;

  // Byte mask of the first n bytes of a line (n = 0 .. LINE_BYTES).
  function automatic bmask_t first_bytes(logic [15:0] n);
    bmask_t m;
    for (int b = 0; b < LINE_BYTES; b++) m[b] = (16'(b) < n);
    return m;
  endfunction

  // Line-aligned address of the SPM line holding request-table entry id.
  function automatic logic [SPM_AW-LINE_OFF_W-1:0] amart_line_of(
      logic [SPM_AW-LINE_OFF_W-1:0] base, id_t id);
    return base + (SPM_AW-LINE_OFF_W)'(id / id_t'(AMART_PER_LINE));
  endfunction

  // Micro-ops executed by the ALSU.
  typedef enum logic [2:0] {
    UOP_ALLOC_FREE  = 3'd0,
    UOP_GETFIN      = 3'd1,
    UOP_ALOAD_EXEC  = 3'd2,
    UOP_ASTORE_EXEC = 3'd3,
    UOP_CFG_RD      = 3'd4,
    UOP_CFG_WR      = 3'd5
  } uop_e;

  typedef struct packed {
    uop_e             op;
    logic [4:0]       rd;       // destination register (AllocFree, Getfin, CfgRd)
    logic [XLEN-1:0]  src1;     // SPM address (exec) / config value (CfgWr)
    logic [XLEN-1:0]  src2;     // memory address (exec) / config register (Cfg*)
  } uop_t;

  // AMI instructions as delivered by the decode stage (Table 1).
  typedef enum logic [2:0] {
    AMI_ALOAD  = 3'd0,
    AMI_ASTORE = 3'd1,
    AMI_GETFIN = 3'd2,
    AMI_CFGRR  = 3'd3,
    AMI_CFGRW  = 3'd4
  } ami_op_e;

  typedef struct packed {
    ami_op_e          op;
    logic [4:0]       rd;
    logic [XLEN-1:0]  rs1_val;  // SPM address, or value for cfgrw
    logic [XLEN-1:0]  rs2_val;  // memory address
    logic [1:0]       cfgreg;
  } ami_inst_t;

endpackage
