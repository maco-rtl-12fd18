// maco_pkg: types and constants shared by the MACO matrix-engine RTL.
//
// Holds the precision modes of the systolic array, the MPAIS instruction
// opcodes, the task descriptor that travels from the Master Task Queue (MTQ,
// CPU side) to the Slave Task Queue (STQ, engine side), the DMA command used
// inside the Accelerator Data Engine, the memory request/response of the
// engine and the network-on-chip flit.
//
// Following the source design: 256-bit data path, six 64-bit parameter
// registers per instruction, MTQ entry fields Valid/Done/ASID/exception_en/
// exception_type, 4KB pages, 4x4 mesh. Field positions inside the parameter
// registers, widths of MAID/ASID/tags and exception codes are this design's
// own choices (listed where they are used).
package maco_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned WORD_W    = 256;            // data bus / buffer word
  localparam int unsigned VA_W      = 48;
  localparam int unsigned PA_W      = 48;
  localparam int unsigned ASID_W    = 16;
  localparam int unsigned MAID_W    = 3;              // 8 MTQ/STQ entries
  localparam int unsigned EXC_W     = 4;
  localparam int unsigned TAG_W     = 16;
  localparam int unsigned NODE_W    = 4;              // up to 16 mesh nodes

  // ------------------------------------------------------ precision modes
  typedef enum logic [1:0] {
    MODE_FP64   = 2'd0,   // one FP64 lane per PE
    MODE_FP32X2 = 2'd1,   // two FP32 lanes per PE
    MODE_FP16X4 = 2'd2    // four FP16 lanes per PE
  } fp_mode_e;

  // ------------------------------------------------------ MPAIS opcodes
  typedef enum logic [2:0] {
    OP_CFG   = 3'd0,   // MA_CFG   : tile GEMM task
    OP_MOVE  = 3'd1,   // MA_MOVE  : copy
    OP_INIT  = 3'd2,   // MA_INIT  : zero fill
    OP_STASH = 3'd3,   // MA_STASH : prefetch into L3
    OP_READ  = 3'd4,   // MA_READ  : query entry
    OP_STATE = 3'd5,   // MA_STATE : query entry and release it
    OP_CLEAR = 3'd6    // MA_CLEAR : clear entry
  } mpais_op_e;

  // exception_type codes reported in an MTQ entry
  localparam logic [EXC_W-1:0] EXC_NONE      = 4'd0;
  localparam logic [EXC_W-1:0] EXC_TRANSLATE = 4'd1;  // page-table walk fault
  localparam logic [EXC_W-1:0] EXC_CONFIG    = 4'd2;  // illegal task shape

  typedef logic [63:0] gpr_t;

  // Instruction as issued by the CPU to the MTQ.
  typedef struct packed {
    mpais_op_e         op;
    logic [ASID_W-1:0] asid;      // process issuing the instruction
    gpr_t [5:0]        regs;      // Rn .. Rn+5 (MAID in Rn for READ/STATE/CLEAR)
  } mpais_req_t;

  // Task sent from MTQ to STQ.
  typedef struct packed {
    mpais_op_e         op;
    logic [MAID_W-1:0] maid;
    gpr_t [5:0]        regs;
  } task_t;

  // Completion sent from STQ back to MTQ.
  typedef struct packed {
    logic [MAID_W-1:0] maid;
    logic              exc_en;
    logic [EXC_W-1:0]  exc_type;
  } task_rsp_t;

  // One MTQ entry (Table of entry fields in the source design).
  typedef struct packed {
    logic              valid;
    logic              done;
    logic [ASID_W-1:0] asid;
    logic              exc_en;
    logic [EXC_W-1:0]  exc_type;
  } mtq_entry_t;

  // ------------------------------------------------ parameter registers
  // R0: A / source vaddr   R1: B / destination vaddr   R2: C vaddr
  // R3: [15:0] M or rows, [31:16] N or words per row, [47:32] K,
  //     [49:48] precision mode, [63:56] page shift (0 selects 12 = 4KB)
  // R4: [31:0] lda / source stride, [63:32] ldb / destination stride (bytes)
  // R5: [31:0] ldc (bytes)

  // ------------------------------------------------------- DMA command
  typedef enum logic [1:0] {
    DMA_LOAD  = 2'd0,   // memory -> buffer
    DMA_STORE = 2'd1,   // buffer (or zeros) -> memory
    DMA_STASH = 2'd2    // prefetch requests into L3, no data returned
  } dma_op_e;

  typedef enum logic [1:0] {
    BUF_A = 2'd0, BUF_B = 2'd1, BUF_C = 2'd2
  } buf_sel_e;

  typedef struct packed {
    dma_op_e         op;
    logic            zero;       // store zeros instead of buffer data
    logic [VA_W-1:0] vaddr;      // first byte of first row (32B aligned)
    logic [15:0]     rows;
    logic [15:0]     row_words;  // 32-byte words per row
    logic [31:0]     stride;     // bytes between row starts
    buf_sel_e        buf_sel;
    logic [15:0]     buf_base;   // first buffer word
  } dma_cmd_t;

  // ---------------------------------------------- memory request/response
  typedef enum logic [1:0] {
    MEM_READ = 2'd0, MEM_WRITE = 2'd1, MEM_STASH = 2'd2, MEM_RSP = 2'd3
  } mem_kind_e;

  typedef struct packed {
    mem_kind_e         kind;
    logic [PA_W-1:0]   addr;
    logic [WORD_W-1:0] data;
    logic [TAG_W-1:0]  tag;
  } mem_req_t;

  typedef struct packed {
    logic [WORD_W-1:0] data;
    logic [TAG_W-1:0]  tag;
  } mem_rsp_t;

  // ------------------------------------------------------------ NOC flit
  // Single-flit packets. VC0 carries requests (node -> home CCM), VC1
  // carries responses (CCM -> requesting node).
  typedef struct packed {
    logic [NODE_W-1:0] src;
    logic [NODE_W-1:0] dst;
    mem_kind_e         kind;
    logic [PA_W-1:0]   addr;
    logic [WORD_W-1:0] data;
    logic [TAG_W-1:0]  tag;
  } flit_t;


  // ------------------------------------------------------------ helpers
  function automatic int unsigned lanes_of(fp_mode_e m);
    case (m)
      MODE_FP32X2: return 2;
      MODE_FP16X4: return 4;
      default:     return 1;
    endcase
  endfunction

  function automatic int unsigned esize_of(fp_mode_e m);  // bytes
    case (m)
      MODE_FP32X2: return 4;
      MODE_FP16X4: return 2;
      default:     return 8;
    endcase
  endfunction

endpackage
