// coroamu_pkg: shared sizes, encodings and bundle types of the CoroAMU
// hardware (an asynchronous memory unit, AMU, extended for memory-driven
// coroutines: grouped requests, await/asignal, and the bafin jump whose
// target is forwarded from the AMU to the branch predictor).
//
// Sizes that the paper states: 16-entry AMU request and finished queues,
// a 4-entry Bafin Predict Table, a 32 KB scratchpad (one of eight L2 ways),
// room for 512 concurrent coroutines, requests of up to 4 KB and a 32 B
// fetch block. Everything else here (widths, field order, the bit layout of
// the aload/astore address operand, 64 B lines, 64 request-table entries)
// is this design's own choice and is listed as such in the README.
package coroamu_pkg;

  // ---------------- sizes ----------------
  localparam int unsigned ID_W        = 10;     // 512 coroutines plus one high bit for nested children; ID 0 means "none"
  localparam int unsigned PCOFF_W     = 16;     // signed resume-PC offset (bytes, from the bafin PC)
  localparam int unsigned MADDR_W     = 40;     // memory address width
  localparam int unsigned XLEN        = 64;
  localparam int unsigned LINE_BYTES  = 64;
  localparam int unsigned LINE_W      = LINE_BYTES * 8;
  localparam int unsigned WORDS_PER_LINE = LINE_BYTES / 8;
  localparam int unsigned SPM_BYTES   = 32 * 1024;
  localparam int unsigned SPM_ADDR_W  = $clog2(SPM_BYTES);           // 15
  localparam int unsigned SPM_LINES   = SPM_BYTES / LINE_BYTES;      // 512
  localparam int unsigned SPM_LINE_W  = $clog2(SPM_LINES);           // 9
  localparam int unsigned RT_ENTRIES  = 64;     // request table entries
  localparam int unsigned RT_IDX_W    = $clog2(RT_ENTRIES);
  localparam int unsigned SIZE_CODE_W = 4;      // log2(bytes): 3 (8 B) .. 12 (4 KB)
  localparam int unsigned MIN_SIZE_CODE = 3;
  localparam int unsigned MAX_SIZE_CODE = 12;
  localparam int unsigned ASET_N_W    = 8;      // aset count operand
  localparam int unsigned FETCH_BYTES = 32;

  // aload/astore address operand layout (64-bit register):
  //   [63:48] resume-PC offset, [47:44] size code, [39:0] memory address
  localparam int unsigned OPND_PC_LSB   = 48;
  localparam int unsigned OPND_SIZE_LSB = 44;

  // ---------------- encodings ----------------
  typedef enum logic [2:0] {
    OP_ALOAD   = 3'd0,
    OP_ASTORE  = 3'd1,
    OP_ASET    = 3'd2,
    OP_AWAIT   = 3'd3,
    OP_ASIGNAL = 3'd4
  } amu_op_e;

  // ---------------- bundles ----------------
  // One AMU instruction as it leaves the backend (Request Queue entry).
  typedef struct packed {
    amu_op_e                 op;
    logic [ID_W-1:0]         id;
    logic [XLEN-1:0]         opnd;      // aload/astore: address operand; await: PC offset in [63:48]; aset: n in [7:0]
    logic [SPM_ADDR_W-1:0]   spm_addr;  // aload/astore: SPM byte address
  } amu_instr_t;

  // One cache-line-sized request sent to the L2 request table.
  typedef struct packed {
    amu_op_e                 op;        // ALOAD, ASTORE, AWAIT or ASIGNAL
    logic [ID_W-1:0]         id;
    logic [MADDR_W-7:0]      line;      // memory line address
    logic [SPM_LINE_W-1:0]   spm_line;  // SPM line index
    logic [WORDS_PER_LINE-1:0] wmask;   // 8-byte words of the line touched
    logic [SPM_ADDR_W-1:0]   spm_addr;  // SPM byte address of the request (kept by the primary)
    logic [PCOFF_W-1:0]      pcoff;     // resume-PC offset
    logic                    last;      // last line request of its group
  } line_req_t;

  // A completed coroutine: Finished List / Finished Queue / BTQ entry.
  typedef struct packed {
    logic [ID_W-1:0]         id;
    logic [PCOFF_W-1:0]      pcoff;
    logic [SPM_ADDR_W-1:0]   spm_addr;
  } fin_t;

  // Far-memory request and response (line granularity).
  typedef struct packed {
    logic                    write;
    logic [MADDR_W-7:0]      line;
    logic [RT_IDX_W-1:0]     tag;
    logic [WORDS_PER_LINE-1:0] wmask;
    logic [LINE_W-1:0]       wdata;
  } mem_req_t;

  typedef struct packed {
    logic                    write;
    logic [RT_IDX_W-1:0]     tag;
    logic [LINE_W-1:0]       rdata;
  } mem_resp_t;

endpackage
