// srsp_pkg: types and constants shared by the sRSP memory system.
//
// The memory system is a GPU cache hierarchy (per-CU L1 data caches and one
// shared L2) extended with selective flush and selective invalidation so that
// remote scope promotion (RSP) only touches the L1 of the local sharer.
// Block size (64 B) follows the evaluated configuration; the 32-bit word,
// the byte address width (19 bits, i.e. the 512 kB L2 is the whole address
// space) and every message encoding below are this design's own choices.
package srsp_pkg;

  localparam int unsigned WORD_W     = 32;
  localparam int unsigned LINE_BYTES = 64;                  // 64 B data block
  localparam int unsigned LINE_WORDS = LINE_BYTES / (WORD_W / 8);
  localparam int unsigned WOFF_W     = $clog2(LINE_WORDS);  // word index in a block
  localparam int unsigned ADDR_W     = 19;                  // byte address (512 kB)
  localparam int unsigned LINE_AW    = ADDR_W - $clog2(LINE_BYTES);

  typedef logic [WORD_W-1:0]                  word_t;
  typedef logic [ADDR_W-1:0]                  addr_t;      // byte address
  typedef logic [LINE_AW-1:0]                 line_addr_t; // block address
  typedef logic [WOFF_W-1:0]                  woff_t;
  typedef logic [LINE_WORDS-1:0]              wmask_t;     // one bit per word
  typedef logic [LINE_WORDS-1:0][WORD_W-1:0]  line_t;

  // Compute-unit request to its L1.
  typedef enum logic [1:0] {OP_LD, OP_ST, OP_ATOM} cu_op_e;
  typedef enum logic [1:0] {AMO_LD, AMO_ST, AMO_CAS, AMO_ADD} amo_e;
  typedef enum logic       {SCOPE_WG, SCOPE_CMP} scope_e;   // work-group / device
  typedef enum logic [1:0] {SEM_NONE, SEM_ACQ, SEM_REL, SEM_AR} sem_e;

  typedef struct packed {
    cu_op_e op;
    amo_e   amo;
    scope_e scope;
    sem_e   sem;
    logic   remote;   // rm_acq / rm_rel / rm_ar (device scope implied)
    addr_t  addr;     // word-aligned byte address
    word_t  wdata;    // store data, swap value of CAS, addend of ADD
    word_t  cmp;      // compare value of CAS
  } cu_req_t;

  // L1 -> L2 requests (write-backs travel on their own channel).
  typedef enum logic [1:0] {L2_RD, L2_ATOM, L2_SELFLUSH, L2_SELINV} l2_kind_e;

  typedef struct packed {
    l2_kind_e   kind;
    line_addr_t line;
    woff_t      woff;
    amo_e       amo;
    word_t      wdata;
    word_t      cmp;
    logic       hold;  // L2_ATOM of a remote release: keep the block locked
  } l2_req_t;

  typedef struct packed {
    line_t data;      // whole block for L2_RD
    word_t rdata;     // old value for L2_ATOM
  } l2_resp_t;

  typedef struct packed {
    line_addr_t line;
    wmask_t     mask; // dirty words to write
    line_t      data;
  } wb_t;

  // L2 -> L1 probes.
  typedef enum logic {PRB_SELFLUSH, PRB_SELINV} prb_kind_e;

  // Atomic read-modify-write, shared by L1 (local scope) and L2 (device scope).
  function automatic word_t amo_apply(amo_e amo, word_t old, word_t wdata, word_t cmp);
    unique case (amo)
      AMO_LD:  return old;
      AMO_ST:  return wdata;
      AMO_CAS: return (old == cmp) ? wdata : old;
      AMO_ADD: return old + wdata;
      default: return old;
    endcase
  endfunction

endpackage
