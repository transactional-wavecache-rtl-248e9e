// twc_pkg -- types and constants shared by the Transactional WaveCache blocks.
//
// A memory request carries the wave-ordering annotation <P,C,S> (predecessor,
// current, successor) of WaveScalar, the wave number and the execution number
// ExeN that the Transactional WaveCache adds to every tag. The two wildcards of
// the annotation, "." (no such operation) and "?" (unknown, across a branch),
// are encoded as the two largest annotation values. Field widths are this
// design's choice: the paper gives no encodings.
//
// chain_ready() is the wave-ordering rule: a request may execute when it is the
// first of its wave (P = ".") and nothing of the wave has executed yet, or when
// the last executed request of the wave names it as successor (S = C), or when it
// names the last executed request as predecessor (P = last C).
package twc_pkg;

  parameter int WAVE_W = 16;  // wave number
  parameter int EXEN_W = 8;   // execution number ExeN
  parameter int ANN_W  = 8;   // one field of the <P,C,S> annotation
  parameter int ADDR_W = 32;  // word address
  parameter int DATA_W = 32;  // data word (the L1 line is 32 bits)
  parameter int PE_W   = 7;   // 4 clusters x 4 domains x 8 PEs = 128 PEs
  parameter int INST_W = 3;   // 8 instructions per PE
  parameter int PORT_W = 2;   // up to 3 input operands per instruction

  typedef logic [WAVE_W-1:0] wave_t;
  typedef logic [EXEN_W-1:0] exen_t;
  typedef logic [ANN_W-1:0]  ann_t;
  typedef logic [ADDR_W-1:0] addr_t;
  typedef logic [DATA_W-1:0] data_t;

  localparam ann_t ANN_NONE = '1;           // wildcard "."
  localparam ann_t ANN_UNK  = ann_t'('1 - 1); // wildcard "?"

  typedef enum logic [1:0] {
    OP_LOAD  = 2'd0,
    OP_STORE = 2'd1,
    OP_NOP   = 2'd2     // MemNop: keeps the chain through an empty branch path
  } memop_e;

  // Destination of an operand: PE, instruction slot in that PE, input port.
  typedef struct packed {
    logic [PE_W-1:0]   pe;
    logic [INST_W-1:0] inst;
    logic [PORT_W-1:0] port;
  } dest_t;

  // Memory request from a PE to the StoreBuffer.
  typedef struct packed {
    memop_e op;
    wave_t  wave;
    exen_t  exen;
    ann_t   p;
    ann_t   c;
    ann_t   s;
    addr_t  addr;
    data_t  data;   // store data
    dest_t  dest;   // where a load's value goes
  } mem_req_t;

  // A dataflow operand (token).
  typedef struct packed {
    dest_t dest;
    wave_t wave;
    exen_t exen;
    data_t data;
  } operand_t;

  // Event counters of a StoreBuffer.
  typedef struct packed {
    logic [15:0] raw;        // RAW hazards (each caused a rollback)
    logic [15:0] waw;        // WAW hazards (store absorbed in the MOH)
    logic [15:0] war;        // WAR hazards (load served from a backup)
    logic [15:0] commits;    // waves committed
    logic [15:0] rollbacks;  // rollbacks performed
    logic [15:0] restores;   // store backups written back to memory
    logic [15:0] resent;     // operands re-sent from a WCT
    logic [15:0] spec_ops;   // memory operations executed speculatively
    logic [15:0] moh_full;   // cycles a speculative request waited for MOH space
    logic [15:0] wct_full;   // cycles a Wave-Advance copy waited for WCT space
    logic [15:0] stale;      // requests dropped as belonging to an old execution
    logic [15:0] win_wait;   // cycles a request waited outside the Speculation Window
    logic [15:0] moh_peak;   // largest MOH occupancy seen
  } sb_stats_t;

  function automatic logic chain_ready(logic started, ann_t last_c, ann_t last_s,
                                       ann_t p, ann_t c);
    if (!started) return p == ANN_NONE;
    return (last_s != ANN_UNK && last_s != ANN_NONE && last_s == c) ||
           (p != ANN_UNK && p != ANN_NONE && p == last_c);
  endfunction

endpackage
