// pim_pkg: types and constants shared by the PIM consistency/coherence RTL.
//
// A memory operation travelling from a core to the memory controller is a
// mem_req_t: its kind (load, store, PIM op, cross-scope fence, scope-fence),
// its physical address and the issuing core. The scope of an operation is the
// huge page holding its address: with 2MB scopes it is addr[PA_W-1:21].
// Address width 35 bits follows from the 32GB main memory of the evaluated
// system; the 2MB scope and 64B line follow the evaluated system as well.
// The encodings of the enums are this design's own choice.
package pim_pkg;

  // Physical address width: 32GB main memory -> 35 bits.
  parameter int unsigned PA_W       = 35;
  // 64B cache lines.
  parameter int unsigned LINE_OFF_W = 6;
  // 2MB scopes (huge pages).
  parameter int unsigned SCOPE_OFF_W = 21;
  parameter int unsigned SCOPE_W    = PA_W - SCOPE_OFF_W;   // 14
  parameter int unsigned LINE_W     = PA_W - LINE_OFF_W;    // 29: line address
  // Core id width (6 cores in the evaluated host, up to 8 here).
  parameter int unsigned CORE_W     = 3;

  typedef logic [PA_W-1:0]    paddr_t;
  typedef logic [SCOPE_W-1:0] scope_t;
  typedef logic [LINE_W-1:0]  line_addr_t;
  typedef logic [CORE_W-1:0]  core_id_t;

  // The four consistency models, strictest first.
  typedef enum logic [1:0] {
    MODEL_ATOMIC        = 2'd0,
    MODEL_STORE         = 2'd1,
    MODEL_SCOPE         = 2'd2,
    MODEL_SCOPE_RELAXED = 2'd3
  } model_e;

  typedef enum logic [2:0] {
    OP_LOAD        = 3'd0,
    OP_STORE       = 3'd1,
    OP_PIM         = 3'd2,   // bulk-bitwise PIM operation on one scope
    OP_FENCE       = 3'd3,   // dedicated fence ordering PIM ops across scopes
    OP_SCOPE_FENCE = 3'd4,   // scope-relaxed model: orders within one scope
    OP_WRITEBACK   = 3'd5    // dirty line flushed towards memory by a scan
  } op_e;

  typedef struct packed {
    op_e      op;
    paddr_t   addr;
    core_id_t core;
  } mem_req_t;

  function automatic scope_t scope_of(paddr_t a);
    return a[PA_W-1:SCOPE_OFF_W];
  endfunction

  // True when the model needs a memory-controller ACK for a PIM op.
  function automatic logic model_needs_ack(model_e m);
    return m != MODEL_SCOPE_RELAXED;
  endfunction

endpackage
