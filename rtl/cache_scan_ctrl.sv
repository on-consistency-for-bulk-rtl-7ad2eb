// cache_scan_ctrl: handles the PIM ops and fences that pass through one cache
// level, keeping the cache coherent with the PIM memory.
//
// Per operation (one at a time, in arrival order):
//  * PIM op, at a level that scans for PIM ops (the LLC): look the scope up
//    in the scope buffer. Hit: forward the op at once. Miss: scan the cache
//    set by set, flushing every line of the scope (dirty lines leave as
//    writebacks on the output stream, ahead of the op), insert the scope into
//    the scope buffer, then forward the op.
//  * PIM op at a level that does not scan (L1 in the scope-relaxed model):
//    forwarded unchanged, so that a later scope-fence can order it.
//  * scope-fence: same lookup/scan/insert as a PIM op at every level; it is
//    forwarded to the next level, and terminated at the LLC.
//  * cross-scope fence: forwarded, terminated at the LLC.
//  * anything else: forwarded unchanged.
// The scan visits only the sets whose scope bit-vector (SBV) bit is high:
// each cycle it asks the SBV for the next flagged set at or above its
// pointer, reads that set's metadata, and either flushes one matching line
// (staying on the set) or moves the pointer past the set. A scan therefore
// takes one cycle per flagged set visited, plus one per line flushed (more
// if the output stalls), plus the final cycle that finds no flagged set.
// While the controller is between lookup and insert it raises host_block;
// the host cache must then accept no fills, which keeps the flush atomic
// with the PIM op and stops a line slipping into an already scanned set.
//
// Handshakes are valid/ready; an input is taken in IDLE and the next one is
// accepted only after the current one has left. Counters are statistics.
module cache_scan_ctrl
  import pim_pkg::*;
#(
  parameter int unsigned SETS     = 2048,
  parameter int unsigned WAYS     = 16,
  parameter bit          IS_LLC   = 1'b1   // scans for PIM ops, terminates fences
) (
  input  logic     clk,
  input  logic     rst_n,
  // operations arriving from the level above
  input  logic     in_valid,
  output logic     in_ready,
  input  mem_req_t in_req,
  // operations leaving towards the level below / memory controller
  output logic     out_valid,
  input  logic     out_ready,
  output mem_req_t out_req,
  // scope buffer
  output logic     sb_lookup_valid,
  output scope_t   sb_lookup_scope,
  input  logic     sb_lookup_hit,
  output logic     sb_insert_valid,
  output scope_t   sb_insert_scope,
  // SBV search
  output logic [$clog2(SETS)-1:0] sbv_find_start,
  input  logic                    sbv_find_found,
  input  logic [$clog2(SETS)-1:0] sbv_find_set,
  // tag array scan and flush
  output logic [$clog2(SETS)-1:0] scan_set,
  input  logic [WAYS-1:0]         scan_line_valid,
  input  logic [WAYS-1:0]         scan_line_dirty,
  input  logic [WAYS-1:0]         scan_line_pim,
  input  paddr_t                  scan_line_addr [WAYS],
  output logic                    flush_valid,
  output logic [$clog2(SETS)-1:0] flush_set,
  output logic [$clog2(WAYS)-1:0] flush_way,
  // cache blocked
  output logic     host_block,
  // statistics
  output logic [31:0] stat_sb_hits,
  output logic [31:0] stat_scans,
  output logic [31:0] stat_scan_cycles,
  output logic [31:0] stat_sets_visited,
  output logic [31:0] stat_lines_flushed,
  output logic [31:0] stat_writebacks
);
  localparam int unsigned IDX_W = $clog2(SETS);
  localparam int unsigned WAY_W = $clog2(WAYS);

  typedef enum logic [2:0] {S_IDLE, S_LOOKUP, S_SCAN, S_INSERT, S_OUT} state_e;
  state_e   state_q;
  mem_req_t req_q;
  logic [IDX_W-1:0] ptr_q;

  scope_t req_scope;
  assign req_scope = scope_of(req_q.addr);

  // Does this operation use the scope buffer / scan at this level?
  logic scans;
  assign scans = (req_q.op == OP_SCOPE_FENCE) || (req_q.op == OP_PIM && IS_LLC);
  // Is it terminated here?
  logic terminates;
  assign terminates = IS_LLC && (req_q.op == OP_SCOPE_FENCE || req_q.op == OP_FENCE);

  // Lines of the set under scan that belong to the scope.
  logic [WAYS-1:0] match;
  always_comb
    for (int w = 0; w < WAYS; w++)
      match[w] = scan_line_valid[w] && scan_line_pim[w] &&
                 scope_of(scan_line_addr[w]) == req_scope;
  logic [WAY_W-1:0] mway;
  always_comb begin
    mway = '0;
    for (int w = WAYS-1; w >= 0; w--) if (match[w]) mway = WAY_W'(w);
  end

  assign sbv_find_start = ptr_q;
  assign scan_set       = sbv_find_set;
  logic set_has_match;
  assign set_has_match = (state_q == S_SCAN) && sbv_find_found && |match;

  // A dirty matching line needs the output port for its writeback.
  logic wb_needed;
  assign wb_needed = set_has_match && scan_line_dirty[mway];

  assign in_ready        = (state_q == S_IDLE);
  assign sb_lookup_valid = (state_q == S_LOOKUP) && scans;
  assign sb_lookup_scope = req_scope;
  assign sb_insert_valid = (state_q == S_INSERT);
  assign sb_insert_scope = req_scope;
  assign host_block      = (state_q == S_LOOKUP) || (state_q == S_SCAN) || (state_q == S_INSERT);

  assign flush_valid = set_has_match && (!wb_needed || out_ready);
  assign flush_set   = sbv_find_set;
  assign flush_way   = mway;

  always_comb begin
    out_valid = 1'b0;
    out_req   = req_q;
    if (wb_needed) begin
      out_valid    = 1'b1;
      out_req.op   = OP_WRITEBACK;
      out_req.addr = scan_line_addr[mway];
    end else if (state_q == S_OUT) begin
      out_valid = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      req_q   <= '0;
      ptr_q   <= '0;
      stat_sb_hits       <= '0;
      stat_scans         <= '0;
      stat_scan_cycles   <= '0;
      stat_sets_visited  <= '0;
      stat_lines_flushed <= '0;
      stat_writebacks    <= '0;
    end else begin
      unique case (state_q)
        S_IDLE: if (in_valid) begin
          req_q   <= in_req;
          state_q <= S_LOOKUP;
        end
        S_LOOKUP: begin
          ptr_q <= '0;
          if (scans && !sb_lookup_hit) begin
            state_q    <= S_SCAN;
            stat_scans <= stat_scans + 1;
          end else begin
            if (scans) stat_sb_hits <= stat_sb_hits + 1;
            state_q <= terminates ? S_IDLE : S_OUT;
          end
        end
        S_SCAN: begin
          stat_scan_cycles <= stat_scan_cycles + 1;
          if (!sbv_find_found) begin
            state_q <= S_INSERT;
          end else if (|match) begin
            if (flush_valid) begin
              stat_lines_flushed <= stat_lines_flushed + 1;
              if (wb_needed) stat_writebacks <= stat_writebacks + 1;
            end
          end else begin
            stat_sets_visited <= stat_sets_visited + 1;
            if (sbv_find_set == IDX_W'(SETS-1)) state_q <= S_INSERT;
            else ptr_q <= sbv_find_set + 1'b1;
          end
        end
        S_INSERT: state_q <= terminates ? S_IDLE : S_OUT;
        S_OUT: if (out_ready) state_q <= S_IDLE;
        default: state_q <= S_IDLE;
      endcase
    end
  end

  // A writeback is held stable until taken.
  property p_out_stable;
    @(posedge clk) disable iff (!rst_n) out_valid && !out_ready |=> out_valid && $stable(out_req);
  endproperty
  assert property (p_out_stable) else $error("cache_scan_ctrl: output changed while stalled");
endmodule
