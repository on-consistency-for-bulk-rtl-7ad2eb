// cache_pim_unit: the PIM support added to one cache level.
//
// It joins the cache's metadata (cache_tag_array, with a PIM-enabled bit per
// line), a scope buffer, a scope bit-vector and the scan controller. In the
// atomic, store and scope models only the LLC has one (IS_LLC=1). In the
// scope-relaxed model every cache level has one: at L1 (IS_LLC=0) PIM ops
// pass without a scan and scope-fences scan and flush.
//
// Wiring of the paper's rules:
//  * a host fill of a line erases that line's scope from the scope buffer;
//  * every change of a set's contents rewrites the set's SBV bit;
//  * a PIM op / scope-fence on the op stream is handled by the controller;
//  * a writeback arriving on the op stream (a line flushed from the level
//    above) marks the line dirty here, so a later scan of this level writes
//    it to memory.
// Every line the scan invalidates, clean or dirty, is reported on
// flushed_valid/flushed_addr in the cycle it is dropped, so that the host
// cache can drop its data copy and back-invalidate copies in the levels
// above (the LLC is inclusive).
// While the controller scans, host_block is high and the host must hold its
// fills, invalidations and writes; writebacks on the op stream are then
// held too, and so are they in a cycle with a host write.
//
// Defaults: the evaluated LLC, 2048 sets x 16 ways, with a 64-set, 4-way
// scope buffer. The L1 of the evaluated system is 64 sets x 4 ways with a
// 16-set, 1-way scope buffer.
module cache_pim_unit
  import pim_pkg::*;
#(
  parameter int unsigned SETS    = 2048,
  parameter int unsigned WAYS    = 16,
  parameter int unsigned SB_SETS = 64,
  parameter int unsigned SB_WAYS = 4,
  parameter bit          IS_LLC  = 1'b1
) (
  input  logic     clk,
  input  logic     rst_n,
  // op stream from the level above
  input  logic     in_valid,
  output logic     in_ready,
  input  mem_req_t in_req,
  // op stream to the level below
  output logic     out_valid,
  input  logic     out_ready,
  output mem_req_t out_req,
  // host cache controller events
  input  logic     fill_valid,
  input  paddr_t   fill_addr,
  input  logic     fill_pim,
  input  logic     fill_dirty,
  output logic     evict_valid,
  output paddr_t   evict_addr,
  output logic     evict_dirty,
  input  logic     wr_valid,
  input  paddr_t   wr_addr,
  input  logic     inv_valid,
  input  paddr_t   inv_addr,
  output logic     host_block,
  output logic     flushed_valid,
  output paddr_t   flushed_addr,
  // statistics
  output logic [31:0] stat_sb_hits,
  output logic [31:0] stat_scans,
  output logic [31:0] stat_scan_cycles,
  output logic [31:0] stat_sets_visited,
  output logic [31:0] stat_lines_flushed,
  output logic [31:0] stat_writebacks,
  output logic [$clog2(SETS+1)-1:0] sbv_flagged
);
  localparam int unsigned IDX_W = $clog2(SETS);
  localparam int unsigned WAY_W = $clog2(WAYS);

  // op-stream demux: writebacks go to the tag array, the rest to the controller
  logic is_wb;
  assign is_wb = in_req.op == OP_WRITEBACK;
  logic     c_in_valid, c_in_ready;
  assign c_in_valid = in_valid && !is_wb;
  assign in_ready   = is_wb ? (!host_block && !wr_valid) : c_in_ready;

  logic   sb_lookup_valid, sb_lookup_hit, sb_insert_valid;
  scope_t sb_lookup_scope, sb_insert_scope;
  logic [IDX_W-1:0] find_start, find_set, scan_set, flush_set, upd_set;
  logic             find_found, flush_valid, upd_valid, upd_bit;
  logic [WAY_W-1:0] flush_way;
  logic [WAYS-1:0]  l_valid, l_dirty, l_pim;
  paddr_t           l_addr [WAYS];
  logic             evict_pim, wr_hit;
  logic [$clog2(SB_SETS*SB_WAYS+1)-1:0] sb_occupancy;
  logic [SETS-1:0]  sbv_bits;

  // host events are accepted only while no scan runs
  logic h_fill, h_inv, h_wr;
  assign h_fill = fill_valid && !host_block;
  assign h_inv  = inv_valid  && !host_block;
  assign h_wr   = (wr_valid || (in_valid && is_wb)) && !host_block;
  paddr_t w_addr;
  assign w_addr = wr_valid ? wr_addr : in_req.addr;

  // the scan reads and flushes the same set, so the flushed way's address is
  // on the scan read port in the flush cycle
  assign flushed_valid = flush_valid;
  assign flushed_addr  = l_addr[flush_way];

  cache_scan_ctrl #(.SETS(SETS), .WAYS(WAYS), .IS_LLC(IS_LLC)) u_ctrl (
    .clk, .rst_n,
    .in_valid(c_in_valid), .in_ready(c_in_ready), .in_req,
    .out_valid, .out_ready, .out_req,
    .sb_lookup_valid, .sb_lookup_scope, .sb_lookup_hit,
    .sb_insert_valid, .sb_insert_scope,
    .sbv_find_start(find_start), .sbv_find_found(find_found), .sbv_find_set(find_set),
    .scan_set, .scan_line_valid(l_valid), .scan_line_dirty(l_dirty),
    .scan_line_pim(l_pim), .scan_line_addr(l_addr),
    .flush_valid, .flush_set, .flush_way,
    .host_block,
    .stat_sb_hits, .stat_scans, .stat_scan_cycles, .stat_sets_visited,
    .stat_lines_flushed, .stat_writebacks
  );

  scope_buffer #(.SETS(SB_SETS), .WAYS(SB_WAYS)) u_sb (
    .clk, .rst_n,
    .lookup_valid(sb_lookup_valid), .lookup_scope(sb_lookup_scope), .lookup_hit(sb_lookup_hit),
    .insert_valid(sb_insert_valid), .insert_scope(sb_insert_scope),
    .erase_valid(h_fill), .erase_scope(scope_of(fill_addr)),
    .occupancy(sb_occupancy)
  );

  scope_bit_vector #(.NSETS(SETS)) u_sbv (
    .clk, .rst_n,
    .upd_valid, .upd_set, .upd_bit,
    .find_start, .find_found, .find_set,
    .bits(sbv_bits), .flagged(sbv_flagged)
  );

  cache_tag_array #(.SETS(SETS), .WAYS(WAYS)) u_tags (
    .clk, .rst_n,
    .fill_valid(h_fill), .fill_addr, .fill_pim, .fill_dirty,
    .evict_valid, .evict_addr, .evict_dirty, .evict_pim,
    .wr_valid(h_wr), .wr_addr(w_addr), .wr_hit,
    .inv_valid(h_inv), .inv_addr,
    .scan_set, .scan_line_valid(l_valid), .scan_line_dirty(l_dirty),
    .scan_line_pim(l_pim), .scan_line_addr(l_addr),
    .flush_valid, .flush_set, .flush_way,
    .upd_valid, .upd_set, .upd_bit
  );
endmodule
