// pim_consistency_top: the host memory-subsystem path of PIM operations,
// from the cores' entry points to the memory controller, for one of the
// four PIM consistency models (MODEL, default the scope model).
//
//   core c --> entry_point[c] --+--> loads/stores: mem_* ports (host caches)
//                               +--> PIM ops, fences: PIM path
//   PIM path: [L1 cache_pim_unit[c], scope-relaxed only] --> req_arbiter
//             --> LLC cache_pim_unit --> mc_ack_queue --> mc_* ports
//   mc_ack_queue ACK --> entry_point[ack core]   (not in scope-relaxed)
//
// Each entry point holds back what its model forbids to pass an outstanding
// PIM op. At the LLC a PIM op looks up its scope in the scope buffer; on a
// miss the LLC is scanned (only the sets flagged in the scope bit-vector)
// and the scope's lines are flushed, their writebacks travelling ahead of
// the op; then the op enters the memory controller queue, which ACKs it. In
// the scope-relaxed model each core's L1 also has a scope buffer and SBV;
// PIM ops pass it unscanned, scope-fences scan it, and no ACK is used.
//
// The host's own parts are outside: its cores, the cache data arrays and
// coherence protocol, the memory scheduler, DRAM and the PIM module. The
// caches report fills, writes and invalidations on the llc_* and l1_* ports
// and must hold them while the matching *_host_block output is high; memory
// operations and scan writebacks leave on mc_*.
//
// Defaults follow the evaluated system: 6 cores, 2MB 16-way LLC (2048 sets)
// with a 64-set 4-way scope buffer, 16KB 4-way L1 (64 sets) with a 16-set
// 1-way scope buffer. Buffer depths are this design's assumptions.
module pim_consistency_top
  import pim_pkg::*;
#(
  parameter model_e      MODEL       = MODEL_SCOPE,
  parameter int unsigned NUM_CORES   = 6,
  parameter int unsigned LLC_SETS    = 2048,
  parameter int unsigned LLC_WAYS    = 16,
  parameter int unsigned LLC_SB_SETS = 64,
  parameter int unsigned LLC_SB_WAYS = 4,
  parameter int unsigned L1_SETS     = 64,
  parameter int unsigned L1_WAYS     = 4,
  parameter int unsigned L1_SB_SETS  = 16,
  parameter int unsigned L1_SB_WAYS  = 1,
  parameter int unsigned EP_DEPTH    = 8,
  parameter int unsigned MCQ_DEPTH   = 16
) (
  input  logic     clk,
  input  logic     rst_n,
  // cores, at commit
  input  logic [NUM_CORES-1:0] core_valid,
  output logic [NUM_CORES-1:0] core_ready,
  input  mem_req_t             core_req [NUM_CORES],
  // loads and stores released to the host caches
  output logic [NUM_CORES-1:0] mem_valid,
  input  logic [NUM_CORES-1:0] mem_ready,
  output mem_req_t             mem_req [NUM_CORES],
  // L1 events (used in the scope-relaxed model only)
  input  logic [NUM_CORES-1:0] l1_fill_valid,
  input  paddr_t               l1_fill_addr [NUM_CORES],
  input  logic [NUM_CORES-1:0] l1_fill_pim,
  input  logic [NUM_CORES-1:0] l1_fill_dirty,
  input  logic [NUM_CORES-1:0] l1_wr_valid,
  input  paddr_t               l1_wr_addr [NUM_CORES],
  input  logic [NUM_CORES-1:0] l1_inv_valid,
  input  paddr_t               l1_inv_addr [NUM_CORES],
  output logic [NUM_CORES-1:0] l1_host_block,
  output logic [NUM_CORES-1:0] l1_flushed_valid,
  output paddr_t               l1_flushed_addr [NUM_CORES],
  // LLC events
  input  logic     llc_fill_valid,
  input  paddr_t   llc_fill_addr,
  input  logic     llc_fill_pim,
  input  logic     llc_fill_dirty,
  output logic     llc_evict_valid,
  output paddr_t   llc_evict_addr,
  output logic     llc_evict_dirty,
  input  logic     llc_wr_valid,
  input  paddr_t   llc_wr_addr,
  input  logic     llc_inv_valid,
  input  paddr_t   llc_inv_addr,
  output logic     llc_host_block,
  output logic     llc_flushed_valid,
  output paddr_t   llc_flushed_addr,
  // to the memory scheduler / PIM module
  output logic     mc_valid,
  input  logic     mc_ready,
  output mem_req_t mc_req,
  // statistics
  output logic [31:0] llc_sb_hits,
  output logic [31:0] llc_scans,
  output logic [31:0] llc_scan_cycles,
  output logic [31:0] llc_sets_visited,
  output logic [31:0] llc_lines_flushed,
  output logic [31:0] llc_writebacks,
  output logic [31:0] l1_scans [NUM_CORES],
  output logic [31:0] ep_held_cycles [NUM_CORES],
  output logic [31:0] ep_bypasses [NUM_CORES],
  output logic [31:0] ep_acks [NUM_CORES],
  output logic [$clog2(MCQ_DEPTH+1)-1:0] mcq_level
);
  localparam bit RELAXED = (MODEL == MODEL_SCOPE_RELAXED);

  // ---------------- memory controller queue and ACK ----------------
  logic     llc_out_valid, llc_out_ready;
  mem_req_t llc_out_req;
  logic     ack_valid;
  core_id_t ack_core;
  scope_t   ack_scope;

  // ---------------- PIM path from the cores ----------------
  logic [NUM_CORES-1:0] pp_valid, pp_ready;     // entry point -> PIM path
  logic [NUM_CORES-1:0] arb_valid, arb_ready;   // -> arbiter
  mem_req_t             ep_out [NUM_CORES];
  mem_req_t             arb_req [NUM_CORES];

  for (genvar c = 0; c < NUM_CORES; c++) begin : g_core
    logic ep_valid, ep_ready, to_pim;
    logic [$clog2(EP_DEPTH+1)-1:0] outstanding;
    entry_point #(.MODEL(MODEL), .DEPTH(EP_DEPTH), .OUT_DEPTH(EP_DEPTH)) u_ep (
      .clk, .rst_n,
      .in_valid(core_valid[c]), .in_ready(core_ready[c]), .in_req(core_req[c]),
      .out_valid(ep_valid), .out_ready(ep_ready), .out_req(ep_out[c]),
      .ack_valid(ack_valid && ack_core == core_id_t'(c)), .ack_scope,
      .outstanding,
      .stat_held_cycles(ep_held_cycles[c]), .stat_bypasses(ep_bypasses[c]),
      .stat_acks(ep_acks[c])
    );
    assign to_pim       = ep_out[c].op != OP_LOAD && ep_out[c].op != OP_STORE;
    assign pp_valid[c]  = ep_valid && to_pim;
    assign mem_valid[c] = ep_valid && !to_pim;
    assign mem_req[c]   = ep_out[c];
    assign ep_ready     = to_pim ? pp_ready[c] : mem_ready[c];

    if (RELAXED) begin : g_l1
      logic [31:0] s_hits, s_cyc, s_sets, s_lines, s_wb;
      logic [$clog2(L1_SETS+1)-1:0] s_flag;
      logic l1_evict_valid, l1_evict_dirty;
      paddr_t l1_evict_addr;
      cache_pim_unit #(.SETS(L1_SETS), .WAYS(L1_WAYS), .SB_SETS(L1_SB_SETS),
                       .SB_WAYS(L1_SB_WAYS), .IS_LLC(1'b0)) u_l1 (
        .clk, .rst_n,
        .in_valid(pp_valid[c]), .in_ready(pp_ready[c]), .in_req(ep_out[c]),
        .out_valid(arb_valid[c]), .out_ready(arb_ready[c]), .out_req(arb_req[c]),
        .fill_valid(l1_fill_valid[c]), .fill_addr(l1_fill_addr[c]),
        .fill_pim(l1_fill_pim[c]), .fill_dirty(l1_fill_dirty[c]),
        .evict_valid(l1_evict_valid), .evict_addr(l1_evict_addr), .evict_dirty(l1_evict_dirty),
        .wr_valid(l1_wr_valid[c]), .wr_addr(l1_wr_addr[c]),
        .inv_valid(l1_inv_valid[c]), .inv_addr(l1_inv_addr[c]),
        .host_block(l1_host_block[c]),
        .flushed_valid(l1_flushed_valid[c]), .flushed_addr(l1_flushed_addr[c]),
        .stat_sb_hits(s_hits), .stat_scans(l1_scans[c]), .stat_scan_cycles(s_cyc),
        .stat_sets_visited(s_sets), .stat_lines_flushed(s_lines), .stat_writebacks(s_wb),
        .sbv_flagged(s_flag)
      );
    end else begin : g_no_l1
      assign arb_valid[c]     = pp_valid[c];
      assign pp_ready[c]      = arb_ready[c];
      assign arb_req[c]       = ep_out[c];
      assign l1_host_block[c] = 1'b0;
      assign l1_flushed_valid[c] = 1'b0;
      assign l1_flushed_addr[c]  = '0;
      assign l1_scans[c]      = '0;
    end
  end

  logic     llc_in_valid, llc_in_ready;
  mem_req_t llc_in_req;
  req_arbiter #(.N(NUM_CORES)) u_arb (
    .clk, .rst_n,
    .in_valid(arb_valid), .in_ready(arb_ready), .in_req(arb_req),
    .out_valid(llc_in_valid), .out_ready(llc_in_ready), .out_req(llc_in_req)
  );

  logic [$clog2(LLC_SETS+1)-1:0] llc_sbv_flagged;
  cache_pim_unit #(.SETS(LLC_SETS), .WAYS(LLC_WAYS), .SB_SETS(LLC_SB_SETS),
                   .SB_WAYS(LLC_SB_WAYS), .IS_LLC(1'b1)) u_llc (
    .clk, .rst_n,
    .in_valid(llc_in_valid), .in_ready(llc_in_ready), .in_req(llc_in_req),
    .out_valid(llc_out_valid), .out_ready(llc_out_ready), .out_req(llc_out_req),
    .fill_valid(llc_fill_valid), .fill_addr(llc_fill_addr),
    .fill_pim(llc_fill_pim), .fill_dirty(llc_fill_dirty),
    .evict_valid(llc_evict_valid), .evict_addr(llc_evict_addr), .evict_dirty(llc_evict_dirty),
    .wr_valid(llc_wr_valid), .wr_addr(llc_wr_addr),
    .inv_valid(llc_inv_valid), .inv_addr(llc_inv_addr),
    .host_block(llc_host_block),
    .flushed_valid(llc_flushed_valid), .flushed_addr(llc_flushed_addr),
    .stat_sb_hits(llc_sb_hits), .stat_scans(llc_scans), .stat_scan_cycles(llc_scan_cycles),
    .stat_sets_visited(llc_sets_visited), .stat_lines_flushed(llc_lines_flushed),
    .stat_writebacks(llc_writebacks), .sbv_flagged(llc_sbv_flagged)
  );

  mc_ack_queue #(.DEPTH(MCQ_DEPTH), .NEEDS_ACK(!RELAXED)) u_mcq (
    .clk, .rst_n,
    .in_valid(llc_out_valid), .in_ready(llc_out_ready), .in_req(llc_out_req),
    .out_valid(mc_valid), .out_ready(mc_ready), .out_req(mc_req),
    .ack_valid, .ack_core, .ack_scope,
    .level(mcq_level)
  );
endmodule
