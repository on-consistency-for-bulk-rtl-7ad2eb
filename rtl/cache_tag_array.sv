// cache_tag_array: metadata of one cache level, extended with the PIM-enabled
// bit per line that the scope bit-vector relies on.
//
// Each line holds valid, dirty, PIM-enabled and tag. The data array and the
// coherence protocol belong to the host cache and are not modelled here; the
// host's cache controller reports its fills, invalidations and write hits
// through the ports below, and this array keeps the metadata that the PIM
// scan needs. A fill picks a free way, else a per-set round-robin victim
// (the host's replacement policy is outside the scope of this design), and
// reports the displaced line. The PIM-enabled bit arrives with the fill: the
// page is marked PIM-enabled in its translation entry and the mark rides on
// each request.
//
// Every change of a set's contents (fill, invalidate, flush) produces an SBV
// update for that set in the same cycle: upd_bit = "some valid line of the
// set is still PIM-enabled", i.e. the recheck of the remaining lines after an
// eviction.
//
// Timing: all changes happen at the clock edge; evict_* and upd_* describe
// the change being made in the current cycle (combinational); the scan read
// port is combinational. At most one of fill, inv and flush may be active
// per cycle (the scan controller blocks the host cache while it scans).
// Defaults: the evaluated LLC, 2MB, 16 ways, 64B lines -> 2048 sets.
module cache_tag_array
  import pim_pkg::*;
#(
  parameter int unsigned SETS = 2048,
  parameter int unsigned WAYS = 16
) (
  input  logic clk,
  input  logic rst_n,
  // host fill (line brought into this cache)
  input  logic   fill_valid,
  input  paddr_t fill_addr,
  input  logic   fill_pim,
  input  logic   fill_dirty,
  output logic   evict_valid,       // a valid line was displaced by the fill
  output paddr_t evict_addr,
  output logic   evict_dirty,
  output logic   evict_pim,
  // host write hit: marks the line dirty
  input  logic   wr_valid,
  input  paddr_t wr_addr,
  output logic   wr_hit,
  // host invalidation (coherence)
  input  logic   inv_valid,
  input  paddr_t inv_addr,
  // scan read port
  input  logic [$clog2(SETS)-1:0] scan_set,
  output logic [WAYS-1:0]         scan_line_valid,
  output logic [WAYS-1:0]         scan_line_dirty,
  output logic [WAYS-1:0]         scan_line_pim,
  output paddr_t                  scan_line_addr [WAYS],
  // flush (invalidate) of one way by the scan controller
  input  logic                    flush_valid,
  input  logic [$clog2(SETS)-1:0] flush_set,
  input  logic [$clog2(WAYS)-1:0] flush_way,
  // SBV update for the set changed this cycle
  output logic                    upd_valid,
  output logic [$clog2(SETS)-1:0] upd_set,
  output logic                    upd_bit
);
  localparam int unsigned IDX_W = $clog2(SETS);
  localparam int unsigned WAY_W = $clog2(WAYS);
  localparam int unsigned TAG_W = LINE_W - IDX_W;
  typedef logic [IDX_W-1:0] idx_t;
  typedef logic [TAG_W-1:0] tag_t;
  typedef logic [WAY_W-1:0] way_t;

  logic [WAYS-1:0] valid_q [SETS];
  logic [WAYS-1:0] dirty_q [SETS];
  logic [WAYS-1:0] pim_q   [SETS];
  tag_t            tag_q   [SETS][WAYS];
  way_t            rr_q    [SETS];

  function automatic idx_t idx_of(paddr_t a);
    return a[LINE_OFF_W +: IDX_W];
  endfunction
  function automatic tag_t tag_of(paddr_t a);
    return a[PA_W-1 -: TAG_W];
  endfunction
  function automatic logic [WAYS-1:0] hits(paddr_t a);
    logic [WAYS-1:0] h;
    for (int w = 0; w < WAYS; w++)
      h[w] = valid_q[idx_of(a)][w] && tag_q[idx_of(a)][w] == tag_of(a);
    return h;
  endfunction
  function automatic way_t first_one(logic [WAYS-1:0] v);
    way_t r = '0;
    for (int w = WAYS-1; w >= 0; w--) if (v[w]) r = way_t'(w);
    return r;
  endfunction

  // ---------------- fill ----------------
  idx_t            f_set;
  logic [WAYS-1:0] f_hit;
  logic            f_present;
  way_t            f_way;
  assign f_set     = idx_of(fill_addr);
  assign f_hit     = hits(fill_addr);
  assign f_present = |f_hit;
  always_comb begin
    if (f_present)             f_way = first_one(f_hit);
    else if (~&valid_q[f_set]) f_way = first_one(~valid_q[f_set]);
    else                       f_way = rr_q[f_set];
  end
  assign evict_valid = fill_valid && !f_present && valid_q[f_set][f_way];
  assign evict_addr  = {tag_q[f_set][f_way], f_set, {LINE_OFF_W{1'b0}}};
  assign evict_dirty = dirty_q[f_set][f_way];
  assign evict_pim   = pim_q[f_set][f_way];

  // ---------------- write hit / invalidate ----------------
  logic [WAYS-1:0] w_hit, i_hit;
  assign w_hit  = hits(wr_addr);
  assign i_hit  = hits(inv_addr);
  assign wr_hit = wr_valid && |w_hit;

  // ---------------- scan read ----------------
  always_comb begin
    scan_line_valid = valid_q[scan_set];
    scan_line_dirty = dirty_q[scan_set];
    scan_line_pim   = pim_q[scan_set];
    for (int w = 0; w < WAYS; w++)
      scan_line_addr[w] = {tag_q[scan_set][w], scan_set, {LINE_OFF_W{1'b0}}};
  end

  // ---------------- SBV update ----------------
  always_comb begin
    logic [WAYS-1:0] v, p;
    upd_valid = 1'b0;
    upd_set   = '0;
    v = '0;
    p = '0;
    if (flush_valid) begin
      upd_valid = 1'b1;
      upd_set   = flush_set;
      v = valid_q[flush_set];
      p = pim_q[flush_set];
      v[flush_way] = 1'b0;
    end else if (fill_valid) begin
      upd_valid = 1'b1;
      upd_set   = f_set;
      v = valid_q[f_set];
      p = pim_q[f_set];
      v[f_way] = 1'b1;
      p[f_way] = fill_pim;
    end else if (inv_valid && |i_hit) begin
      upd_valid = 1'b1;
      upd_set   = idx_of(inv_addr);
      v = valid_q[idx_of(inv_addr)] & ~i_hit;
      p = pim_q[idx_of(inv_addr)];
    end
    upd_bit = |(v & p);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < SETS; s++) begin
        valid_q[s] <= '0;
        dirty_q[s] <= '0;
        pim_q[s]   <= '0;
        rr_q[s]    <= '0;
        for (int w = 0; w < WAYS; w++) tag_q[s][w] <= '0;
      end
    end else begin
      if (wr_valid)
        for (int w = 0; w < WAYS; w++)
          if (w_hit[w]) dirty_q[idx_of(wr_addr)][w] <= 1'b1;
      if (flush_valid) begin
        valid_q[flush_set][flush_way] <= 1'b0;
        dirty_q[flush_set][flush_way] <= 1'b0;
      end else if (fill_valid) begin
        valid_q[f_set][f_way] <= 1'b1;
        dirty_q[f_set][f_way] <= fill_dirty || (f_present && dirty_q[f_set][f_way]);
        pim_q[f_set][f_way]   <= fill_pim;
        tag_q[f_set][f_way]   <= tag_of(fill_addr);
        if (!f_present && &valid_q[f_set]) rr_q[f_set] <= rr_q[f_set] + 1'b1;
      end else if (inv_valid) begin
        for (int w = 0; w < WAYS; w++)
          if (i_hit[w]) begin
            valid_q[idx_of(inv_addr)][w] <= 1'b0;
            dirty_q[idx_of(inv_addr)][w] <= 1'b0;
          end
      end
    end
  end

  // One structural change per cycle.
  always_ff @(posedge clk)
    assert (32'(flush_valid) + 32'(fill_valid) + 32'(inv_valid) <= 1)
      else $error("cache_tag_array: more than one of fill/inv/flush in a cycle");
endmodule
