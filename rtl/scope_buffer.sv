// scope_buffer: a small set-associative store of the scopes whose lines were
// recently flushed from the cache it sits beside.
//
// When a PIM op reaches the cache, its scope is looked up here. A hit means
// no line of that scope has entered the cache since the last scan, so the op
// may go on without a scan. A miss starts a scan; when the scan is done the
// scope is inserted. Whenever a line is inserted into the cache, its scope is
// erased from the buffer. A full set is refilled by overwriting its least
// recently used entry, with nothing written back.
//
// Structure: SETS sets x WAYS ways, indexed by the low bits of the scope
// number, tagged with the rest. LRU is kept as an age rank per way (0 = most
// recently used). Defaults are the LLC scope buffer of the evaluated system:
// 64 sets, 4 ways (the L1 one is 16 sets, 1 way).
//
// Interface and timing: lookup is combinational (lookup_hit in the same
// cycle); a hit with lookup_valid refreshes the entry's LRU age at the clock
// edge. insert and erase take effect at the next clock edge. If an insert and
// an erase of the same scope meet in one cycle, the erase wins, since the
// inserted line makes the scope stale again. Reset empties the buffer.
module scope_buffer
  import pim_pkg::*;
#(
  parameter int unsigned SETS = 64,
  parameter int unsigned WAYS = 4
) (
  input  logic   clk,
  input  logic   rst_n,
  // PIM op lookup
  input  logic   lookup_valid,
  input  scope_t lookup_scope,
  output logic   lookup_hit,
  // insert after a completed scan
  input  logic   insert_valid,
  input  scope_t insert_scope,
  // erase on insertion of a cache line of this scope
  input  logic   erase_valid,
  input  scope_t erase_scope,
  // occupancy, for statistics
  output logic [$clog2(SETS*WAYS+1)-1:0] occupancy
);
  localparam int unsigned IDX_W = $clog2(SETS);
  localparam int unsigned TAG_W = SCOPE_W - IDX_W;
  localparam int unsigned AGE_W = (WAYS > 1) ? $clog2(WAYS) : 1;

  typedef logic [IDX_W-1:0] idx_t;
  typedef logic [TAG_W-1:0] tag_t;
  typedef logic [AGE_W-1:0] age_t;

  logic [WAYS-1:0] valid_q [SETS];
  tag_t            tag_q   [SETS][WAYS];
  age_t            age_q   [SETS][WAYS];

  function automatic idx_t idx_of(scope_t s);
    return s[IDX_W-1:0];
  endfunction
  function automatic tag_t tag_of(scope_t s);
    return s[SCOPE_W-1:IDX_W];
  endfunction

  // Matching way (one-hot) of a scope in its set.
  function automatic logic [WAYS-1:0] match(scope_t s);
    logic [WAYS-1:0] m;
    for (int w = 0; w < WAYS; w++)
      m[w] = valid_q[idx_of(s)][w] && (tag_q[idx_of(s)][w] == tag_of(s));
    return m;
  endfunction

  logic [WAYS-1:0] lk_match, ins_match, er_match;
  assign lk_match  = match(lookup_scope);
  assign ins_match = match(insert_scope);
  assign er_match  = match(erase_scope);
  assign lookup_hit = |lk_match;

  // Way chosen for an insert: existing entry, else a free way, else the LRU one.
  age_t ins_way;
  always_comb begin
    idx_t s;
    s = idx_of(insert_scope);
    ins_way = '0;
    for (int w = WAYS-1; w >= 0; w--)
      if (age_q[s][w] == age_t'(WAYS-1)) ins_way = age_t'(w);
    for (int w = WAYS-1; w >= 0; w--)
      if (!valid_q[s][w]) ins_way = age_t'(w);
    for (int w = WAYS-1; w >= 0; w--)
      if (ins_match[w]) ins_way = age_t'(w);
  end

  logic do_insert;
  assign do_insert = insert_valid && !(erase_valid && erase_scope == insert_scope);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < SETS; s++) begin
        valid_q[s] <= '0;
        for (int w = 0; w < WAYS; w++) begin
          tag_q[s][w] <= '0;
          age_q[s][w] <= age_t'(w);
        end
      end
    end else begin
      // LRU refresh on a lookup hit
      if (lookup_valid && lookup_hit &&
          !(do_insert && idx_of(insert_scope) == idx_of(lookup_scope))) begin
        for (int w = 0; w < WAYS; w++) begin
          if (lk_match[w]) age_q[idx_of(lookup_scope)][w] <= '0;
          else for (int v = 0; v < WAYS; v++)
            if (lk_match[v] && age_q[idx_of(lookup_scope)][w] < age_q[idx_of(lookup_scope)][v])
              age_q[idx_of(lookup_scope)][w] <= age_q[idx_of(lookup_scope)][w] + 1'b1;
        end
      end
      if (do_insert) begin
        for (int w = 0; w < WAYS; w++) begin
          if (w == int'(ins_way)) begin
            valid_q[idx_of(insert_scope)][w] <= 1'b1;
            tag_q[idx_of(insert_scope)][w]   <= tag_of(insert_scope);
            age_q[idx_of(insert_scope)][w]   <= '0;
          end else if (age_q[idx_of(insert_scope)][w] <
                       age_q[idx_of(insert_scope)][ins_way]) begin
            age_q[idx_of(insert_scope)][w] <= age_q[idx_of(insert_scope)][w] + 1'b1;
          end
        end
      end
      if (erase_valid) begin
        for (int w = 0; w < WAYS; w++)
          if (er_match[w]) valid_q[idx_of(erase_scope)][w] <= 1'b0;
      end
    end
  end

  always_comb begin
    occupancy = '0;
    for (int s = 0; s < SETS; s++)
      for (int w = 0; w < WAYS; w++)
        occupancy += valid_q[s][w];
  end

  // A scope is never held in two ways of its set.
  always_ff @(posedge clk)
    assert ($countones(lk_match) <= 1)
      else $error("scope_buffer: scope held in two ways");
endmodule
