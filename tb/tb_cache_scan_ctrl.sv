// tb_cache_scan_ctrl: the scan controller at an LLC of 64 sets x 4 ways,
// wired to a scope buffer, an SBV and a tag array. Lines of three scopes are
// filled in; PIM ops and fences are then sent and the output stream is
// compared with what the coherence rules demand:
//  * a scope-buffer miss flushes every line of the op's scope; exactly the
//    dirty ones leave as writebacks, in set/way order, before the op;
//  * the scan takes one cycle per flagged set visited plus one per line
//    flushed (counted by a model of the SBV-guided walk);
//  * a second op to the scope hits the scope buffer and leaves two cycles
//    after it was taken, with no writebacks;
//  * filling a line of the scope erases it from the scope buffer again;
//  * scope-fences and fences end at the LLC;
//  * a stalled output holds its writeback until taken.
module tb_cache_scan_ctrl;
  import pim_pkg::*;
  localparam int SETS = 64, WAYS = 4;
  localparam int IW = $clog2(SETS), WW = $clog2(WAYS);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid = 0, in_ready, out_valid, out_ready = 1;
  mem_req_t in_req = '0, out_req;
  logic sb_lookup_valid, sb_lookup_hit, sb_insert_valid;
  scope_t sb_lookup_scope, sb_insert_scope;
  logic [IW-1:0] find_start, find_set, scan_set, flush_set, upd_set;
  logic find_found, flush_valid, upd_valid, upd_bit, host_block;
  logic [WW-1:0] flush_way;
  logic [WAYS-1:0] lv, ld, lp;
  paddr_t la [WAYS];
  logic [31:0] st_hits, st_scans, st_cycles, st_sets, st_lines, st_wb;
  logic fill_valid = 0, fill_pim = 0, fill_dirty = 0;
  paddr_t fill_addr = '0;

  cache_scan_ctrl #(.SETS(SETS), .WAYS(WAYS), .IS_LLC(1'b1)) dut (
    .clk, .rst_n, .in_valid, .in_ready, .in_req, .out_valid, .out_ready, .out_req,
    .sb_lookup_valid, .sb_lookup_scope, .sb_lookup_hit, .sb_insert_valid, .sb_insert_scope,
    .sbv_find_start(find_start), .sbv_find_found(find_found), .sbv_find_set(find_set),
    .scan_set, .scan_line_valid(lv), .scan_line_dirty(ld), .scan_line_pim(lp), .scan_line_addr(la),
    .flush_valid, .flush_set, .flush_way, .host_block,
    .stat_sb_hits(st_hits), .stat_scans(st_scans), .stat_scan_cycles(st_cycles),
    .stat_sets_visited(st_sets), .stat_lines_flushed(st_lines), .stat_writebacks(st_wb));

  logic [$clog2(SETS*WAYS+1)-1:0] occ;
  scope_buffer #(.SETS(16), .WAYS(2)) u_sb (
    .clk, .rst_n, .lookup_valid(sb_lookup_valid), .lookup_scope(sb_lookup_scope),
    .lookup_hit(sb_lookup_hit), .insert_valid(sb_insert_valid), .insert_scope(sb_insert_scope),
    .erase_valid(fill_valid), .erase_scope(scope_of(fill_addr)), .occupancy());
  logic [SETS-1:0] bits;
  scope_bit_vector #(.NSETS(SETS)) u_sbv (
    .clk, .rst_n, .upd_valid, .upd_set, .upd_bit, .find_start, .find_found, .find_set,
    .bits, .flagged());
  cache_tag_array #(.SETS(SETS), .WAYS(WAYS)) u_tags (
    .clk, .rst_n, .fill_valid, .fill_addr, .fill_pim, .fill_dirty,
    .evict_valid(), .evict_addr(), .evict_dirty(), .evict_pim(),
    .wr_valid(1'b0), .wr_addr('0), .wr_hit(), .inv_valid(1'b0), .inv_addr('0),
    .scan_set, .scan_line_valid(lv), .scan_line_dirty(ld), .scan_line_pim(lp), .scan_line_addr(la),
    .flush_valid, .flush_set, .flush_way, .upd_valid, .upd_set, .upd_bit);

  // reference content: per set, list of lines (addr, scope, dirty, pim), in way order
  typedef struct { paddr_t a; bit d; bit p; } line_t;
  line_t ref_lines [SETS][$];

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("%0t: FAIL %s", $time, what); end
  endtask

  function automatic paddr_t mk(int scope, int set, int tag);
    paddr_t a = '0;
    a[PA_W-1:SCOPE_OFF_W] = scope_t'(scope);
    a[LINE_OFF_W +: IW] = IW'(set);
    a[LINE_OFF_W+IW +: 4] = 4'(tag);
    return a;
  endfunction

  task automatic fill(int scope, int set, int tag, bit d, bit p);
    @(negedge clk);
    fill_valid = 1; fill_addr = mk(scope, set, tag); fill_dirty = d; fill_pim = p;
    ref_lines[set].push_back('{mk(scope, set, tag), d, p});
    @(negedge clk);
    fill_valid = 0;
  endtask

  // Expected writebacks and scan cycles of a scan for scope sc (updates the reference).
  task automatic expect_scan(int sc, ref paddr_t wbs[$], output int cycles);
    int ptr = 0;
    cycles = 0;
    forever begin
      int s = -1;
      bit matched = 0;
      for (int i = ptr; i < SETS; i++) begin
        foreach (ref_lines[i][k]) if (ref_lines[i][k].p) s = (s < 0) ? i : s;
        if (s >= 0) break;
      end
      cycles++;
      if (s < 0) break;
      foreach (ref_lines[s][k])
        if (!matched && ref_lines[s][k].p && int'(scope_of(ref_lines[s][k].a)) == sc) begin
          if (ref_lines[s][k].d) wbs.push_back(ref_lines[s][k].a);
          ref_lines[s].delete(k);
          matched = 1;
        end
      if (!matched) begin
        if (s == SETS-1) break;
        ptr = s + 1;
      end
    end
  endtask

  mem_req_t got [$];
  int got_cyc [$];
  int blocked_cycles = 0;
  int cyc = 0, acc_cyc = 0;
  always @(posedge clk) begin
    if (out_valid && out_ready) begin got.push_back(out_req); got_cyc.push_back(cyc); end
    if (in_valid && in_ready) acc_cyc = cyc;
    if (host_block) blocked_cycles++;
    cyc++;
  end
  // a stalled output must not change
  mem_req_t held;
  logic     was_stalled = 0;
  always @(posedge clk) begin
    if (was_stalled) check(out_valid && out_req == held, "stalled writeback held");
    was_stalled <= out_valid && !out_ready;
    held <= out_req;
  end

  task automatic send(op_e op, int scope, output int accept_cycle);
    @(negedge clk);
    in_valid = 1; in_req = '{op: op, addr: mk(scope, 0, 0), core: 3'd2};
    do @(posedge clk); while (!in_ready);
    @(negedge clk);
    accept_cycle = acc_cyc;
    in_valid = 0;
  endtask


  task automatic run_pim(int sc, bit random_ready, string tag);
    paddr_t wbs[$];
    int exp_cycles, c0, c_before, t0;
    expect_scan(sc, wbs, exp_cycles);
    got.delete();
    c_before = st_cycles;
    send(OP_PIM, sc, t0);
    fork
      begin
        while (got.size() == 0 || got[got.size()-1].op != OP_PIM) begin
          @(negedge clk);
          if (random_ready) out_ready = $urandom_range(0, 1); else out_ready = 1;
        end
        out_ready = 1;
      end
      begin repeat (2000) @(posedge clk); end
    join_any
    disable fork;
    out_ready = 1;
    check(got.size() == wbs.size() + 1, $sformatf("%s: %0d outputs, expected %0d", tag, got.size(), wbs.size()+1));
    for (int i = 0; i < wbs.size() && i < got.size(); i++)
      check(got[i].op == OP_WRITEBACK && got[i].addr == wbs[i], $sformatf("%s: writeback %0d", tag, i));
    if (got.size() > 0) check(got[got.size()-1].op == OP_PIM, $sformatf("%s: PIM op forwarded last", tag));
    if (!random_ready)
      check(int'(st_cycles) - c_before == exp_cycles,
            $sformatf("%s: scan took %0d cycles, expected %0d", tag, int'(st_cycles) - c_before, exp_cycles));
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t0, t1, wb_before, scans_before;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // scope 5: six lines; scope 9: three lines; scope 2: non-PIM lines
    fill(5, 3, 1, 1, 1);  fill(9, 3, 2, 1, 1);  fill(5, 3, 3, 0, 1);
    fill(5, 10, 1, 1, 1); fill(9, 10, 4, 0, 1);
    fill(2, 7, 1, 1, 0);  fill(5, 20, 5, 0, 1); fill(2, 20, 6, 1, 0);
    fill(5, 40, 7, 1, 1); fill(9, 50, 8, 1, 1); fill(5, 63, 9, 1, 1);

    scans_before = st_scans;
    run_pim(5, 0, "scan 1");
    check(st_scans == scans_before + 1, "scope-buffer miss started a scan");
    check(blocked_cycles > 0, "cache blocked during scan");
    check(st_sets < SETS, "SBV skipped unflagged sets");

    // second op: scope-buffer hit, no scan, forwarded two cycles after acceptance
    got.delete();
    got_cyc.delete();
    wb_before = st_wb;
    send(OP_PIM, 5, t0);
    wait (got.size() == 1);
    t1 = got_cyc[0];
    check(got[0].op == OP_PIM && st_wb == wb_before && st_hits == 1, "hit forwards without scan");
    check(t1 - t0 == 2, $sformatf("hit latency %0d cycles, expected 2", t1 - t0));

    // a new line of scope 5 erases it from the scope buffer: the next op scans again
    fill(5, 33, 2, 1, 1);
    run_pim(5, 1, "scan 2 (stalling output)");

    // scope 9 scan with the non-PIM lines present
    run_pim(9, 0, "scan 3");

    // fences end at the LLC
    got.delete();
    fill(9, 12, 1, 1, 1);
    send(OP_SCOPE_FENCE, 9, t0);
    repeat (40) @(posedge clk);
    check(got.size() == 1 && got[0].op == OP_WRITEBACK, "scope-fence flushes and ends at the LLC");
    got.delete();
    send(OP_FENCE, 9, t0);
    repeat (10) @(posedge clk);
    check(got.size() == 0, "fence ends at the LLC");
    $display("scans=%0d sb_hits=%0d scan_cycles=%0d lines_flushed=%0d writebacks=%0d",
             st_scans, st_hits, st_cycles, st_lines, st_wb);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
