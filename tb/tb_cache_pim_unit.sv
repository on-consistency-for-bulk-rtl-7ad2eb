// tb_cache_pim_unit: an L1-configured unit (16 sets x 4 ways, 4x1 scope
// buffer, no PIM-op scans), as used by the scope-relaxed model. Checked:
//  * a PIM op passes through without a scan even with lines of its scope
//    cached;
//  * a writeback arriving on the op stream marks the line dirty;
//  * a scope-fence scans, sends that line as a writeback, then goes on;
//    the cache is blocked meanwhile;
//  * a second scope-fence hits the scope buffer and passes with no scan;
//  * a fill of a line of the scope erases the scope from the scope
//    buffer, so the next scope-fence scans again;
//  * every line the scan drops is reported on the flushed port, with its
//    address;
//  * a fill into a full set reports the displaced line.
module tb_cache_pim_unit;
  import pim_pkg::*;
  localparam int SETS = 16, WAYS = 4, IW = $clog2(SETS);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid = 0, in_ready, out_valid, out_ready = 1;
  mem_req_t in_req = '0, out_req;
  logic fill_valid = 0, fill_pim = 0, fill_dirty = 0, wr_valid = 0, inv_valid = 0;
  paddr_t fill_addr = '0, wr_addr = '0, inv_addr = '0, evict_addr;
  logic evict_valid, evict_dirty, host_block, flushed_valid;
  paddr_t flushed_addr;
  logic [31:0] s_hits, s_scans, s_cyc, s_sets, s_lines, s_wb;
  logic [$clog2(SETS+1)-1:0] flagged;

  cache_pim_unit #(.SETS(SETS), .WAYS(WAYS), .SB_SETS(4), .SB_WAYS(1), .IS_LLC(1'b0)) dut (
    .clk, .rst_n, .in_valid, .in_ready, .in_req, .out_valid, .out_ready, .out_req,
    .fill_valid, .fill_addr, .fill_pim, .fill_dirty, .evict_valid, .evict_addr, .evict_dirty,
    .wr_valid, .wr_addr, .inv_valid, .inv_addr, .host_block, .flushed_valid, .flushed_addr,
    .stat_sb_hits(s_hits), .stat_scans(s_scans), .stat_scan_cycles(s_cyc),
    .stat_sets_visited(s_sets), .stat_lines_flushed(s_lines), .stat_writebacks(s_wb),
    .sbv_flagged(flagged));

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

  mem_req_t got [$];
  int blocked = 0, evicts = 0;
  paddr_t last_evict;
  paddr_t flushed [$];
  always @(posedge clk) begin
    if (out_valid && out_ready) got.push_back(out_req);
    if (host_block) blocked++;
    if (evict_valid) begin evicts++; last_evict = evict_addr; end
    if (flushed_valid) flushed.push_back(flushed_addr);
  end

  task automatic fill(int scope, int set, int tag, bit p);
    @(negedge clk);
    fill_valid = 1; fill_addr = mk(scope, set, tag); fill_pim = p; fill_dirty = 0;
    @(negedge clk);
    fill_valid = 0;
  endtask

  task automatic send(op_e op, paddr_t a);
    @(negedge clk);
    in_valid = 1; in_req = '{op: op, addr: a, core: 3'd1};
    do @(posedge clk); while (!in_ready);
    @(negedge clk);
    in_valid = 0;
  endtask

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    fill(5, 1, 1, 1); fill(5, 2, 1, 1); fill(6, 2, 2, 1); fill(3, 4, 1, 0);
    check(flagged == 2, "SBV flags the two sets with PIM lines");

    send(OP_PIM, mk(5, 0, 0));
    repeat (5) @(posedge clk);
    check(got.size() == 1 && got[0].op == OP_PIM && s_scans == 0, "L1 forwards PIM op without scan");
    got.delete();

    send(OP_WRITEBACK, mk(5, 1, 1));   // line written back from above: now dirty here
    repeat (2) @(posedge clk);
    check(got.size() == 0, "op-stream writeback absorbed");

    send(OP_SCOPE_FENCE, mk(5, 0, 0));
    repeat (20) @(posedge clk);
    check(got.size() == 2, $sformatf("scope-fence: %0d outputs, expected 2", got.size()));
    if (got.size() == 2) begin
      check(got[0].op == OP_WRITEBACK && got[0].addr == mk(5, 1, 1), "dirty line written back");
      check(got[1].op == OP_SCOPE_FENCE, "scope-fence forwarded after the flush");
    end
    check(s_scans == 1 && s_lines == 2 && blocked > 0, "scan flushed both lines with the cache blocked");
    check(flushed.size() == 2, $sformatf("%0d flush reports, expected 2", flushed.size()));
    if (flushed.size() == 2)
      check(flushed[0] == mk(5, 1, 1) && flushed[1] == mk(5, 2, 1), "flush reports carry the lines' addresses");
    check(flagged == 1, "only the set with the other scope's line stays flagged");
    got.delete();

    send(OP_SCOPE_FENCE, mk(5, 0, 0));
    repeat (5) @(posedge clk);
    check(got.size() == 1 && got[0].op == OP_SCOPE_FENCE && s_hits == 1 && s_scans == 1,
          "second scope-fence hits the scope buffer");

    got.delete();
    fill(5, 3, 2, 1);       // a new line of scope 5 makes its scope-buffer entry stale
    send(OP_SCOPE_FENCE, mk(5, 0, 0));
    repeat (10) @(posedge clk);
    check(flushed.size() == 3 && flushed[2] == mk(5, 3, 2), "rescan reports the newly filled line");
    check(s_scans == 2 && s_lines == 3, "a fill of the scope forces the next scope-fence to scan");
    for (int t = 0; t < 5; t++) fill(7, 9, t, 0);
    check(evicts == 1 && last_evict == mk(7, 9, 0), "fill into a full set evicts a line");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
