// tb_top_scope_relaxed: the whole PIM path in the scope-relaxed model, at a
// reduced size (2 cores, 64x4 LLC, 16x4 L1), where every cache level has a
// scope buffer and SBV and no ACKs are used.
//
// A dirty line of scope 20 sits in core 0's L1 (and, clean, in the LLC);
// a clean line of scope 10 sits in the L1. Core 0 issues
// PIM 10, SCOPE-FENCE 20, PIM 20, LOAD 20. Checked:
//  * PIM 10 passes the L1 without a scan;
//  * the scope-fence scans the L1, whose writeback marks the LLC line
//    dirty; the scope-fence then misses in the LLC scope buffer and scans
//    the LLC, which sends that line to memory; the fence itself ends at
//    the LLC and never reaches memory;
//  * PIM 20 then hits the LLC scope buffer and reaches memory after the
//    writeback;
//  * no ACK is produced.
module tb_top_scope_relaxed;
  import pim_pkg::*;
  localparam int NC = 2;
  localparam int LIW = 6;   // LLC set bits
  localparam int L1IW = 4;  // L1 set bits
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [NC-1:0] core_valid, core_ready, mem_valid, mem_ready = '1;
  mem_req_t core_req [NC], mem_req [NC];
  logic [NC-1:0] l1_fill_valid = '0, l1_fill_pim = '0, l1_fill_dirty = '0, l1_wr_valid = '0,
                 l1_inv_valid = '0, l1_host_block;
  paddr_t l1_fill_addr [NC], l1_wr_addr [NC], l1_inv_addr [NC];
  logic llc_fill_valid = 0, llc_fill_pim = 0, llc_fill_dirty = 0, llc_evict_valid, llc_evict_dirty;
  logic llc_wr_valid = 0, llc_inv_valid = 0, llc_host_block, llc_flushed_valid;
  paddr_t llc_flushed_addr, l1_flushed_addr [NC];
  logic [NC-1:0] l1_flushed_valid;
  paddr_t llc_fill_addr = '0, llc_evict_addr, llc_wr_addr = '0, llc_inv_addr = '0;
  logic mc_valid, mc_ready = 1;
  mem_req_t mc_req;
  logic [31:0] llc_sb_hits, llc_scans, llc_scan_cycles, llc_sets_visited, llc_lines_flushed, llc_writebacks;
  logic [31:0] l1_scans [NC], ep_held_cycles [NC], ep_bypasses [NC], ep_acks [NC];
  logic [4:0] mcq_level;

  pim_consistency_top #(.MODEL(MODEL_SCOPE_RELAXED), .NUM_CORES(NC), .LLC_SETS(64), .LLC_WAYS(4),
                        .LLC_SB_SETS(16), .LLC_SB_WAYS(2), .L1_SETS(16), .L1_WAYS(4),
                        .L1_SB_SETS(4), .L1_SB_WAYS(1)) dut (.*);

  initial for (int c = 0; c < NC; c++) begin
    l1_fill_addr[c] = '0; l1_wr_addr[c] = '0; l1_inv_addr[c] = '0;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("%0t: FAIL %s", $time, what); end
  endtask

  // a line address valid for both cache sizes: same set bits in L1 and LLC
  function automatic paddr_t mk(int scope, int set, int tag);
    paddr_t a = '0;
    a[PA_W-1:SCOPE_OFF_W] = scope_t'(scope);
    a[LINE_OFF_W +: L1IW] = L1IW'(set);
    a[LINE_OFF_W+LIW +: 3] = 3'(tag);
    return a;
  endfunction

  mem_req_t prog [NC][$];
  always @(posedge clk) if (rst_n)
    for (int c = 0; c < NC; c++) if (core_valid[c] && core_ready[c]) void'(prog[c].pop_front());
  always_comb for (int c = 0; c < NC; c++) begin
    core_valid[c] = prog[c].size() > 0;
    core_req[c]   = (prog[c].size() > 0) ? prog[c][0] : '0;
  end

  mem_req_t mc_seen [$];
  int l1_block = 0;
  paddr_t l1_flushes [$];
  always @(posedge clk) if (rst_n) begin
    if (l1_flushed_valid[0]) l1_flushes.push_back(l1_flushed_addr[0]);
    if (mc_valid && mc_ready) mc_seen.push_back(mc_req);
    if (l1_host_block[0]) l1_block++;
  end

  function automatic mem_req_t r(op_e op, int scope, int set);
    mem_req_t x = '0;
    x.op = op; x.addr = mk(scope, set, 1); x.core = '0;
    return x;
  endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    llc_fill_valid = 1; llc_fill_addr = mk(20, 3, 1); llc_fill_pim = 1; llc_fill_dirty = 0;
    l1_fill_valid[0] = 1; l1_fill_addr[0] = mk(20, 3, 1); l1_fill_pim[0] = 1; l1_fill_dirty[0] = 1;
    @(negedge clk);
    llc_fill_addr = mk(10, 5, 2);
    l1_fill_addr[0] = mk(10, 5, 2); l1_fill_dirty[0] = 0;
    @(negedge clk);
    llc_fill_valid = 0; l1_fill_valid = '0;

    prog[0].push_back(r(OP_PIM, 10, 0));
    repeat (20) @(posedge clk);
    check(l1_scans[0] == 0, "PIM op passes the L1 without a scan");
    check(mc_seen.size() == 1 && mc_seen[0].op == OP_PIM, "PIM 10 reached memory (clean lines: no writeback)");
    mc_seen.delete();

    prog[0].push_back(r(OP_SCOPE_FENCE, 20, 0));
    prog[0].push_back(r(OP_PIM, 20, 0));
    prog[0].push_back(r(OP_LOAD, 20, 3));
    repeat (60) @(posedge clk);
    check(l1_scans[0] == 1 && l1_block > 0, "scope-fence scanned the L1");
    check(l1_flushes.size() == 1 && l1_flushes[0] == mk(20, 3, 1), "L1 reported the one line it dropped");
    check(mc_seen.size() == 2, $sformatf("%0d operations reached memory, expected 2", mc_seen.size()));
    if (mc_seen.size() == 2) begin
      check(mc_seen[0].op == OP_WRITEBACK && mc_seen[0].addr == mk(20, 3, 1),
            "L1 dirty line reached memory through the LLC scan");
      check(mc_seen[1].op == OP_PIM, "PIM 20 after the writeback");
    end
    foreach (mc_seen[i]) check(mc_seen[i].op != OP_SCOPE_FENCE, "scope-fence ends at the LLC");
    check(llc_sb_hits >= 1, "PIM 20 hit the LLC scope buffer filled by the fence");
    check(ep_acks[0] == 0, "no ACKs in the scope-relaxed model");
    check(prog[0].size() == 0, "core drained");
    $display("l1_scans=%0d llc_scans=%0d llc_sb_hits=%0d llc_writebacks=%0d", l1_scans[0], llc_scans,
             llc_sb_hits, llc_writebacks);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
