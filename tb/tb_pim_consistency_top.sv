// tb_pim_consistency_top: the whole PIM path at its default size (scope
// model, 6 cores, 2048-set x 16-way LLC with a 64x4 scope buffer, 16-deep
// memory controller queue), end to end.
//
// The LLC is preloaded with lines of scopes 10 and 11 (PIM-enabled, some
// dirty) and of scope 3 (not PIM-enabled). Core 0 then issues
// PIM 10, LOAD 10, LOAD 11, PIM 10, PIM 11; core 1 issues twenty PIM ops to
// scope 12 while the memory side is stalled, so the controller queue fills
// and back-pressure reaches the LLC and the entry point. Checked:
//  * the dirty scope-10 lines leave as writebacks before the first PIM 10;
//  * LOAD 10 is released only after PIM 10 is ACKed, LOAD 11 before it;
//  * every PIM op reaches the memory side exactly once, per core in order;
//  * each mechanism happened at least once: scope-buffer hit, scan, SBV
//    skipping sets, flush writeback, entry-point hold, bypass, ACK, full
//    controller queue, LLC blocked during a scan;
//  * each of the five PIM-enabled lines is reported once as flushed.
module tb_pim_consistency_top;
  import pim_pkg::*;
  localparam int NC = 6;
  localparam int IW = 11;   // log2 of the 2048 LLC sets
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [NC-1:0] core_valid = '0, core_ready, mem_valid, mem_ready = '1;
  mem_req_t core_req [NC], mem_req [NC];
  logic [NC-1:0] l1_fill_valid = '0, l1_fill_pim = '0, l1_fill_dirty = '0, l1_wr_valid = '0,
                 l1_inv_valid = '0, l1_host_block;
  paddr_t l1_fill_addr [NC], l1_wr_addr [NC], l1_inv_addr [NC];
  logic llc_fill_valid = 0, llc_fill_pim = 0, llc_fill_dirty = 0, llc_evict_valid, llc_evict_dirty;
  logic llc_wr_valid = 0, llc_inv_valid = 0, llc_host_block, llc_flushed_valid;
  paddr_t llc_flushed_addr, l1_flushed_addr [NC];
  logic [NC-1:0] l1_flushed_valid;
  paddr_t llc_fill_addr = '0, llc_evict_addr, llc_wr_addr = '0, llc_inv_addr = '0;
  logic mc_valid, mc_ready = 0;
  mem_req_t mc_req;
  logic [31:0] llc_sb_hits, llc_scans, llc_scan_cycles, llc_sets_visited, llc_lines_flushed, llc_writebacks;
  logic [31:0] l1_scans [NC], ep_held_cycles [NC], ep_bypasses [NC], ep_acks [NC];
  logic [4:0] mcq_level;

  pim_consistency_top dut (.*);

  initial for (int c = 0; c < NC; c++) begin
    core_req[c] = '0; l1_fill_addr[c] = '0; l1_wr_addr[c] = '0; l1_inv_addr[c] = '0;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("%0t: FAIL %s", $time, what); end
  endtask

  function automatic paddr_t mk(int scope, int set, int tag);
    paddr_t a = '0;
    a[PA_W-1:SCOPE_OFF_W] = scope_t'(scope);
    a[LINE_OFF_W +: IW] = IW'(set);
    a[LINE_OFF_W+IW +: 3] = 3'(tag);
    return a;
  endfunction

  task automatic llc_fill(int scope, int set, int tag, bit p, bit d);
    @(negedge clk);
    while (llc_host_block) @(negedge clk);
    llc_fill_valid = 1; llc_fill_addr = mk(scope, set, tag); llc_fill_pim = p; llc_fill_dirty = d;
    @(negedge clk);
    llc_fill_valid = 0;
  endtask

  // per-core issue queues (the cores), drained one op per cycle at most
  mem_req_t prog [NC][$];
  always @(posedge clk) if (rst_n) begin
    for (int c = 0; c < NC; c++) begin
      if (core_valid[c] && core_ready[c]) void'(prog[c].pop_front());
    end
  end
  always_comb for (int c = 0; c < NC; c++) begin
    core_valid[c] = prog[c].size() > 0;
    core_req[c]   = (prog[c].size() > 0) ? prog[c][0] : '0;
  end

  // observation
  int cyc = 0;
  int ack_pim10 = -1, rel_load10 = -1, rel_load11 = -1, first_pim10_out = -1;
  int mcq_full_cycles = 0, block_cycles = 0;
  paddr_t flush_reports [$];
  mem_req_t mc_seen [$];
  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (dut.u_mcq.ack_valid && dut.u_mcq.ack_core == 0 && dut.u_mcq.ack_scope == 10 && ack_pim10 < 0)
      ack_pim10 = cyc;
    if (mem_valid[0] && mem_ready[0]) begin
      if (mem_req[0].op == OP_LOAD && scope_of(mem_req[0].addr) == 10 && rel_load10 < 0) rel_load10 = cyc;
      if (mem_req[0].op == OP_LOAD && scope_of(mem_req[0].addr) == 11 && rel_load11 < 0) rel_load11 = cyc;
    end
    if (mc_valid && mc_ready) begin
      mc_seen.push_back(mc_req);
      if (mc_req.op == OP_PIM && scope_of(mc_req.addr) == 10 && first_pim10_out < 0)
        first_pim10_out = mc_seen.size() - 1;
    end
    if (mcq_level == 16) mcq_full_cycles++;
    if (llc_host_block) block_cycles++;
    if (llc_flushed_valid) flush_reports.push_back(llc_flushed_addr);
  end

  function automatic mem_req_t r(op_e op, int scope, int set, int core);
    mem_req_t x = '0;
    x.op = op; x.addr = mk(scope, set, 1); x.core = core_id_t'(core);
    return x;
  endfunction

  initial begin
    #200000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n_pim, n_wb10, byp;
    paddr_t wb10 [$];
    repeat (3) @(posedge clk);
    rst_n = 1;
    llc_fill(10, 5, 1, 1, 1);    llc_fill(10, 100, 2, 1, 0); llc_fill(10, 1500, 3, 1, 1);
    llc_fill(11, 5, 4, 1, 1);    llc_fill(11, 700, 1, 1, 0);
    llc_fill(3, 100, 5, 0, 1);   llc_fill(3, 2047, 6, 0, 1);
    wb10 = '{mk(10, 5, 1), mk(10, 1500, 3)};

    // core 1 floods scope 12 while the memory side is stalled
    for (int i = 0; i < 20; i++) prog[1].push_back(r(OP_PIM, 12, 0, 1));
    repeat (150) @(posedge clk);
    check(mcq_level == 16, "controller queue full under back-pressure");
    prog[0].push_back(r(OP_PIM, 10, 0, 0));
    prog[0].push_back(r(OP_LOAD, 10, 5, 0));
    prog[0].push_back(r(OP_LOAD, 11, 700, 0));
    prog[0].push_back(r(OP_PIM, 10, 0, 0));
    prog[0].push_back(r(OP_PIM, 11, 0, 0));
    repeat (40) @(posedge clk);
    @(negedge clk);
    mc_ready = 1;
    repeat (300) @(posedge clk);

    // ordering checks
    check(ack_pim10 > 0 && rel_load10 > ack_pim10, $sformatf("LOAD 10 (cycle %0d) after ACK of PIM 10 (cycle %0d)", rel_load10, ack_pim10));
    check(rel_load11 > 0 && rel_load11 < ack_pim10, "LOAD 11 bypassed the outstanding PIM 10");
    n_wb10 = 0;
    for (int i = 0; i < first_pim10_out && i < mc_seen.size(); i++)
      if (mc_seen[i].op == OP_WRITEBACK && scope_of(mc_seen[i].addr) == 10) n_wb10++;
    check(first_pim10_out >= 0 && n_wb10 == 2, $sformatf("%0d scope-10 writebacks before PIM 10", n_wb10));
    n_pim = 0;
    foreach (mc_seen[i]) if (mc_seen[i].op == OP_PIM) n_pim++;
    check(n_pim == 23, $sformatf("%0d PIM ops reached memory, expected 23", n_pim));
    check(prog[0].size() == 0 && prog[1].size() == 0, "cores drained");
    // mechanisms
    byp = 0;
    for (int c = 0; c < NC; c++) byp += ep_bypasses[c];
    check(llc_sb_hits > 0, "scope-buffer hit");
    check(llc_scans >= 3, "scope-buffer miss scans");
    check(llc_sets_visited < 2048, "SBV skipped sets");
    check(llc_writebacks >= 2 + 1, "flush writebacks");
    check(ep_held_cycles[0] > 0 && ep_held_cycles[1] > 0, "entry points held operations");
    check(byp > 0, "bypass of a held operation");
    check(ep_acks[0] == 3 && ep_acks[1] == 20, "ACKs returned to the issuing cores");
    check(mcq_full_cycles > 0, "full controller queue");
    check(block_cycles > 0, "LLC blocked during scans");
    check(flush_reports.size() == 5 && llc_lines_flushed == 5,
          $sformatf("%0d flush reports, %0d lines flushed, expected 5", flush_reports.size(), llc_lines_flushed));
    if (flush_reports.size() == 5)
      check(flush_reports[0] == mk(10, 5, 1) && flush_reports[1] == mk(10, 100, 2) &&
            flush_reports[2] == mk(10, 1500, 3), "scope-10 lines reported in set order");
    $display("sb_hits=%0d scans=%0d scan_cycles=%0d sets_visited=%0d flushed=%0d writebacks=%0d",
             llc_sb_hits, llc_scans, llc_scan_cycles, llc_sets_visited, llc_lines_flushed, llc_writebacks);
    $display("held0=%0d held1=%0d bypasses=%0d mcq_full_cycles=%0d block_cycles=%0d",
             ep_held_cycles[0], ep_held_cycles[1], byp, mcq_full_cycles, block_cycles);
    if (failures > 0) begin
      $display("acks %0d %0d", ep_acks[0], ep_acks[1]);
      foreach (mc_seen[i]) $display("mc %0d: %s scope %0d core %0d", i, mc_seen[i].op.name(), scope_of(mc_seen[i].addr), mc_seen[i].core);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
