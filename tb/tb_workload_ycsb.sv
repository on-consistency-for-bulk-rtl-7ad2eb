// tb_workload_ycsb: a short-range-scan workload in the style of YCSB on the
// full-size top (scope model, default parameters). Four threads, on cores
// 0-3, each run 40 rounds of: a PIM op (the filter of one scan) on one of 8
// 2MB scopes, then three loads that read results, half of them from the
// scope just filtered. Every load that leaves for the host caches is filled
// into the LLC as a PIM-enabled line, a third of them dirty, so later PIM
// ops on that scope must scan and flush. The memory side accepts in about
// three cycles of four.
//
// The testbench keeps its own copy of which lines the LLC holds, updated
// from fills, evictions and flush reports. Checked:
//  * every PIM op and every load leaves exactly once;
//  * a load to scope s leaves only after every older PIM op of its thread
//    to s has been ACKed (the scope model's rule);
//  * every writeback reaching memory is a dirty line the scan reported as
//    flushed, and every dirty flushed line reaches memory;
//  * scans, scope-buffer hits, SBV-skipped sets, holds, bypasses, flushes
//    and ACKs all happened.
// It prints the mean scan length in cycles.
module tb_workload_ycsb;
  import pim_pkg::*;
  localparam int NC = 6, NT = 4, ROUNDS = 40, NSCOPES = 8, BASE = 100;
  localparam int IW = 11;   // log2 of the 2048 LLC sets
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
  logic mc_valid, mc_ready = 0;
  mem_req_t mc_req;
  logic [31:0] llc_sb_hits, llc_scans, llc_scan_cycles, llc_sets_visited, llc_lines_flushed, llc_writebacks;
  logic [31:0] l1_scans [NC], ep_held_cycles [NC], ep_bypasses [NC], ep_acks [NC];
  logic [4:0] mcq_level;

  pim_consistency_top dut (.*);

  initial for (int c = 0; c < NC; c++) begin
    l1_fill_addr[c] = '0; l1_wr_addr[c] = '0; l1_inv_addr[c] = '0;
  end

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

  // the threads' programs, and per (core, scope) the number of older PIM
  // ops each load must see ACKed, in program order
  mem_req_t prog [NC][$];
  int need [int][$];
  int acks [int];
  int pim_issued = 0, loads_issued = 0;

  always @(posedge clk) if (rst_n)
    for (int c = 0; c < NC; c++) if (core_valid[c] && core_ready[c]) void'(prog[c].pop_front());
  always_comb for (int c = 0; c < NC; c++) begin
    core_valid[c] = prog[c].size() > 0;
    core_req[c]   = (prog[c].size() > 0) ? prog[c][0] : '0;
  end

  // the LLC's contents as the testbench sees them: address -> dirty
  bit present [paddr_t];
  bit wb_due [paddr_t];
  paddr_t fill_q [$];
  int pim_out = 0, loads_out = 0, wb_out = 0, dirty_flushes = 0, flushes = 0;
  int bad_order = 0, bad_wb = 0;

  always @(posedge clk) if (rst_n) begin
    if (dut.ack_valid) acks[int'(dut.ack_core) * 16384 + int'(dut.ack_scope)]++;
    for (int c = 0; c < NC; c++)
      if (mem_valid[c] && mem_ready[c]) begin
        int k, n;
        k = c * 16384 + int'(scope_of(mem_req[c].addr));
        n = need[k].pop_front();
        if ((acks.exists(k) ? acks[k] : 0) < n) begin
          bad_order++;
          if (bad_order < 4) $display("%0t core %0d scope %0d need %0d acks %0d", $time, c, scope_of(mem_req[c].addr), n, acks.exists(k) ? acks[k] : -1);
        end
        loads_out++;
        fill_q.push_back(mem_req[c].addr);
      end
    if (llc_flushed_valid) begin
      flushes++;
      if (present.exists(llc_flushed_addr) && present[llc_flushed_addr]) begin
        dirty_flushes++;
        wb_due[llc_flushed_addr] = 1'b1;
      end
      present.delete(llc_flushed_addr);
    end
    if (llc_evict_valid) present.delete(llc_evict_addr);
    if (mc_valid && mc_ready) begin
      if (mc_req.op == OP_PIM) pim_out++;
      if (mc_req.op == OP_WRITEBACK) begin
        wb_out++;
        if (wb_due.exists(mc_req.addr)) wb_due.delete(mc_req.addr);
        else bad_wb++;
      end
    end
    mc_ready <= ($urandom_range(3) != 0);
  end

  // the host caches: fill each loaded line into the LLC, holding while a
  // scan blocks the LLC
  initial begin
    forever begin
      @(negedge clk);
      llc_fill_valid = 1'b0;
      if (fill_q.size() > 0 && !llc_host_block) begin
        paddr_t a;
        a = fill_q.pop_front();
        a[LINE_OFF_W-1:0] = '0;
        if (!present.exists(a)) begin
          llc_fill_valid = 1'b1;
          llc_fill_addr  = a;
          llc_fill_pim   = 1'b1;
          llc_fill_dirty = ($urandom_range(2) == 0);
          present[a]     = llc_fill_dirty;
        end
      end
    end
  end

  initial begin
    #400000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int byp, held, pims [int];
    for (int t = 0; t < NT; t++)
      for (int r = 0; r < ROUNDS; r++) begin
        mem_req_t x;
        int s;
        s = BASE + int'($urandom_range(NSCOPES - 1));
        x = '0; x.op = OP_PIM; x.addr = mk(s, 0, 0); x.core = core_id_t'(t);
        prog[t].push_back(x);
        pims[t * 16384 + s]++;
        pim_issued++;
        for (int l = 0; l < 3; l++) begin
          int ls;
          ls = ($urandom_range(1) == 0) ? s : BASE + int'($urandom_range(NSCOPES - 1));
          x = '0; x.op = OP_LOAD; x.core = core_id_t'(t);
          x.addr = mk(ls, int'($urandom_range(2047)), int'($urandom_range(15)));
          prog[t].push_back(x);
          need[t * 16384 + ls].push_back(pims.exists(t * 16384 + ls) ? pims[t * 16384 + ls] : 0);
          loads_issued++;
        end
      end
    repeat (3) @(posedge clk);
    rst_n = 1;
    while (prog[0].size() + prog[1].size() + prog[2].size() + prog[3].size() > 0 || fill_q.size() > 0)
      @(posedge clk);
    repeat (2000) @(posedge clk);

    check(pim_out == pim_issued, $sformatf("%0d of %0d PIM ops reached memory", pim_out, pim_issued));
    check(loads_out == loads_issued, $sformatf("%0d of %0d loads left", loads_out, loads_issued));
    check(bad_order == 0, $sformatf("%0d loads left before the ACK of an older same-scope PIM op", bad_order));
    check(bad_wb == 0, $sformatf("%0d writebacks of lines not flushed dirty", bad_wb));
    check(wb_due.num() == 0 && wb_out == dirty_flushes,
          $sformatf("%0d dirty flushes, %0d writebacks", dirty_flushes, wb_out));
    check(flushes == int'(llc_lines_flushed), "every flushed line reported");
    byp = 0; held = 0;
    for (int c = 0; c < NT; c++) begin byp += ep_bypasses[c]; held += ep_held_cycles[c]; end
    check(llc_scans > 0 && llc_sb_hits > 0, "scans and scope-buffer hits");
    check(llc_sets_visited < llc_scans * 2048, "SBV skipped sets");
    check(flushes > 0 && wb_out > 0, "flushes and writebacks");
    check(held > 0 && byp > 0, "holds and bypasses at the entry points");
    check(ep_acks[0] + ep_acks[1] + ep_acks[2] + ep_acks[3] == pim_issued, "every PIM op ACKed");
    $display("pim=%0d loads=%0d scans=%0d sb_hits=%0d mean_scan_cycles=%0d flushed=%0d writebacks=%0d held=%0d bypasses=%0d",
             pim_issued, loads_issued, llc_scans, llc_sb_hits,
             (llc_scans > 0) ? llc_scan_cycles / llc_scans : 0, flushes, wb_out, held, byp);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
