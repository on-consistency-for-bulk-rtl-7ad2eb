// tb_cache_tag_array: random fills, write hits, invalidations and flushes on
// an 8-set, 4-way array, checked against a reference model: the displaced
// line of each fill, the SBV update (any valid PIM-enabled line left in the
// changed set), write-hit detection and the full scan read-out of a random
// set after every operation. Victim rule of the model: lowest free way,
// else a per-set round-robin pointer that advances on each replacement.
module tb_cache_tag_array;
  import pim_pkg::*;
  localparam int SETS = 8, WAYS = 4;
  localparam int IW = $clog2(SETS), WW = $clog2(WAYS);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic fill_valid = 0, fill_pim = 0, fill_dirty = 0, wr_valid = 0, inv_valid = 0, flush_valid = 0;
  paddr_t fill_addr = '0, wr_addr = '0, inv_addr = '0;
  logic evict_valid, evict_dirty, evict_pim, wr_hit, upd_valid, upd_bit;
  paddr_t evict_addr;
  logic [IW-1:0] scan_set = '0, flush_set = '0, upd_set;
  logic [WW-1:0] flush_way = '0;
  logic [WAYS-1:0] scan_line_valid, scan_line_dirty, scan_line_pim;
  paddr_t scan_line_addr [WAYS];
  int checks = 0, failures = 0;

  cache_tag_array #(.SETS(SETS), .WAYS(WAYS)) dut (.*);

  bit     mv [SETS][WAYS], md [SETS][WAYS], mp [SETS][WAYS];
  paddr_t ma [SETS][WAYS];
  int     rr [SETS];

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 15) $display("%0t: %s", $time, what);
    end
  endtask

  function automatic paddr_t rnd_addr();
    paddr_t a;
    a = '0;
    a[LINE_OFF_W +: IW] = IW'($urandom_range(0, SETS-1));
    a[LINE_OFF_W+IW +: 4] = 4'($urandom_range(0, 11));
    a[PA_W-1 -: 3] = 3'($urandom_range(0, 7));  // a few scopes
    return a;
  endfunction

  function automatic bit set_pim(int s);
    for (int w = 0; w < WAYS; w++) if (mv[s][w] && mp[s][w]) return 1;
    return 0;
  endfunction

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n_evict = 0, n_wrhit = 0;
    for (int s = 0; s < SETS; s++) begin
      rr[s] = 0;
      for (int w = 0; w < WAYS; w++) begin mv[s][w] = 0; md[s][w] = 0; mp[s][w] = 0; ma[s][w] = '0; end
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      int kind, s, way, hitw;
      paddr_t a;
      @(negedge clk);
      kind = $urandom_range(0, 9);
      a = rnd_addr();
      s = int'(a[LINE_OFF_W +: IW]);
      hitw = -1;
      for (int w = 0; w < WAYS; w++)
        if (mv[s][w] && ma[s][w][PA_W-1:LINE_OFF_W] == a[PA_W-1:LINE_OFF_W]) hitw = w;
      if (kind < 5) begin
        bit full, p, d;
        p = $urandom_range(0, 1);
        d = $urandom_range(0, 1);
        fill_valid = 1; fill_addr = a; fill_pim = p; fill_dirty = d;
        #1;
        if (hitw >= 0) way = hitw;
        else begin
          way = -1;
          for (int w = WAYS-1; w >= 0; w--) if (!mv[s][w]) way = w;
          full = (way < 0);
          if (full) begin way = rr[s]; rr[s] = (rr[s] + 1) % WAYS; end
        end
        check(evict_valid == (hitw < 0 && mv[s][way]), "evict_valid");
        if (evict_valid) begin
          n_evict++;
          check(evict_addr == ma[s][way] && evict_dirty == md[s][way] && evict_pim == mp[s][way],
                "evicted line");
        end
        md[s][way] = d || (hitw >= 0 && md[s][way]);
        mv[s][way] = 1; mp[s][way] = p; ma[s][way] = {a[PA_W-1:LINE_OFF_W], 6'b0};
        check(upd_valid && int'(upd_set) == s && upd_bit == set_pim(s), "SBV update on fill");
      end else if (kind < 7) begin
        wr_valid = 1; wr_addr = a;
        #1;
        check(wr_hit == (hitw >= 0), "wr_hit");
        check(!upd_valid, "no SBV update on write");
        if (hitw >= 0) begin md[s][hitw] = 1; n_wrhit++; end
      end else if (kind < 8) begin
        inv_valid = 1; inv_addr = a;
        #1;
        if (hitw >= 0) begin mv[s][hitw] = 0; md[s][hitw] = 0; end
        check(upd_valid == (hitw >= 0), "SBV update on invalidate");
        if (hitw >= 0) check(int'(upd_set) == s && upd_bit == set_pim(s), "SBV bit on invalidate");
      end else begin
        way = $urandom_range(0, WAYS-1);
        flush_valid = 1; flush_set = IW'(s); flush_way = WW'(way);
        #1;
        mv[s][way] = 0; md[s][way] = 0;
        check(upd_valid && int'(upd_set) == s && upd_bit == set_pim(s), "SBV update on flush");
      end
      @(posedge clk);
      #1;
      fill_valid = 0; wr_valid = 0; inv_valid = 0; flush_valid = 0;
      s = $urandom_range(0, SETS-1);
      scan_set = IW'(s);
      #1;
      for (int w = 0; w < WAYS; w++) begin
        check(scan_line_valid[w] == mv[s][w], "scan valid");
        if (mv[s][w])
          check(scan_line_dirty[w] == md[s][w] && scan_line_pim[w] == mp[s][w] &&
                scan_line_addr[w] == ma[s][w], "scan metadata");
      end
    end
    check(n_evict > 0 && n_wrhit > 0, "evictions and write hits happened");
    $display("evictions=%0d write_hits=%0d", n_evict, n_wrhit);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
