// tb_scope_buffer: random lookups, inserts and erases on a 4-set, 2-way
// scope buffer, checked against a reference model that keeps each set as an
// MRU-first list of scopes (insert moves to the front and drops the last
// entry when the set overflows; a lookup hit moves to the front; erase
// deletes). One operation per cycle.
module tb_scope_buffer;
  import pim_pkg::*;
  localparam int SETS = 4, WAYS = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic   lookup_valid = 0, insert_valid = 0, erase_valid = 0, lookup_hit;
  scope_t lookup_scope = '0, insert_scope = '0, erase_scope = '0;
  logic [$clog2(SETS*WAYS+1)-1:0] occupancy;
  int checks = 0, failures = 0;

  scope_buffer #(.SETS(SETS), .WAYS(WAYS)) dut (.*);

  scope_t model [SETS][$];   // MRU first

  function automatic int find(int s, scope_t x);
    foreach (model[s][i]) if (model[s][i] == x) return i;
    return -1;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int hits = 0, evictions = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 4000; n++) begin
      int kind, s, idx, total;
      scope_t x;
      kind = $urandom_range(0, 9);
      x = scope_t'($urandom_range(0, 15));
      s = int'(x) % SETS;
      idx = find(s, x);
      @(negedge clk);
      lookup_valid = 0; insert_valid = 0; erase_valid = 0;
      if (kind < 5) begin
        lookup_valid = 1; lookup_scope = x;
        #1;
        checks++;
        if (lookup_hit !== (idx >= 0)) begin
          failures++;
          if (failures < 10) $display("lookup %0d: hit=%0b expected %0b", x, lookup_hit, idx >= 0);
        end
        if (idx >= 0) begin
          hits++;
          model[s].delete(idx);
          model[s].push_front(x);
        end
      end else if (kind < 8) begin
        insert_valid = 1; insert_scope = x;
        if (idx >= 0) model[s].delete(idx);
        model[s].push_front(x);
        if (model[s].size() > WAYS) begin
          void'(model[s].pop_back());
          evictions++;
        end
      end else begin
        erase_valid = 1; erase_scope = x;
        if (idx >= 0) model[s].delete(idx);
      end
      @(posedge clk);
      #1;
      total = 0;
      for (int k = 0; k < SETS; k++) total += model[k].size();
      checks++;
      if (int'(occupancy) != total) begin
        failures++;
        if (failures < 10) $display("occupancy %0d expected %0d", occupancy, total);
      end
    end
    @(negedge clk);
    lookup_valid = 0; insert_valid = 0; erase_valid = 0;
    // insert and erase of the same scope in one cycle: erase wins
    insert_valid = 1; insert_scope = 14'd3; erase_valid = 1; erase_scope = 14'd3;
    @(negedge clk);
    insert_valid = 0; erase_valid = 0; lookup_valid = 1; lookup_scope = 14'd3;
    #1 checks++;
    if (lookup_hit) begin failures++; $display("insert+erase: scope kept"); end
    lookup_valid = 0;
    checks++;
    if (hits == 0 || evictions == 0) begin failures++; $display("no hits or no LRU replacements"); end
    $display("hits=%0d lru_replacements=%0d", hits, evictions);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
