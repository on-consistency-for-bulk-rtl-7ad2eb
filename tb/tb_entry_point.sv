// tb_entry_point: one entry point per consistency model, all fed the same
// operation sequences, with the memory side always ready. After each phase
// the operations each model has let out are compared with the order its
// rules allow; ACKs from the memory controller are then given and the next
// phase checked. Scopes: A=1, B=2, C=3.
//  phase 1: PIM A, LOAD B, LOAD A, STORE B, PIM C   (no ACK yet)
//  phase 2: ACK A          phase 3: ACK C
//  phase 4: PIM A, PIM C, FENCE, LOAD B  (no ACK)
//  phase 5: ACK A          phase 6: ACK C
// Also checked: an op that may leave does so the cycle after it entered,
// the scope model's bypass counter, and that no ACK-model entry point ends
// with an outstanding PIM op.
module tb_entry_point;
  import pim_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid = 0;
  mem_req_t in_req = '0;
  logic [3:0] in_ready, out_valid, ack_valid;
  mem_req_t out_req [4];
  scope_t ack_scope = '0;
  logic [3:0] outstanding [4];
  logic [31:0] held [4], byp [4], acks [4];
  mem_req_t got [4][$];

  for (genvar m = 0; m < 4; m++) begin : g
    entry_point #(.MODEL(model_e'(m)), .DEPTH(8), .OUT_DEPTH(8)) dut (
      .clk, .rst_n, .in_valid, .in_ready(in_ready[m]), .in_req,
      .out_valid(out_valid[m]), .out_ready(1'b1), .out_req(out_req[m]),
      .ack_valid(ack_valid[m]), .ack_scope, .outstanding(outstanding[m]),
      .stat_held_cycles(held[m]), .stat_bypasses(byp[m]), .stat_acks(acks[m]));
    always @(posedge clk) if (out_valid[m]) got[m].push_back(out_req[m]);
  end
  initial ack_valid = '0;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("%0t: FAIL %s", $time, what); end
  endtask

  function automatic mem_req_t r(op_e op, int sc);
    mem_req_t x = '0;
    x.op = op;
    x.addr[PA_W-1:SCOPE_OFF_W] = scope_t'(sc);
    x.addr[LINE_OFF_W +: 4] = 4'(sc);
    return x;
  endfunction

  task automatic push(mem_req_t x);
    @(negedge clk);
    in_valid = 1; in_req = x;
    @(negedge clk);
    in_valid = 0;
  endtask

  task automatic ack(int sc, logic [3:0] who);
    @(negedge clk);
    ack_valid = who; ack_scope = scope_t'(sc);
    @(negedge clk);
    ack_valid = '0;
  endtask

  // compare what model m let out in this phase with the expected string
  function automatic string show(mem_req_t q[$]);
    string s = "";
    foreach (q[i]) begin
      case (q[i].op)
        OP_LOAD: s = {s, "L"}; OP_STORE: s = {s, "S"}; OP_PIM: s = {s, "P"};
        OP_FENCE: s = {s, "F"}; OP_SCOPE_FENCE: s = {s, "f"}; default: s = {s, "?"};
      endcase
      s = {s, string'(8'h40 + 8'(scope_of(q[i].addr)))};
    end
    return s;
  endfunction

  task automatic expect_phase(string name, string e0, string e1, string e2, string e3);
    string e [4];
    e = '{e0, e1, e2, e3};
    repeat (8) @(posedge clk);
    for (int m = 0; m < 4; m++) begin
      check(show(got[m]) == e[m], $sformatf("%s model %0d: got %s expected %s", name, m, show(got[m]), e[m]));
      got[m].delete();
    end
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // latency: a free op leaves in the cycle after it is taken
    @(negedge clk);
    in_valid = 1; in_req = r(OP_LOAD, 2);
    @(negedge clk);
    in_valid = 0;
    check(out_valid == 4'hf, "load leaves one cycle after entering");
    @(negedge clk);
    for (int m = 0; m < 4; m++) got[m].delete();

    push(r(OP_PIM, 1)); push(r(OP_LOAD, 2)); push(r(OP_LOAD, 1)); push(r(OP_STORE, 2)); push(r(OP_PIM, 3));
    expect_phase("phase 1", "PA", "PALB", "PALBSBPC", "PALBLASBPC");
    check(held[0] > 0 && held[1] > 0, "strict models held operations");
    ack(1, 4'b0111);
    expect_phase("phase 2", "LBLASBPC", "LASBPC", "LA", "");
    ack(3, 4'b0111);
    expect_phase("phase 3", "", "", "", "");
    check(byp[2] > 0, "scope model: an op bypassed a held one");

    push(r(OP_PIM, 1)); push(r(OP_PIM, 3)); push(r(OP_FENCE, 0)); push(r(OP_LOAD, 2));
    expect_phase("phase 4", "PA", "PA", "PAPC", "PAPCF@LB");
    ack(1, 4'b0111);
    expect_phase("phase 5", "PC", "PC", "", "");
    ack(3, 4'b0111);
    expect_phase("phase 6", "LB", "LB", "LB", "");
    for (int m = 0; m < 3; m++) check(outstanding[m] == 0, $sformatf("model %0d: nothing outstanding", m));
    check(acks[0] == 4 && acks[3] == 0, "ACK counts");
    $display("held: %0d %0d %0d %0d  bypasses: %0d %0d %0d %0d", held[0], held[1], held[2], held[3],
             byp[0], byp[1], byp[2], byp[3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
