// tb_mc_ack_queue: random writebacks and PIM ops into a 4-deep queue with a
// randomly stalling memory side. Checked against a reference FIFO: output
// order, back-pressure when full (the queue must reach full), and that each
// accepted PIM op, and nothing else, is ACKed one cycle later with its core
// and scope. A second queue built without ACKs must never ACK.
module tb_mc_ack_queue;
  import pim_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0, ack_valid, n_ack_valid, n_in_ready, n_out_valid;
  mem_req_t in_req = '0, out_req, n_out_req;
  core_id_t ack_core, n_ack_core;
  scope_t ack_scope, n_ack_scope;
  logic [2:0] level, n_level;

  mc_ack_queue #(.DEPTH(4), .NEEDS_ACK(1'b1)) dut (.*);
  mc_ack_queue #(.DEPTH(4), .NEEDS_ACK(1'b0)) dut_noack (
    .clk, .rst_n, .in_valid, .in_ready(n_in_ready), .in_req, .out_valid(n_out_valid),
    .out_ready, .out_req(n_out_req), .ack_valid(n_ack_valid), .ack_core(n_ack_core),
    .ack_scope(n_ack_scope), .level(n_level));

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("%0t: FAIL %s", $time, what); end
  endtask

  mem_req_t fifo [$];
  bit exp_ack = 0;
  mem_req_t exp_ack_req;
  int fulls = 0, acks = 0;

  always @(posedge clk) if (rst_n) begin
    check(ack_valid == exp_ack, "ACK exactly for accepted PIM ops, one cycle later");
    if (exp_ack) check(ack_core == exp_ack_req.core && ack_scope == scope_of(exp_ack_req.addr), "ACK core/scope");
    if (ack_valid) acks++;
    check(!n_ack_valid, "no ACK in the scope-relaxed configuration");
    check(in_ready == (fifo.size() < 4), "ready follows occupancy");
    check(int'(level) == fifo.size(), "level");
    if (fifo.size() == 4) fulls++;
    if (out_valid && out_ready) begin
      check(fifo.size() > 0 && out_req == fifo[0], "FIFO order");
      void'(fifo.pop_front());
    end
    exp_ack = in_valid && in_ready && in_req.op == OP_PIM;
    exp_ack_req = in_req;
    if (in_valid && in_ready) fifo.push_back(in_req);
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      if (!in_valid || in_ready) begin
        in_valid = $urandom_range(0, 2) != 0;
        in_req.op = $urandom_range(0, 1) ? OP_PIM : OP_WRITEBACK;
        in_req.addr = paddr_t'({$urandom, $urandom});
        in_req.core = core_id_t'($urandom_range(0, 5));
      end
      out_ready = (n % 200 < 100) ? ($urandom_range(0, 3) == 0) : ($urandom_range(0, 3) != 0);
    end
    check(fulls > 0 && acks > 0, "queue filled and ACKs were sent");
    $display("full cycles=%0d acks=%0d", fulls, acks);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
