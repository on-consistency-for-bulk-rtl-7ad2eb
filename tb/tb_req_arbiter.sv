// tb_req_arbiter: three inputs with numbered request streams and a randomly
// stalling output. Checked: every request is delivered exactly once, each
// input's requests in their own order, a stalled output does not change,
// and with all inputs busy and the output always ready the grants rotate
// 0,1,2,0,...
module tb_req_arbiter;
  import pim_pkg::*;
  localparam int N = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [N-1:0] in_valid = '0, in_ready;
  mem_req_t in_req [N];
  logic out_valid, out_ready = 0;
  mem_req_t out_req;

  req_arbiter #(.N(N)) dut (.*);

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("%0t: FAIL %s", $time, what); end
  endtask

  int sent [N], next_exp [N];
  int total = 0;
  bit rotate_phase = 0;
  int last_src = -1;
  mem_req_t held;
  bit stalled = 0;

  // a request carries its source in core and its sequence number in addr
  always_comb
    for (int i = 0; i < N; i++) begin
      in_req[i] = '0;
      in_req[i].op = OP_PIM;
      in_req[i].core = core_id_t'(i);
      in_req[i].addr = paddr_t'(sent[i]);
    end

  always @(posedge clk) if (rst_n) begin
    if (stalled) check(out_valid && out_req == held, "stalled output held");
    stalled <= out_valid && !out_ready;
    held <= out_req;
    if (out_valid && out_ready) begin
      int src;
      src = int'(out_req.core);
      check(int'(out_req.addr) == next_exp[src], $sformatf("input %0d order", src));
      next_exp[src]++;
      total++;
      if (rotate_phase && last_src >= 0) check(src == (last_src + 1) % N, "round-robin rotation");
      last_src = src;
    end
    for (int i = 0; i < N; i++) if (in_valid[i] && in_ready[i]) sent[i]++;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < N; i++) begin sent[i] = 0; next_exp[i] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    // random traffic, a request stays valid until taken
    for (int n = 0; n < 1500; n++) begin
      @(negedge clk);
      for (int i = 0; i < N; i++)
        if (!in_valid[i] || in_ready[i]) in_valid[i] = ($urandom_range(0, 2) != 0) && sent[i] < 300;
      out_ready = $urandom_range(0, 3) != 0;
    end
    @(negedge clk);
    in_valid = '1;
    out_ready = 1;
    rotate_phase = 1;
    last_src = -1;
    repeat (30) @(negedge clk);
    in_valid = '0;
    repeat (3) @(negedge clk);
    check(total == sent[0] + sent[1] + sent[2], "all requests delivered");
    $display("delivered %0d", total);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
