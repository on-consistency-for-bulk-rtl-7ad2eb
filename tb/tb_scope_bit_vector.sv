// tb_scope_bit_vector: random bit writes into a 2048-bit SBV, each followed
// by searches from random start points, compared with a plain bit array and
// a linear search written here.
module tb_scope_bit_vector;
  localparam int N = 2048;
  localparam int IW = $clog2(N);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic upd_valid = 0, upd_bit = 0, find_found;
  logic [IW-1:0] upd_set = '0, find_start = '0, find_set;
  logic [N-1:0] bits;
  logic [$clog2(N+1)-1:0] flagged;
  int checks = 0, failures = 0;

  scope_bit_vector #(.NSETS(N)) dut (.*);

  bit model [N];

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (model[i]) model[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      int s, cnt;
      @(negedge clk);
      s = (n < 1000) ? $urandom_range(0, N-1) : $urandom_range(0, 63) * 32 + $urandom_range(0, 3);
      upd_valid = 1; upd_set = IW'(s); upd_bit = ($urandom_range(0, 2) != 0);
      model[s] = upd_bit;
      @(negedge clk);
      upd_valid = 0;
      for (int k = 0; k < 3; k++) begin
        int st, exp_set;
        bit exp_found;
        st = (k == 0) ? 0 : $urandom_range(0, N-1);
        find_start = IW'(st);
        #1;
        exp_found = 0; exp_set = 0;
        for (int i = st; i < N; i++) if (model[i]) begin exp_found = 1; exp_set = i; break; end
        checks++;
        if (find_found !== exp_found || (exp_found && int'(find_set) != exp_set)) begin
          failures++;
          if (failures < 10)
            $display("find from %0d: %0b/%0d expected %0b/%0d", st, find_found, find_set, exp_found, exp_set);
        end
      end
      cnt = 0;
      foreach (model[i]) cnt += model[i];
      checks++;
      if (int'(flagged) != cnt) begin failures++; $display("flagged %0d expected %0d", flagged, cnt); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
