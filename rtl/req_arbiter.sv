// req_arbiter: merges the PIM-path streams of N cores (or of their L1 PIM
// units) onto the single stream into the shared LLC.
//
// It stands in for the host's on-chip network in the PIM path. The paper
// lets that network reorder operations; this one keeps each input's order
// and interleaves inputs round-robin, which is one of the orders the paper
// allows. A grant is held until the chosen request is taken, so out_req
// stays stable while out_valid waits for out_ready. After a transfer the
// priority moves to the input after the one served.
module req_arbiter
  import pim_pkg::*;
#(
  parameter int unsigned N = 6
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [N-1:0]  in_valid,
  output logic [N-1:0]  in_ready,
  input  mem_req_t      in_req [N],
  output logic          out_valid,
  input  logic          out_ready,
  output mem_req_t      out_req
);
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;

  logic [IW-1:0] prio_q;     // first input to consider
  logic          lock_q;     // a grant is waiting for out_ready
  logic [IW-1:0] lockg_q;
  logic [IW-1:0] grant;
  logic          any;

  always_comb begin
    int idx;
    idx   = 0;
    any   = 1'b0;
    grant = '0;
    if (lock_q) begin
      any   = 1'b1;
      grant = lockg_q;
    end else begin
      for (int k = N-1; k >= 0; k--) begin
        idx = (int'(prio_q) + k) % N;
        if (in_valid[idx]) begin
          any   = 1'b1;
          grant = IW'(idx);
        end
      end
    end
  end

  assign out_valid = any;
  assign out_req   = in_req[grant];
  always_comb begin
    in_ready = '0;
    if (any) in_ready[grant] = out_ready;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      prio_q  <= '0;
      lock_q  <= 1'b0;
      lockg_q <= '0;
    end else if (any) begin
      if (out_ready) begin
        lock_q <= 1'b0;
        prio_q <= (int'(grant) == N-1) ? '0 : grant + 1'b1;
      end else begin
        lock_q  <= 1'b1;
        lockg_q <= grant;
      end
    end
  end
endmodule
