// mc_ack_queue: the memory controller's input queue for the PIM path, with
// the ACK the PIM consistency models add to it.
//
// Operations leaving the LLC (scan writebacks and PIM ops, in order) enter a
// DEPTH-entry FIFO and leave in the same order towards the memory scheduler
// and the PIM module. Once a PIM op has entered this queue, the controller
// keeps its order with all later operations to its scope, so the op can no
// longer be reordered: at that point the queue ACKs it to the issuing core's
// entry point (atomic, store and scope models; the scope-relaxed model needs
// no ACK). A full queue back-pressures the LLC, which is how a busy PIM
// module throttles the host.
//
// Timing: ack_valid pulses in the cycle after the PIM op is accepted, with
// the op's core and scope. The queue depth is not given in the paper
// (assumed 16).
module mc_ack_queue
  import pim_pkg::*;
#(
  parameter int unsigned DEPTH     = 16,
  parameter bit          NEEDS_ACK = 1'b1
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     in_valid,
  output logic     in_ready,
  input  mem_req_t in_req,
  output logic     out_valid,
  input  logic     out_ready,
  output mem_req_t out_req,
  output logic     ack_valid,
  output core_id_t ack_core,
  output scope_t   ack_scope,
  output logic [$clog2(DEPTH+1)-1:0] level
);
  localparam int unsigned AW = $clog2(DEPTH);

  mem_req_t       mem_q [DEPTH];
  logic [AW-1:0]  rd_q, wr_q;
  logic [AW:0]    cnt_q;

  assign in_ready  = cnt_q < (AW+1)'(DEPTH);
  assign out_valid = cnt_q != '0;
  assign out_req   = mem_q[rd_q];
  assign level     = ($clog2(DEPTH+1))'(cnt_q);

  logic push, pop;
  assign push = in_valid && in_ready;
  assign pop  = out_valid && out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_q      <= '0;
      wr_q      <= '0;
      cnt_q     <= '0;
      ack_valid <= 1'b0;
      ack_core  <= '0;
      ack_scope <= '0;
      for (int i = 0; i < DEPTH; i++) mem_q[i] <= '0;
    end else begin
      if (push) begin
        mem_q[wr_q] <= in_req;
        wr_q <= (int'(wr_q) == DEPTH-1) ? '0 : wr_q + 1'b1;
      end
      if (pop) rd_q <= (int'(rd_q) == DEPTH-1) ? '0 : rd_q + 1'b1;
      cnt_q     <= cnt_q + (AW+1)'(push) - (AW+1)'(pop);
      ack_valid <= NEEDS_ACK && push && in_req.op == OP_PIM;
      ack_core  <= in_req.core;
      ack_scope <= scope_of(in_req.addr);
    end
  end
endmodule
