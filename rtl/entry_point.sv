// entry_point: the entry of one core's operations into the host memory
// subsystem (the write buffer), enforcing the ordering rules of the PIM
// consistency model chosen by MODEL.
//
// The core hands over memory operations at commit, in program order. They
// wait in a DEPTH-entry buffer kept oldest-first; each cycle the oldest
// entry allowed to leave is sent (so later entries may bypass held ones:
// a non-FIFO write buffer). PIM ops that need an ACK are remembered in an
// outstanding table, by scope, until the memory controller's ACK for that
// scope returns. The rules, per model (j < i means "older than entry i"):
//
//  always   a store waits for every older store (native store order); a load
//           waits for older stores to the same line; ops to one scope keep
//           their relative order except where a model relaxes it below.
//  ATOMIC   a PIM op leaves only as the oldest entry and with nothing
//           outstanding; nothing leaves while a PIM op is outstanding or an
//           older PIM op is still buffered (core-side fences before/after).
//  STORE    a PIM op is a store: it waits for older stores and PIM ops, and
//           younger stores and PIM ops wait for its ACK. Loads to other
//           scopes leave freely; loads to its scope wait for the ACK.
//  SCOPE    only operations to the scope of an outstanding PIM op are held;
//           PIM ops of other scopes interleave freely.
//  SCOPE_RELAXED  nothing is held for PIM ops and no ACK is awaited; a
//           scope-fence keeps younger same-scope operations behind it and
//           itself waits for older same-scope ones; it is sent on towards the
//           caches.
//  fence (the cross-scope fence): younger operations wait behind it; in the
//           ACK models it leaves when it is the oldest entry and nothing is
//           outstanding, and is consumed here; in SCOPE_RELAXED it is sent on.
//
// Interface: in_* valid/ready from the core; out_* valid/ready towards the
// memory subsystem (the top routes loads/stores to the caches and PIM ops
// and fences to the PIM path); ack_* from the memory controller, one cycle
// per ACK. out_req is chosen before out_ready is seen and stays stable until
// taken. The buffer and table sizes are not given in the paper (assumed 8).
module entry_point
  import pim_pkg::*;
#(
  parameter model_e      MODEL     = MODEL_SCOPE,
  parameter int unsigned DEPTH     = 8,
  parameter int unsigned OUT_DEPTH = 8
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     in_valid,
  output logic     in_ready,
  input  mem_req_t in_req,
  output logic     out_valid,
  input  logic     out_ready,
  output mem_req_t out_req,
  input  logic     ack_valid,
  input  scope_t   ack_scope,
  // status / statistics
  output logic [$clog2(OUT_DEPTH+1)-1:0] outstanding,
  output logic [31:0] stat_held_cycles,   // cycles in which some entry is held back
  output logic [31:0] stat_bypasses,      // entries that left ahead of an older one
  output logic [31:0] stat_acks
);
  localparam bit NEEDS_ACK = (MODEL != MODEL_SCOPE_RELAXED);
  localparam int unsigned CNT_W = $clog2(DEPTH+1);

  mem_req_t         buf_q [DEPTH];
  logic [DEPTH-1:0] bv_q;             // entry valid, 0 = oldest
  logic [OUT_DEPTH-1:0] ov_q;         // outstanding PIM op valid
  scope_t           os_q [OUT_DEPTH];

  function automatic logic is_store_like(op_e o);
    return o == OP_STORE || o == OP_PIM;
  endfunction
  function automatic logic same_line(paddr_t a, paddr_t b);
    return a[PA_W-1:LINE_OFF_W] == b[PA_W-1:LINE_OFF_W];
  endfunction

  logic out_any;
  assign out_any = |ov_q;
  logic out_full;
  assign out_full = &ov_q;

  function automatic logic out_has(scope_t s);
    logic r = 1'b0;
    for (int k = 0; k < OUT_DEPTH; k++) if (ov_q[k] && os_q[k] == s) r = 1'b1;
    return r;
  endfunction

  // Eligibility of each buffered entry.
  logic [DEPTH-1:0] elig;
  always_comb begin
    for (int i = 0; i < DEPTH; i++) begin
      mem_req_t r;
      logic ok, old_store, old_store_line, old_same, old_pim, old_fence,
            old_sfence_same, oldest;
      r  = buf_q[i];
      old_store = 0; old_store_line = 0; old_same = 0; old_pim = 0;
      old_fence = 0; old_sfence_same = 0;
      oldest = 1'b1;
      for (int j = 0; j < i; j++) begin
        if (bv_q[j]) begin
          oldest = 1'b0;
          if (is_store_like(buf_q[j].op) && MODEL != MODEL_SCOPE &&
              MODEL != MODEL_SCOPE_RELAXED) old_store = 1'b1;
          if (buf_q[j].op == OP_STORE) begin
            if (MODEL == MODEL_SCOPE || MODEL == MODEL_SCOPE_RELAXED) old_store = 1'b1;
            if (same_line(buf_q[j].addr, r.addr)) old_store_line = 1'b1;
          end
          if (scope_of(buf_q[j].addr) == scope_of(r.addr) && buf_q[j].op != OP_FENCE)
            old_same = 1'b1;
          if (buf_q[j].op == OP_PIM) old_pim = 1'b1;
          if (buf_q[j].op == OP_FENCE) old_fence = 1'b1;
          if (buf_q[j].op == OP_SCOPE_FENCE &&
              scope_of(buf_q[j].addr) == scope_of(r.addr)) old_sfence_same = 1'b1;
        end
      end
      ok = bv_q[i] && !old_fence;
      unique case (MODEL)
        MODEL_ATOMIC: begin
          ok = ok && !out_any && !old_pim;
          if (r.op == OP_PIM || r.op == OP_FENCE || r.op == OP_SCOPE_FENCE) ok = ok && oldest;
          if (r.op == OP_PIM) ok = ok && !out_full;
          if (r.op == OP_STORE) ok = ok && !old_store;
          if (r.op == OP_LOAD)  ok = ok && !old_store_line && !old_same;
        end
        MODEL_STORE: begin
          if (r.op == OP_PIM || r.op == OP_STORE) ok = ok && !old_store && !out_any && !out_full;
          if (r.op == OP_LOAD) ok = ok && !old_store_line && !old_same && !out_has(scope_of(r.addr));
          if (r.op == OP_FENCE || r.op == OP_SCOPE_FENCE) ok = ok && oldest && !out_any;
        end
        MODEL_SCOPE: begin
          if (r.op == OP_FENCE || r.op == OP_SCOPE_FENCE) ok = ok && oldest && !out_any;
          else begin
            ok = ok && !old_same && !out_has(scope_of(r.addr));
            if (r.op == OP_PIM)   ok = ok && !out_full;
            if (r.op == OP_STORE) ok = ok && !old_store;
            if (r.op == OP_LOAD)  ok = ok && !old_store_line;
          end
        end
        default: begin  // MODEL_SCOPE_RELAXED
          if (r.op == OP_FENCE) ok = ok && oldest;
          else begin
            ok = ok && !old_sfence_same;
            if (r.op == OP_SCOPE_FENCE) ok = ok && !old_same;
            if (r.op == OP_STORE) ok = ok && !old_store;
            if (r.op == OP_LOAD)  ok = ok && !old_store_line;
          end
        end
      endcase
      elig[i] = ok;
    end
  end

  // Oldest eligible entry.
  logic             sel_valid;
  logic [$clog2(DEPTH)-1:0] sel;
  always_comb begin
    sel_valid = 1'b0;
    sel = '0;
    for (int i = DEPTH-1; i >= 0; i--)
      if (elig[i]) begin sel_valid = 1'b1; sel = ($clog2(DEPTH))'(i); end
  end

  // Fences of the ACK models are consumed here rather than sent.
  logic sel_consumed;
  assign sel_consumed = NEEDS_ACK &&
                        (buf_q[sel].op == OP_FENCE || buf_q[sel].op == OP_SCOPE_FENCE);
  assign out_valid = sel_valid && !sel_consumed;
  assign out_req   = buf_q[sel];

  logic pop;
  assign pop = sel_valid && (sel_consumed || out_ready);

  // Entries kept compact and oldest-first; count of valid entries.
  logic [CNT_W-1:0] count;
  always_comb begin
    count = '0;
    for (int i = 0; i < DEPTH; i++) count += CNT_W'(bv_q[i]);
  end
  assign in_ready = (count < CNT_W'(DEPTH)) || pop;

  logic push;
  assign push = in_valid && in_ready;

  // Index of the first free outstanding slot.
  logic [$clog2(OUT_DEPTH)-1:0] free_slot;
  always_comb begin
    free_slot = '0;
    for (int k = OUT_DEPTH-1; k >= 0; k--) if (!ov_q[k]) free_slot = ($clog2(OUT_DEPTH))'(k);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bv_q <= '0;
      ov_q <= '0;
      for (int i = 0; i < DEPTH; i++) buf_q[i] <= '0;
      for (int k = 0; k < OUT_DEPTH; k++) os_q[k] <= '0;
      stat_held_cycles <= '0;
      stat_bypasses    <= '0;
      stat_acks        <= '0;
    end else begin
      mem_req_t         nb [DEPTH];
      logic [DEPTH-1:0] nv;
      int               n;
      logic             acked;
      // remove the popped entry, compact, then append the new one
      n = 0;
      for (int i = 0; i < DEPTH; i++) begin
        nb[i] = '0;
        nv[i] = 1'b0;
      end
      for (int i = 0; i < DEPTH; i++) begin
        if (bv_q[i] && !(pop && i == int'(sel))) begin
          nb[n] = buf_q[i];
          nv[n] = 1'b1;
          n++;
        end
      end
      if (push) begin
        nb[n] = in_req;
        nv[n] = 1'b1;
      end
      buf_q <= nb;
      bv_q  <= nv;

      // outstanding table: release one entry per ACK, record issued PIM ops
      acked = 1'b0;
      if (ack_valid) begin
        stat_acks <= stat_acks + 1;
        for (int k = 0; k < OUT_DEPTH; k++)
          if (!acked && ov_q[k] && os_q[k] == ack_scope) begin
            ov_q[k] <= 1'b0;
            acked = 1'b1;
          end
      end
      if (NEEDS_ACK && pop && !sel_consumed && buf_q[sel].op == OP_PIM) begin
        ov_q[free_slot] <= 1'b1;
        os_q[free_slot] <= scope_of(buf_q[sel].addr);
      end

      if (|(bv_q & ~elig)) stat_held_cycles <= stat_held_cycles + 1;
      if (pop && (bv_q & ((DEPTH)'(1) << sel) - 1'b1) != '0) stat_bypasses <= stat_bypasses + 1;
    end
  end

  always_comb outstanding = ($clog2(OUT_DEPTH+1))'($countones(ov_q));

  // An ACK must match an outstanding PIM op.
  assert property (@(posedge clk) disable iff (!rst_n) ack_valid |-> out_has(ack_scope))
    else $error("entry_point: ACK without an outstanding PIM op");
endmodule
