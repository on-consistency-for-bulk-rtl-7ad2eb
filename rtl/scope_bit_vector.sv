// scope_bit_vector (SBV): one bit per cache set, high while the set holds at
// least one line of a PIM-enabled scope.
//
// Lines of bulk-bitwise PIM results cluster in a few cache sets, so a scan
// for a PIM op only needs to visit the sets whose SBV bit is high. The bit
// of a set is written whenever the set's contents change: the cache tag
// array reports, after a fill or an eviction/flush, whether any line still in
// the set is PIM-enabled (the paper's "set high on insertion, recheck the
// remaining lines on eviction").
//
// Interface and timing: upd_* writes one bit at the clock edge. The search
// port is combinational: given find_start it returns the lowest set index
// >= find_start whose bit is high (find_found=0 when there is none), so the
// scan controller can jump over unflagged sets in a single cycle. NSETS
// defaults to the 2048 sets of the evaluated 2MB, 16-way, 64B-line LLC.
// Reset clears all bits (the cache is empty after reset).
module scope_bit_vector #(
  parameter int unsigned NSETS = 2048
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     upd_valid,
  input  logic [$clog2(NSETS)-1:0] upd_set,
  input  logic                     upd_bit,
  input  logic [$clog2(NSETS)-1:0] find_start,
  output logic                     find_found,
  output logic [$clog2(NSETS)-1:0] find_set,
  output logic [NSETS-1:0]         bits,
  output logic [$clog2(NSETS+1)-1:0] flagged   // number of high bits
);
  localparam int unsigned IDX_W = $clog2(NSETS);

  logic [NSETS-1:0] sbv_q;
  assign bits = sbv_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         sbv_q <= '0;
    else if (upd_valid) sbv_q[upd_set] <= upd_bit;
  end

  // Lowest high bit at or above find_start.
  always_comb begin
    find_found = 1'b0;
    find_set   = '0;
    for (int i = NSETS-1; i >= 0; i--) begin
      if (sbv_q[i] && i >= int'(find_start)) begin
        find_found = 1'b1;
        find_set   = IDX_W'(i);
      end
    end
  end

  always_comb begin
    flagged = '0;
    for (int i = 0; i < NSETS; i++) flagged += sbv_q[i];
  end
endmodule
