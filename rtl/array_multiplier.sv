// array_multiplier: the function module replicated in the DMMR system, an
// N x N unsigned array (Braun) multiplier, N = 4 by default.
//
// How it works: partial product bit pp[i][j] = a[j] & b[i] has weight i+j.
// Row 0 is pp[0][*]. Each later row i (1..N-1) is a line of N full adders
// that adds pp[i][j], the sum from the row above one column to the left and
// the carry from the row above in the same column (carry-save form). Row i
// delivers product bit i from its rightmost cell. The sums and carries left
// after the last row are merged by an N-bit ripple-carry row that delivers
// the upper N product bits.
//
// Interface: a, b (N bits each) in, p = a * b (2N bits) out.
// Timing: combinational, no clock; the critical path runs through the N-1
// carry-save rows and the ripple row.
//
// The paper takes the multiplier as a given 4x4 array multiplier and shows
// none of its cells; the Braun structure is the textbook one and this
// design's choice.
//
// The module carries the keep_hierarchy attribute: the M copies in a DMMR
// system are identical, and a flattening synthesis run would otherwise be
// free to merge them into one and remove the redundancy. Keeping each copy
// intact follows the paper, which preserved the structure of the redundant
// systems during technology mapping.
(* keep_hierarchy *)
module array_multiplier #(
  parameter int unsigned N = dmmr_pkg::OP_W
) (
  input  logic [N-1:0]   a,
  input  logic [N-1:0]   b,
  output logic [2*N-1:0] p
);
  // s[i][j], c[i][j]: sum and carry of cell j in row i (weight i+j, i+j+1).
  // s[i][N] is a constant 0 that feeds the leftmost cell of the next row.
  logic [N:0]   s [N];
  logic [N-1:0] c [N];
  // Carry chain of the final ripple-carry row.
  logic [N-1:0] rc;

  // Row 0: partial products only.
  for (genvar j = 0; j < N; j++) begin : g_row0
    assign s[0][j] = a[j] & b[0];
    assign c[0][j] = 1'b0;
  end
  assign s[0][N] = 1'b0;
  assign p[0]    = s[0][0];

  // Carry-save rows.
  for (genvar i = 1; i < N; i++) begin : g_row
    for (genvar j = 0; j < N; j++) begin : g_cell
      full_adder u_fa (
        .x  (a[j] & b[i]),
        .y  (s[i-1][j+1]),
        .ci (c[i-1][j]),
        .s  (s[i][j]),
        .co (c[i][j])
      );
    end
    assign s[i][N] = 1'b0;
    assign p[i]    = s[i][0];
  end

  // Final ripple-carry row: adds s[N-1][j+1] and c[N-1][j] (weight N+j).
  assign rc[0] = 1'b0;
  for (genvar j = 0; j < N - 1; j++) begin : g_ripple
    full_adder u_fa (
      .x  (s[N-1][j+1]),
      .y  (c[N-1][j]),
      .ci (rc[j]),
      .s  (p[N+j]),
      .co (rc[j+1])
    );
  end
  // Top bit: s[N-1][N] is 0, and the product of two N-bit numbers never
  // carries out of 2N bits, so only the sum is needed.
  assign p[2*N-1] = c[N-1][N-1] ^ rc[N-1];

endmodule
