// dmmr_voter: the voter of a K-of-M DMMR system.
//
// The M module outputs arrive in two groups. The K outputs of the majority
// logic group go through a bitwise majority voter (MAJ). The M-K outputs of
// the minority logic group are ORed bitwise (MIN). The system output is
// y = MAJ & MIN. With this rule the output is right whenever a majority of
// the majority logic group and at least one module of the minority logic
// group are right: a 0 bit is set by MAJ alone, and a 1 bit needs MAJ and at
// least one 1 from the minority group. That is the correctness condition the
// reliability expressions of the DMMR scheme count.
//
// Interface: maj_in[0..K-1] = F1..FK, min_in[0..M-K-1] = F(K+1)..FM, each W
// bits; maj, min are the internal MAJ and MIN words, y the system output.
// Timing: combinational.
//
// The grouping, the majority voter and the correctness condition follow the
// paper. The paper draws the MIN element and the final element without naming
// them; OR and AND are the choice that meets the stated condition and its
// reliability expressions.
module dmmr_voter #(
  parameter int unsigned K = dmmr_pkg::MAJ_K,
  parameter int unsigned M = dmmr_pkg::SYS_M,
  parameter int unsigned W = dmmr_pkg::PROD_W
) (
  input  logic [W-1:0] maj_in [K],
  input  logic [W-1:0] min_in [M-K],
  output logic [W-1:0] maj,
  output logic [W-1:0] min,
  output logic [W-1:0] y
);
  initial begin
    assert (K >= 3 && K < M)
      else $error("dmmr_voter: need K >= 3 and K < M");
  end

  majority_voter #(.N(K), .W(W)) u_maj (
    .d   (maj_in),
    .maj (maj)
  );

  always_comb begin
    min = '0;
    for (int unsigned i = 0; i < M - K; i++) min |= min_in[i];
  end

  assign y = maj & min;

endmodule
