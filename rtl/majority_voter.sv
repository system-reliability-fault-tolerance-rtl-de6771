// majority_voter: bitwise N-input majority voter, the "Majority Voter" of the
// DMMR voter. N = 3 gives the 2-of-3 voter of the 3-of-M system, N = 5 (the
// default) the 3-of-5 voter of the 5-of-M system.
//
// How it works: for every bit position the N input bits are counted, and the
// output bit is 1 when more than N/2 of them are 1, i.e. at least (N+1)/2.
// Interface: d[0..N-1] are the W-bit outputs of the majority logic group,
// maj is the voted W-bit word (MAJ). Timing: combinational.
//
// The voting rule follows the paper; the paper takes the voters' gate-level
// structure from other work, so the count-and-compare form here is this
// design's choice (synthesis reduces it to the same Boolean function).
module majority_voter #(
  parameter int unsigned N = dmmr_pkg::MAJ_K,
  parameter int unsigned W = dmmr_pkg::PROD_W
) (
  input  logic [W-1:0] d [N],
  output logic [W-1:0] maj
);
  localparam int unsigned CW = $clog2(N + 1);

  initial begin
    assert (N % 2 == 1 && N >= 3)
      else $error("majority_voter: N must be odd and at least 3");
  end

  always_comb begin
    for (int unsigned k = 0; k < W; k++) begin
      logic [CW-1:0] ones;
      ones = '0;
      for (int unsigned i = 0; i < N; i++) ones += CW'(d[i][k]);
      maj[k] = (ones > CW'(N / 2));
    end
  end

endmodule
