// dmmr_system: a K-of-M DMMR (distributed minority and majority voting based
// redundancy) system, by default 5-of-7, with a 4x4 array multiplier as the
// replicated function module.
//
// How it works: M identical multipliers receive the same operands a and b.
// Modules 1..K form the majority logic group, modules K+1..M the minority
// logic group. The DMMR voter votes the majority group bitwise (MAJ), ORs the
// minority group bitwise (MIN) and outputs MAJ & MIN. The system output is
// right as long as a majority of the majority group and at least one module
// of the minority group work. 5-of-7 thus tolerates up to three faulty
// modules: at most two of the five majority modules and at most one of the
// two minority modules.
//
// Interface: a, b (N bits) in, y (2N bits) out, no clock and no reset. The
// module outputs are kept in the array f[0..M-1] (f[i] is module i+1), which
// is where faults are injected in simulation.
// Timing: combinational; one multiplier delay plus the voter delay.
//
// Topology, grouping and the multiplier as function module follow the paper;
// the default of 5-of-7 is the first 5-of-M system it evaluates. K = 3 gives
// the 3-of-M topology.
module dmmr_system #(
  parameter int unsigned K = dmmr_pkg::MAJ_K,
  parameter int unsigned M = dmmr_pkg::SYS_M,
  parameter int unsigned N = dmmr_pkg::OP_W
) (
  input  logic [N-1:0]   a,
  input  logic [N-1:0]   b,
  output logic [2*N-1:0] y
);
  localparam int unsigned W = 2 * N;

  // Outputs of the function modules, F1..FM.
  logic [W-1:0] f [M];
  logic [W-1:0] f_maj [K];
  logic [W-1:0] f_min [M-K];
  // MAJ and MIN of the voter, kept as named nets so that simulation can
  // observe them; nothing inside the system reads them (hence the lint
  // notice that they are unused).
  logic [W-1:0] maj, min;

  for (genvar i = 0; i < M; i++) begin : g_mod
    array_multiplier #(.N(N)) u_fm (
      .a (a),
      .b (b),
      .p (f[i])
    );
  end

  for (genvar i = 0; i < K; i++) begin : g_grp_maj
    assign f_maj[i] = f[i];
  end
  for (genvar i = 0; i < M - K; i++) begin : g_grp_min
    assign f_min[i] = f[K+i];
  end

  dmmr_voter #(.K(K), .M(M), .W(W)) u_voter (
    .maj_in (f_maj),
    .min_in (f_min),
    .maj    (maj),
    .min    (min),
    .y      (y)
  );

endmodule
