// dmmr_fault_sweep: testbench helper that measures the fault tolerance of a
// K-of-M DMMR system built from the RTL.
//
// It instantiates one dmmr_system with the given K and M and, for every one
// of the 2^M sets of faulty modules, forces each faulty module's output to
// the complement of the right product and applies all 256 operand pairs. A
// set is tolerated when the system output is right for every pair. The
// helper counts, per number f of faulty modules, the tolerated sets
// (tol_count[f], the coefficient of R^(M-f)(1-R)^f in the reliability), and
// counts a mismatch whenever the measured verdict differs from the scheme's
// rule (a majority of the K majority modules and at least one of the M-K
// minority modules fault-free). done rises when the sweep is over.
module dmmr_fault_sweep #(
  parameter int K = 5,
  parameter int M = 7
) (
  output logic done,
  output int   tol_count [M+1],
  output int   mismatches,
  output int   sets_checked
);
  logic [3:0] a, b;
  logic [7:0] y;
  logic [M-1:0] mask;
  logic [7:0] fv;

  dmmr_system #(.K(K), .M(M)) u_dut (.a(a), .b(b), .y(y));

  for (genvar i = 0; i < M; i++) begin : g_fault
    always_comb begin
      if (mask[i]) force u_dut.f[i] = fv;
      else release u_dut.f[i];
    end
  end

  initial begin
    bit all_ok, exp_tol;
    int good_maj, good_min;
    done = 0;
    mismatches = 0;
    sets_checked = 0;
    mask = '0;
    fv = '0;
    foreach (tol_count[i]) tol_count[i] = 0;
    for (int s = 0; s < (1 << M); s++) begin
      all_ok = 1;
      for (int i = 0; i < 256; i++) begin
        a = 4'(i);
        b = 4'(i >> 4);
        fv = ~(8'(int'(a) * int'(b)));
        mask = M'(s);
        #1;
        if (y != 8'(int'(a) * int'(b))) all_ok = 0;
      end
      mask = '0;
      good_maj = 0;
      good_min = 0;
      for (int i = 0; i < K; i++) if (!s[i]) good_maj++;
      for (int i = K; i < M; i++) if (!s[i]) good_min++;
      exp_tol = (good_maj >= (K + 1) / 2) && (good_min >= 1);
      sets_checked++;
      if (all_ok != exp_tol) mismatches++;
      if (all_ok) tol_count[$countones(M'(s))]++;
    end
    done = 1;
  end
endmodule
