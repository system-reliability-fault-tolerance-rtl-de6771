// tb_dmmr_system: end-to-end test of the DMMR system at its default size,
// 5-of-7 with 4x4 array multipliers.
//
// Faults are injected by forcing the output of a function module (the array
// f inside the system) to a wrong word. The test has three parts.
//  1. Fault-free: all 256 operand pairs give y = a*b.
//  2. Fault-set sweep: for each of the 2^7 sets of faulty modules, every
//     faulty module outputs the complement of the right product, and all
//     256 operand pairs are applied. A set counts as tolerated when y = a*b
//     for every pair. It must be tolerated exactly when at least 3 of the 5
//     majority modules and at least 1 of the 2 minority modules are
//     fault-free. The number of tolerated sets with f faulty modules is the
//     coefficient of R^(7-f)(1-R)^f in the system reliability, which must be
//     1, 7, 20, 20 for f = 0..3 and 0 beyond, and the reliability at R = 0.9,
//     0.8 and 0.95 must match the published closed form.
//  3. Random faults: random operands, random fault sets and random wrong
//     words; when the set is one the scheme tolerates, y must equal a*b.
// Each mechanism is counted and must occur: a majority-group fault masked, a
// minority-group fault masked, the majority group outvoted (wrong output),
// and the whole minority group lost (wrong output).
module tb_dmmr_system;
  localparam int K = 5;
  localparam int M = 7;

  int checks = 0;
  int failures = 0;
  int n_maj_masked = 0, n_min_masked = 0, n_maj_lost = 0, n_min_lost = 0;
  int tol_count [M+1];

  logic [3:0] a, b;
  logic [7:0] y;
  logic [M-1:0] mask;
  logic [7:0] fv [M];

  dmmr_system dut (.a(a), .b(b), .y(y));

  // Fault injection: a faulty module's output is replaced by fv[i].
  for (genvar i = 0; i < M; i++) begin : g_fault
    always_comb begin
      if (mask[i]) force dut.f[i] = fv[i];
      else release dut.f[i];
    end
  end

  function automatic real rs_eq1(input real r);
    real q = 1.0 - r;
    return 20.0 * r**4 * q**3 + 20.0 * r**5 * q**2 + 7.0 * r**6 * q + r**7;
  endfunction

  function automatic bit scheme_tolerates(input logic [M-1:0] m);
    int good_maj = 0, good_min = 0;
    for (int i = 0; i < K; i++) if (!m[i]) good_maj++;
    for (int i = K; i < M; i++) if (!m[i]) good_min++;
    return (good_maj >= (K + 1) / 2) && (good_min >= 1);
  endfunction

  task automatic check(input string what, input bit ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin : watchdog
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit all_ok, exp_tol;
    int nf;
    real rs, r;
    real rvals [3] = '{0.9, 0.8, 0.95};

    mask = '0;
    foreach (fv[i]) fv[i] = '0;
    foreach (tol_count[i]) tol_count[i] = 0;

    // 1. Fault-free operation (combinational: checked 1 ns after the inputs).
    for (int i = 0; i < 256; i++) begin
      a = 4'(i);
      b = 4'(i >> 4);
      #1;
      check($sformatf("fault-free %0d*%0d got %0d", a, b, y), y == 8'(int'(a) * int'(b)));
    end

    // 2. Sweep all fault sets with complemented outputs.
    for (int s = 0; s < (1 << M); s++) begin
      all_ok = 1;
      for (int i = 0; i < 256; i++) begin
        a = 4'(i);
        b = 4'(i >> 4);
        foreach (fv[k]) fv[k] = ~(8'(int'(a) * int'(b)));
        mask = M'(s);
        #1;
        if (y != 8'(int'(a) * int'(b))) all_ok = 0;
      end
      mask = '0;
      nf = $countones(M'(s));
      exp_tol = scheme_tolerates(M'(s));
      check($sformatf("fault set %b tolerated=%0b expected %0b", M'(s), all_ok, exp_tol),
            all_ok == exp_tol);
      if (all_ok) begin
        tol_count[nf]++;
        if (|M'(s) & ((1 << K) - 1)) n_maj_masked++;
        if (|(M'(s) >> K)) n_min_masked++;
      end else begin
        if ((M'(s) >> K) == M'((1 << (M - K)) - 1)) n_min_lost++;
        else n_maj_lost++;
      end
    end

    // Reliability coefficients of Eq. (1): 1, 7, 20, 20, 0, 0, 0, 0.
    check("coef f=0", tol_count[0] == 1);
    check("coef f=1", tol_count[1] == 7);
    check("coef f=2", tol_count[2] == 20);
    check("coef f=3", tol_count[3] == 20);
    for (int f = 4; f <= M; f++) check($sformatf("coef f=%0d", f), tol_count[f] == 0);
    foreach (rvals[j]) begin
      r = rvals[j];
      rs = 0.0;
      for (int f = 0; f <= M; f++) rs += real'(tol_count[f]) * r**(M - f) * (1.0 - r)**f;
      $display("R_M=%0.2f  R_S(built)=%0.8f  R_S(Eq.1)=%0.8f", r, rs, rs_eq1(r));
      check("R_S matches Eq. (1)", (rs - rs_eq1(r)) < 1e-9 && (rs_eq1(r) - rs) < 1e-9);
    end
    check("R_S(0.9) = 0.9815256", (rs_eq1(0.9) - 0.9815256) < 1e-9 && (0.9815256 - rs_eq1(0.9)) < 1e-9);

    // 3. Random fault sets with random wrong words.
    for (int n = 0; n < 20000; n++) begin
      logic [M-1:0] m;
      logic [7:0] pr;
      a = 4'($urandom);
      b = 4'($urandom);
      pr = 8'(int'(a) * int'(b));
      m = M'($urandom);
      foreach (fv[k]) fv[k] = pr ^ 8'($urandom_range(255, 1));
      mask = m;
      #1;
      if (scheme_tolerates(m)) begin
        check($sformatf("random faults %b: %0d*%0d got %0d", m, a, b, y), y == pr);
        if (|m) n_maj_masked += int'(|m[K-1:0]);
      end
      mask = '0;
    end

    $display("mechanisms: maj_masked=%0d min_masked=%0d maj_lost=%0d min_lost=%0d",
             n_maj_masked, n_min_masked, n_maj_lost, n_min_lost);
    check("majority-group fault masked", n_maj_masked > 0);
    check("minority-group fault masked", n_min_masked > 0);
    check("majority group outvoted", n_maj_lost > 0);
    check("minority group lost", n_min_lost > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
