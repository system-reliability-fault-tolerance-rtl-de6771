// tb_dmmr_workloads: fault-tolerance and reliability of the DMMR systems
// other than the default 5-of-7 that are evaluated for this scheme:
// 5-of-8, 3-of-6 and 3-of-7, each built by overriding K and M of the system.
//
// For each one a dmmr_fault_sweep instance measures which sets of faulty
// modules the RTL tolerates. The test then checks:
//  - every measured verdict agrees with the DMMR rule;
//  - the largest tolerated number of faulty modules (3 for 3-of-6, 4 for
//    3-of-7 and 5-of-8);
//  - the reliability coefficients (tolerated sets per number of faulty
//    modules): 1, 8, 28, 45, 30 for 5-of-8, as published, and 1, 6, 12, 9
//    for 3-of-6 and 1, 7, 18, 22, 12 for 3-of-7, worked out from the rule;
//  - the system reliability at module reliability 0.9, computed from the
//    measured counts, against the published values 0.99044856 (5-of-8),
//    0.971028 (3-of-6) and 0.9719028 (3-of-7).
module tb_dmmr_workloads;
  int checks = 0;
  int failures = 0;

  logic d58, d36, d37;
  int c58 [9], c36 [7], c37 [8];
  int mm58, mm36, mm37, n58, n36, n37;

  dmmr_fault_sweep #(.K(5), .M(8)) u58 (.done(d58), .tol_count(c58), .mismatches(mm58), .sets_checked(n58));
  dmmr_fault_sweep #(.K(3), .M(6)) u36 (.done(d36), .tol_count(c36), .mismatches(mm36), .sets_checked(n36));
  dmmr_fault_sweep #(.K(3), .M(7)) u37 (.done(d37), .tol_count(c37), .mismatches(mm37), .sets_checked(n37));

  task automatic check(input string what, input bit ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  function automatic real rs_of(input int c [], input real r);
    real rs = 0.0;
    int m = c.size() - 1;
    for (int f = 0; f <= m; f++) rs += real'(c[f]) * r**(m - f) * (1.0 - r)**f;
    return rs;
  endfunction

  function automatic int max_tol(input int c []);
    int mx = -1;
    foreach (c[f]) if (c[f] > 0) mx = f;
    return mx;
  endfunction

  function automatic bit close(input real x, input real y);
    return (x - y) < 1e-9 && (y - x) < 1e-9;
  endfunction

  initial begin : watchdog
    #100000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int a58 [], a36 [], a37 [];
    int exp58 [9] = '{1, 8, 28, 45, 30, 0, 0, 0, 0};
    // 3-of-M counts worked out by hand from the rule (2 of 3 majority
    // copies and 1 of M-3 minority copies fault-free).
    int exp36 [7] = '{1, 6, 12, 9, 0, 0, 0};
    int exp37 [8] = '{1, 7, 18, 22, 12, 0, 0, 0};
    real r;
    wait (d58 && d36 && d37);
    a58 = new[9]; foreach (a58[i]) a58[i] = c58[i];
    a36 = new[7]; foreach (a36[i]) a36[i] = c36[i];
    a37 = new[8]; foreach (a37[i]) a37[i] = c37[i];

    check("5-of-8 rule", mm58 == 0 && n58 == 256);
    check("3-of-6 rule", mm36 == 0 && n36 == 64);
    check("3-of-7 rule", mm37 == 0 && n37 == 128);
    foreach (exp58[f]) check($sformatf("5-of-8 coef f=%0d: %0d", f, c58[f]), c58[f] == exp58[f]);
    foreach (exp36[f]) check($sformatf("3-of-6 coef f=%0d: %0d", f, c36[f]), c36[f] == exp36[f]);
    foreach (exp37[f]) check($sformatf("3-of-7 coef f=%0d: %0d", f, c37[f]), c37[f] == exp37[f]);
    check("3-of-6 tolerates up to 3 faulty modules", max_tol(a36) == 3);
    check("3-of-7 tolerates up to 4 faulty modules", max_tol(a37) == 4);
    check("5-of-8 tolerates up to 4 faulty modules", max_tol(a58) == 4);
    r = 0.9;
    $display("R_M=0.9: 5-of-8 %0.8f, 3-of-6 %0.8f, 3-of-7 %0.8f",
             rs_of(a58, r), rs_of(a36, r), rs_of(a37, r));
    check("5-of-8 R_S(0.9) = 0.99044856", close(rs_of(a58, r), 0.99044856));
    check("3-of-6 R_S(0.9) = 0.971028", close(rs_of(a36, r), 0.971028));
    check("3-of-7 R_S(0.9) = 0.9719028", close(rs_of(a37, r), 0.9719028));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
