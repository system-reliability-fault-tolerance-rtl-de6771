// tb_dmmr_voter: self-checking test of the DMMR voter in the default 5-of-7
// form and in the 3-of-6 form.
//
// Part 1 applies random words and checks MAJ, MIN and y against a reference
// model written from the definition (majority count, OR, AND). Part 2 checks
// the correctness condition directly: a correct word v is chosen, a random
// set of modules is made faulty (random wrong words), and whenever a
// majority of the majority group and at least one minority module still
// hold v, the voter output must equal v.
module tb_dmmr_voter;
  int checks = 0;
  int failures = 0;
  int tolerated = 0;

  logic [7:0] a_maj [5];
  logic [7:0] a_min [2];
  logic [7:0] a_mj, a_mn, a_y;
  logic [7:0] b_maj [3];
  logic [7:0] b_min [3];
  logic [7:0] b_mj, b_mn, b_y;

  dmmr_voter dut57 (.maj_in(a_maj), .min_in(a_min), .maj(a_mj), .min(a_mn), .y(a_y));
  dmmr_voter #(.K(3), .M(6), .W(8)) dut36 (.maj_in(b_maj), .min_in(b_min),
                                           .maj(b_mj), .min(b_mn), .y(b_y));

  function automatic logic [7:0] maj_of(input logic [7:0] d [], input int n);
    logic [7:0] r;
    for (int k = 0; k < 8; k++) begin
      int ones = 0;
      for (int i = 0; i < n; i++) ones += int'(d[i][k]);
      r[k] = (2 * ones > n);
    end
    return r;
  endfunction

  function automatic logic [7:0] or_of(input logic [7:0] d [], input int n);
    logic [7:0] r = '0;
    for (int i = 0; i < n; i++) r |= d[i];
    return r;
  endfunction

  task automatic check(input string what, input logic [7:0] got, input logic [7:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  initial begin : watchdog
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [7:0] dm [];
    logic [7:0] dn [];
    logic [7:0] v;
    int good_maj, good_min;

    // Part 1: random words against the reference model.
    for (int n = 0; n < 2000; n++) begin
      for (int i = 0; i < 5; i++) a_maj[i] = 8'($urandom);
      for (int i = 0; i < 2; i++) a_min[i] = 8'($urandom);
      for (int i = 0; i < 3; i++) b_maj[i] = 8'($urandom);
      for (int i = 0; i < 3; i++) b_min[i] = 8'($urandom);
      #1;
      dm = new[5]; foreach (dm[i]) dm[i] = a_maj[i];
      dn = new[2]; foreach (dn[i]) dn[i] = a_min[i];
      check("5-of-7 MAJ", a_mj, maj_of(dm, 5));
      check("5-of-7 MIN", a_mn, or_of(dn, 2));
      check("5-of-7 y", a_y, maj_of(dm, 5) & or_of(dn, 2));
      dm = new[3]; foreach (dm[i]) dm[i] = b_maj[i];
      dn = new[3]; foreach (dn[i]) dn[i] = b_min[i];
      check("3-of-6 MAJ", b_mj, maj_of(dm, 3));
      check("3-of-6 MIN", b_mn, or_of(dn, 3));
      check("3-of-6 y", b_y, maj_of(dm, 3) & or_of(dn, 3));
    end

    // Part 2: the correctness condition with random faulty words.
    for (int n = 0; n < 4000; n++) begin
      v = 8'($urandom);
      good_maj = 0;
      good_min = 0;
      for (int i = 0; i < 5; i++) begin
        if ($urandom_range(2) == 0) a_maj[i] = v ^ 8'($urandom_range(255, 1));
        else begin a_maj[i] = v; good_maj++; end
      end
      for (int i = 0; i < 2; i++) begin
        if ($urandom_range(2) == 0) a_min[i] = v ^ 8'($urandom_range(255, 1));
        else begin a_min[i] = v; good_min++; end
      end
      #1;
      if (good_maj >= 3 && good_min >= 1) begin
        tolerated++;
        check("5-of-7 tolerated fault set", a_y, v);
      end
    end
    checks++;
    if (tolerated < 100) begin
      failures++;
      $display("FAIL too few tolerated fault sets exercised: %0d", tolerated);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
