// tb_majority_voter: self-checking test of the bitwise majority voter as the
// 3-of-5 voter (default) and as the 2-of-3 voter. For N = 3 and 5 with W = 1
// every input combination is applied; for W = 8 random words are applied.
// The reference counts ones per bit in the testbench and compares with N/2.
module tb_majority_voter;
  int checks = 0;
  int failures = 0;

  logic [7:0] d5 [5];
  logic [7:0] d3 [3];
  logic [7:0] m5, m3;

  majority_voter dut5 (.d(d5), .maj(m5));
  majority_voter #(.N(3), .W(8)) dut3 (.d(d3), .maj(m3));

  function automatic logic [7:0] ref_maj(input logic [7:0] d [], input int n);
    logic [7:0] r;
    for (int k = 0; k < 8; k++) begin
      int ones = 0;
      for (int i = 0; i < n; i++) ones += int'(d[i][k]);
      r[k] = (2 * ones > n);
    end
    return r;
  endfunction

  initial begin : watchdog
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [7:0] dd [];
    // Exhaustive over one bit (bit 0 carries the pattern, others random).
    for (int v = 0; v < 32; v++) begin
      for (int i = 0; i < 5; i++) d5[i] = {7'($urandom), 1'(v >> i)};
      for (int i = 0; i < 3; i++) d3[i] = {7'($urandom), 1'(v >> i)};
      #1;
      checks += 2;
      if (m5[0] !== ($countones(v[4:0]) >= 3)) begin
        failures++;
        $display("FAIL 3-of-5 pattern %b got %b", v[4:0], m5[0]);
      end
      if (m3[0] !== ($countones(v[2:0]) >= 2)) begin
        failures++;
        $display("FAIL 2-of-3 pattern %b got %b", v[2:0], m3[0]);
      end
    end
    // Random words.
    for (int n = 0; n < 2000; n++) begin
      for (int i = 0; i < 5; i++) d5[i] = 8'($urandom);
      for (int i = 0; i < 3; i++) d3[i] = 8'($urandom);
      #1;
      checks += 2;
      dd = new[5];
      for (int i = 0; i < 5; i++) dd[i] = d5[i];
      if (m5 !== ref_maj(dd, 5)) begin
        failures++;
        $display("FAIL 3-of-5 word got %h", m5);
      end
      dd = new[3];
      for (int i = 0; i < 3; i++) dd[i] = d3[i];
      if (m3 !== ref_maj(dd, 3)) begin
        failures++;
        $display("FAIL 2-of-3 word got %h", m3);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
