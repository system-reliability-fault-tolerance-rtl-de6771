// tb_array_multiplier: exhaustive self-checking test of the 4x4 array
// multiplier. Every one of the 256 operand pairs is applied and the product
// is compared with the integer product a*b computed in the testbench. A
// 6-bit instance is also checked with random operands. Combinational block:
// each result is sampled 1 ns after the operands change (zero-cycle latency).
module tb_array_multiplier;
  int checks = 0;
  int failures = 0;

  logic [3:0] a, b;
  logic [7:0] p;
  logic [5:0] a6, b6;
  logic [11:0] p6;

  array_multiplier dut (.a(a), .b(b), .p(p));
  array_multiplier #(.N(6)) dut6 (.a(a6), .b(b6), .p(p6));

  initial begin : watchdog
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 16; i++) begin
      for (int j = 0; j < 16; j++) begin
        a = 4'(i);
        b = 4'(j);
        #1;
        checks++;
        if (p !== 8'(i * j)) begin
          failures++;
          $display("FAIL %0d * %0d: got %0d", i, j, p);
        end
      end
    end
    for (int n = 0; n < 500; n++) begin
      a6 = 6'($urandom);
      b6 = 6'($urandom);
      #1;
      checks++;
      if (p6 !== 12'(int'(a6) * int'(b6))) begin
        failures++;
        $display("FAIL 6-bit %0d * %0d: got %0d", a6, b6, p6);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
