// tb_ftfa: exhaustive self-check of the two-MIG fault tolerant full adder.
// With both constant inputs at 0 it compares {cout, sum} with a + b + cin
// and the three garbage lines with their closed forms
//   g1 = a & ~b,  g2 = a ^ b,  g3 = ((a ^ b) & ~cin) ^ a.
// Over all 32 values of {a, b, cin, k1, k2} it checks that the adder is
// reversible (no output vector repeats) and parity preserving.
module tb_ftfa;
  logic a, b, cin, k1, k2;
  logic sum, cout, g1, g2, g3;
  int checks = 0;
  int failures = 0;
  logic [31:0] seen;

  ftfa dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s: a=%b b=%b cin=%b k1=%b k2=%b -> sum=%b cout=%b g=%b%b%b",
               what, a, b, cin, k1, k2, sum, cout, g1, g2, g3);
    end
  endtask

  initial begin
    #10000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [1:0] total;
    logic [4:0] outv;
    seen = '0;
    for (int v = 0; v < 32; v++) begin
      {a, b, cin, k1, k2} = v[4:0];
      #1;
      outv = {sum, cout, g1, g2, g3};
      if (!k1 && !k2) begin
        total = 2'(a) + 2'(b) + 2'(cin);
        check({cout, sum} == total, "sum/carry");
        check(g1 == (a & ~b), "g1");
        check(g2 == (a ^ b), "g2 (propagate)");
        check(g3 == (((a ^ b) & ~cin) ^ a), "g3");
      end
      check((a ^ b ^ cin ^ k1 ^ k2) == (^outv), "parity preserved");
      check(!seen[outv], "reversible");
      seen[outv] = 1'b1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
