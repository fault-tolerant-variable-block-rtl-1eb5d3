// tb_mig: exhaustive self-check of the mig gate.
// Applies all 2^4 input vectors and compares every output with P=A, Q=A^B, R=AB^C, S=AB'^D.
// Also checks the two properties the adder relies on: the gate is reversible
// (no two inputs give the same output vector) and parity preserving (XOR of
// the inputs equals XOR of the outputs). Ends with one TB_RESULT line.
module tb_mig;
  logic [3:0] in_v;
  logic [3:0] out_v;
  logic [3:0] exp_v;
  int checks = 0;
  int failures = 0;
  logic [(1<<4)-1:0] seen;

  mig dut (.a(in_v[3]), .b(in_v[2]), .c(in_v[1]), .d(in_v[0]), .p(out_v[3]), .q(out_v[2]), .r(out_v[1]), .s(out_v[0]));

  // MIG gate written per value of A:
  //   A = 0: P = 0, Q = B,  R = C,  S = D
  //   A = 1: P = 1, Q = ~B, R = B^C, S = ~B^D
  function automatic logic [3:0] expected(logic [3:0] v);
    logic a, b, c, d;
    {a, b, c, d} = v;
    return a ? {1'b1, ~b, b ^ c, ~b ^ d} : {1'b0, b, c, d};
  endfunction

  initial begin
    #10000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    seen = '0;
    for (int v = 0; v < (1 << 4); v++) begin
      in_v = v[3:0];
      #1;
      exp_v = expected(in_v);
      checks++;
      if (out_v !== exp_v) begin
        failures++;
        $display("FAIL in=%b out=%b expected=%b", in_v, out_v, exp_v);
      end
      checks++;
      if ((^in_v) != (^out_v)) begin
        failures++;
        $display("FAIL parity in=%b out=%b", in_v, out_v);
      end
      checks++;
      if (seen[out_v]) begin
        failures++;
        $display("FAIL output %b repeated: not reversible", out_v);
      end
      seen[out_v] = 1'b1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
