// tb_nft: exhaustive self-check of the nft gate.
// Applies all 2^3 input vectors and compares every output with
// P=A^B, Q=B'C^AC', R=BC^AC' (the parity preserving form of the gate).
// Also checks the two properties the adder relies on: the gate is reversible
// (no two inputs give the same output vector) and parity preserving (XOR of
// the inputs equals XOR of the outputs). Ends with one TB_RESULT line.
module tb_nft;
  logic [2:0] in_v;
  logic [2:0] out_v;
  logic [2:0] exp_v;
  int checks = 0;
  int failures = 0;
  logic [(1<<3)-1:0] seen;

  nft dut (.a(in_v[2]), .b(in_v[1]), .c(in_v[0]), .p(out_v[2]), .q(out_v[1]), .r(out_v[0]));

  // New Fault Tolerant gate written per value of C:
  //   C = 0: P = A^B, Q = A,  R = A
  //   C = 1: P = A^B, Q = ~B, R = B
  function automatic logic [2:0] expected(logic [2:0] v);
    logic a, b, c;
    {a, b, c} = v;
    return c ? {a ^ b, ~b, b} : {a ^ b, a, a};
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
    for (int v = 0; v < (1 << 3); v++) begin
      in_v = v[2:0];
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
