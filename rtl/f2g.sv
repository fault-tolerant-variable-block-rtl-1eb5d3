// f2g: 3*3 Feynman Double gate, a parity preserving reversible gate.
//
//   P = A,  Q = A ^ B,  R = A ^ C
//
// With B = C = 0 it makes two fault tolerant copies of A; the carry skip
// block uses it that way so that the block carry-in can feed both the full
// adder chain and the skip multiplexer without fan-out. Purely
// combinational. GATE_DELAY (default 0) is a simulation-only delay per gate
// used to measure path delay in gate counts; synthesis ignores it.
module f2g #(
  parameter int unsigned GATE_DELAY = 0
) (
  input  logic a,
  input  logic b,
  input  logic c,
  output logic p,
  output logic q,
  output logic r
);

  // A zero-delay build uses plain assignments; a delayed build is for
  // path-delay measurement in simulation only.
  if (GATE_DELAY == 0) begin : g_comb
    assign p = a;
    assign q = a ^ b;
    assign r = a ^ c;
  end else begin : g_delayed
    assign #(GATE_DELAY) p = a;
    assign #(GATE_DELAY) q = a ^ b;
    assign #(GATE_DELAY) r = a ^ c;
  end
endmodule
