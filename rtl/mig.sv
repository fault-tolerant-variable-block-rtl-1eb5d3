// mig: 4*4 modified IG gate, parity preserving reversible gate.
//
//   P = A,  Q = A ^ B,  R = AB ^ C,  S = AB' ^ D
//
// It is the IG gate with its fourth output BD ^ B'(A ^ D) rewritten into the
// equivalent, cheaper AB' ^ D. Two of them make a fault tolerant full adder.
// Purely combinational; GATE_DELAY is a simulation-only delay.
module mig #(
  parameter int unsigned GATE_DELAY = 0
) (
  input  logic a,
  input  logic b,
  input  logic c,
  input  logic d,
  output logic p,
  output logic q,
  output logic r,
  output logic s
);

  // A zero-delay build uses plain assignments; a delayed build is for
  // path-delay measurement in simulation only.
  if (GATE_DELAY == 0) begin : g_comb
    assign p = a;
    assign q = a ^ b;
    assign r = (a & b) ^ c;
    assign s = (a & ~b) ^ d;
  end else begin : g_delayed
    assign #(GATE_DELAY) p = a;
    assign #(GATE_DELAY) q = a ^ b;
    assign #(GATE_DELAY) r = (a & b) ^ c;
    assign #(GATE_DELAY) s = (a & ~b) ^ d;
  end
endmodule
