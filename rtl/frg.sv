// frg: 3*3 Fredkin gate (controlled swap), parity preserving and
// conservative.
//
//   P = A,  Q = A'B ^ AC,  R = A'C ^ AB
//
// When A = 1 the lines B and C swap. With C = 0 the R output is the AND A*B;
// with A = P, B = c_B, C = c0 the Q output is the carry skip multiplexer
// P ? c0 : c_B. Purely combinational; GATE_DELAY is a simulation-only delay.
module frg #(
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
    assign q = (~a & b) ^ (a & c);
    assign r = (~a & c) ^ (a & b);
  end else begin : g_delayed
    assign #(GATE_DELAY) p = a;
    assign #(GATE_DELAY) q = (~a & b) ^ (a & c);
    assign #(GATE_DELAY) r = (~a & c) ^ (a & b);
  end
endmodule
