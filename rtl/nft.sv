// nft: 3*3 New Fault Tolerant gate, parity preserving reversible gate.
//
//   P = A ^ B,  Q = B'C ^ AC',  R = BC ^ AC'
//
// The gate is often printed with Q = BC' ^ AC'; taken literally that form is
// neither reversible (ABC = 000 and 001 both give 000) nor parity
// preserving. Given P and R, B'C ^ AC' is the only Q for which
// P ^ Q ^ R = A ^ B ^ C, and with it the gate is a bijection, so that Q is
// used here.
//
// With A = 0 the outputs are P = B, Q = B'C, R = BC, so R is a reversible
// two-input AND; the NFT carry skip variant builds its AND tree this way.
// Purely combinational; GATE_DELAY is a simulation-only delay.
module nft #(
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
    assign p = a ^ b;
    assign q = (~b & c) ^ (a & ~c);
    assign r = (b & c) ^ (a & ~c);
  end else begin : g_delayed
    assign #(GATE_DELAY) p = a ^ b;
    assign #(GATE_DELAY) q = (~b & c) ^ (a & ~c);
    assign #(GATE_DELAY) r = (b & c) ^ (a & ~c);
  end
endmodule
