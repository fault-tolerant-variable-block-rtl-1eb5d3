// ftfa: fault tolerant reversible full adder made of two MIG gates.
//
//   first MIG  (A, B, k1, k2)            -> P1 = A, Q1 = A^B, R1 = AB^k1, S1 = g1
//   second MIG (Q1, Cin, R1, P1)         -> g2 = A^B, sum, cout, g3
//
// With the constant inputs k1 = k2 = 0 this gives sum = A^B^Cin and
// cout = (A^B)Cin ^ AB, with three garbage outputs:
//   g1 = AB',  g2 = A^B (the bit propagate, reused by the carry skip logic),
//   g3 = (A^B)Cin' ^ A.
// The structure (two MIGs, two constant zeros, three garbage lines) is the
// published one; which MIG pin each inner line enters is fixed here by the
// requirement that Q and R of the second MIG give sum and carry. All five
// outputs are a bijection of the five inputs and the gate keeps parity:
// a^b^cin^k1^k2 == sum^cout^g1^g2^g3 for every input.
// Combinational; the carry leaves through one MIG after cin arrives and two
// MIGs after a and b arrive.
module ftfa #(
  parameter int unsigned GATE_DELAY = 0
) (
  input  logic a,
  input  logic b,
  input  logic cin,
  input  logic k1,    // constant input, 0 in normal use
  input  logic k2,    // constant input, 0 in normal use
  output logic sum,
  output logic cout,
  output logic g1,
  output logic g2,
  output logic g3
);
  logic a_thru, a_xor_b, a_and_b;

  mig #(.GATE_DELAY(GATE_DELAY)) u_mig1 (
    .a(a), .b(b), .c(k1), .d(k2),
    .p(a_thru), .q(a_xor_b), .r(a_and_b), .s(g1)
  );

  mig #(.GATE_DELAY(GATE_DELAY)) u_mig2 (
    .a(a_xor_b), .b(cin), .c(a_and_b), .d(a_thru),
    .p(g2), .q(sum), .r(cout), .s(g3)
  );
endmodule
