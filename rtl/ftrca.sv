// ftrca: N-bit fault tolerant ripple carry adder, a chain of FTFAs.
//
// Stage i adds x[i], y[i] and carry c_i and passes c_{i+1} to stage i+1.
// Both constant inputs of every FTFA are tied to 0. Besides the sum and the
// final carry the chain exports, per bit, the propagate x[i]^y[i] (the
// FTFA's g2 line) and the two remaining garbage lines g1 and g3.
// Combinational: the carry out settles 2 + (N-1) MIG delays after the
// operands and N MIG delays after c0.
module ftrca #(
  parameter int unsigned N          = 4,
  parameter int unsigned GATE_DELAY = 0
) (
  input  logic [N-1:0] x,
  input  logic [N-1:0] y,
  input  logic         c0,
  output logic [N-1:0] s,
  output logic         cn,
  output logic [N-1:0] prop,
  output logic [N-1:0] g1,
  output logic [N-1:0] g3
);
  logic [N:0] c;

  assign c[0] = c0;

  for (genvar i = 0; i < N; i++) begin : g_bit
    ftfa #(.GATE_DELAY(GATE_DELAY)) u_fa (
      .a(x[i]), .b(y[i]), .cin(c[i]), .k1(1'b0), .k2(1'b0),
      .sum(s[i]), .cout(c[i+1]), .g1(g1[i]), .g2(prop[i]), .g3(g3[i])
    );
  end

  assign cn = c[N];
endmodule
