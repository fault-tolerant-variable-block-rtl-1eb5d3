// ftcsa_block: B-bit fault tolerant reversible carry skip adder block.
//
// A Feynman Double gate with two constant zeros copies the block carry-in
// into c0 (to the first full adder), c0 again (to the skip multiplexer) and
// one garbage line. B FTFAs ripple the carry to c_B; their propagate lines
// feed the carry skip logic, which gives cout = P ? c0 : c_B with P the AND
// of all propagates. When P = 1 the rippled carry equals c0 anyway, so the
// sum is that of an ordinary adder; the skip only shortens the carry path.
//
// Garbage vector (4B+1 lines; 17 for B = 4):
//   [0]              F2G Q output
//   [B:1]            FTFA g1 lines, bit order
//   [2B:B+1]         FTFA g3 lines, bit order
//   [4B:2B+1]        carry skip logic garbage (see csl)
// Constant inputs: 2 per FTFA, 2 at the F2G and 1 per AND gate, 13 for B = 4.
// The parity of {x, y, cin} always equals the parity of {s, cout, garbage}.
// Combinational. KIND selects the NFT (default) or the Fredkin AND tree.
module ftcsa_block
  import vbcsl_pkg::*;
#(
  parameter int unsigned B          = 4,
  parameter csl_kind_e   KIND       = CSL_NFT,
  parameter int unsigned GATE_DELAY = 0
) (
  input  logic [B-1:0] x,
  input  logic [B-1:0] y,
  input  logic         cin,
  output logic [B-1:0] s,
  output logic         cout,
  output logic [4*B:0] garbage
);
  logic         c0_chain, c0_skip, cb;
  logic [B-1:0] prop;

  f2g #(.GATE_DELAY(GATE_DELAY)) u_copy (
    .a(cin), .b(1'b0), .c(1'b0),
    .p(c0_chain), .q(garbage[0]), .r(c0_skip)
  );

  ftrca #(.N(B), .GATE_DELAY(GATE_DELAY)) u_chain (
    .x(x), .y(y), .c0(c0_chain),
    .s(s), .cn(cb), .prop(prop),
    .g1(garbage[B:1]), .g3(garbage[2*B:B+1])
  );

  csl #(.B(B), .KIND(KIND), .GATE_DELAY(GATE_DELAY)) u_csl (
    .p(prop), .c0(c0_skip), .cb(cb),
    .cout(cout), .garbage(garbage[4*B:2*B+1])
  );
endmodule
