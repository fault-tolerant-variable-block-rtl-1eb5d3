// csl: carry skip logic of one B-bit fault tolerant carry skip block.
//
// The block propagate P = p[0] & p[1] & ... & p[B-1] is formed by a balanced
// binary tree of B-1 reversible two-input AND gates, ceil(log2 B) levels
// deep. The tree is laid out as a heap: node i (1 <= i < B) is the AND of
// nodes 2i and 2i+1, nodes B..2B-1 are the inputs p[0..B-1], node 1 is P.
// For B = 4 this is AND(p0,p1), AND(p2,p3) and their AND, as published.
// KIND selects the AND gate:
//   CSL_NFT  NFT with A = 0:        R = B*C, garbage P = B, Q = BC'
//   CSL_FRG  Fredkin with C = 0:    R = A*B, garbage P = A, Q = A'B
// A final Fredkin gate with A = P, B = cb, C = c0 is the skip multiplexer:
// its Q output is cout = P ? c0 : cb; its P and R outputs are garbage.
//
// garbage[2i-2 +: 2] holds {Q, P} of tree node i, garbage[2B-2 +: 2] holds
// {R, P} of the multiplexer. The gate types, the tree for B = 4 and the
// multiplexer are the published design; the heap layout for other B is this
// implementation's choice. Combinational: P is ceil(log2 B) gates after the
// propagates, cout one gate after P, c0 and cb.
// Some garbage lines are copies of an input (an NFT with A = 0 passes B to
// P, the multiplexer passes P to its P output); that is what a reversible
// gate with a constant input does, and they are kept for the parity check.
module csl
  import vbcsl_pkg::*;
#(
  parameter int unsigned B          = 4,
  parameter csl_kind_e   KIND       = CSL_NFT,
  parameter int unsigned GATE_DELAY = 0
) (
  input  logic [B-1:0]   p,
  input  logic           c0,
  input  logic           cb,
  output logic           cout,
  output logic [2*B-1:0] garbage
);
  logic [2*B-1:1] node;

  for (genvar i = 0; i < B; i++) begin : g_leaf
    assign node[B+i] = p[i];
  end

  for (genvar i = 1; i < B; i++) begin : g_and
    if (KIND == CSL_NFT) begin : g_nft
      nft #(.GATE_DELAY(GATE_DELAY)) u_and (
        .a(1'b0), .b(node[2*i]), .c(node[2*i+1]),
        .p(garbage[2*i-2]), .q(garbage[2*i-1]), .r(node[i])
      );
    end else begin : g_frg
      frg #(.GATE_DELAY(GATE_DELAY)) u_and (
        .a(node[2*i]), .b(node[2*i+1]), .c(1'b0),
        .p(garbage[2*i-2]), .q(garbage[2*i-1]), .r(node[i])
      );
    end
  end

  frg #(.GATE_DELAY(GATE_DELAY)) u_skip (
    .a(node[1]), .b(cb), .c(c0),
    .p(garbage[2*B-2]), .q(cout), .r(garbage[2*B-1])
  );
endmodule
