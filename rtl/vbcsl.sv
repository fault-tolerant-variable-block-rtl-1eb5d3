// vbcsl: N-bit fault tolerant variable block carry skip adder.
//
// The operands are cut into T carry skip blocks (T even) whose widths grow
// by one bit per block towards the middle and shrink again:
//   b, b+1, ..., b+T/2-1, b+T/2-1, ..., b+1, b,   b = N/T - T/4 + 1/2,
// block 0 holding the least significant bits. Each block is an ftcsa_block;
// the carry out of block j is the carry in of block j+1. A carry that is
// generated in block 0 ripples out of it, skips every middle block whose
// bits all propagate, and ripples into the last block, so the worst path is
// shorter than that of one long ripple chain.
//
// With PLAN = PLAN_FIXED the adder is instead cut into N/BFIX equal blocks
// of BFIX bits, the fixed block carry skip adder whose delay the variable
// plan improves on.
//
// Defaults: N = 16 and T = 2 (two 8-bit blocks), the optimum the delay model
// gives for a 16-bit adder; the fixed plan's default BFIX = 8 is the optimum
// block size for 16 bits, so both plans give the same adder at the default
// N. N and T must give an integer b >= 1 and BFIX must divide N; elaboration
// stops otherwise (for N a power of two only T = 2 is possible).
// Garbage: 4*w+1 lines per block of width w, block j's starting at
// 4*lsb_j + j, 4N+NB in all (NB = number of blocks). Garbage line 0 of each
// block is its carry in itself (the copy gate's third output). No constant input is exposed; all are tied to 0
// inside. Combinational, no clock and no reset.
module vbcsl
  import vbcsl_pkg::*;
#(
  parameter int unsigned N          = 16,
  parameter int unsigned T          = 2,
  parameter block_plan_e PLAN       = PLAN_VARIABLE,
  parameter int unsigned BFIX       = 8,
  parameter csl_kind_e   KIND       = CSL_NFT,
  parameter int unsigned GATE_DELAY = 0,
  localparam int unsigned NB        = blk_count(PLAN, N, T, BFIX)
) (
  input  logic [N-1:0]     x,
  input  logic [N-1:0]     y,
  input  logic             cin,
  output logic [N-1:0]     s,
  output logic             cout,
  output logic [4*N+NB-1:0] garbage
);
  if (!blk_plan_ok(PLAN, N, T, BFIX)) begin : g_bad_plan
    $error("vbcsl: no block plan for N=%0d (T=%0d, BFIX=%0d)", N, T, BFIX);
  end

  logic [NB:0] c;

  assign c[0] = cin;

  for (genvar j = 0; j < NB; j++) begin : g_blk
    localparam int unsigned W  = blk_bits(PLAN, N, T, BFIX, j);
    localparam int unsigned L  = blk_lsb(PLAN, N, T, BFIX, j);
    localparam int unsigned GL = 4 * L + j;

    ftcsa_block #(.B(W), .KIND(KIND), .GATE_DELAY(GATE_DELAY)) u_blk (
      .x(x[L +: W]), .y(y[L +: W]), .cin(c[j]),
      .s(s[L +: W]), .cout(c[j+1]), .garbage(garbage[GL +: 4*W+1])
    );
  end

  assign cout = c[NB];
endmodule
