// tb_vbcsl_full: the adder at its default size (16 bits, two 8-bit blocks,
// NFT carry skip logic) with no parameter overridden.
// It adds 200000 random operand pairs (a quarter of them with every bit but
// one propagating) plus directed corner cases, compares {cout, s} with
// x + y + cin and checks that the parity of {s, cout, garbage} equals the
// parity of {x, y, cin}. It counts vectors on which a block's bits all
// propagate (its carry skip path decides cout) and carry-out overflows;
// both must occur.
module tb_vbcsl_full;
  import vbcsl_pkg::*;

  localparam int unsigned N = 16;
  localparam int unsigned T = 2;

  logic [N-1:0]     x, y, s;
  logic             cin, cout;
  logic [4*N+T-1:0] garbage;
  int checks = 0;
  int failures = 0;
  int n_skip = 0;
  int n_overflow = 0;

  vbcsl dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  task automatic apply(input logic [N-1:0] a, input logic [N-1:0] b, input logic c);
    logic [N:0] e;
    x = a; y = b; cin = c;
    #1;
    e = {1'b0, a} + {1'b0, b} + (N+1)'(c);
    check({cout, s} == e, $sformatf("%h+%h+%b gave %b_%h", a, b, c, cout, s));
    check((^{a, b, c}) == (^{s, cout, garbage}), "parity");
    for (int unsigned j = 0; j < T; j++)
      if (((a ^ b) >> block_lsb(N, T, j)) % (1 << block_bits(N, T, j)) ==
          (1 << block_bits(N, T, j)) - 1) n_skip++;
    n_overflow += int'(cout);
  endtask

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [N-1:0] a;
    check($bits(garbage) == 4 * N + T, "garbage width");
    apply('0, '0, 1'b0);
    apply('1, '0, 1'b1);
    apply('1, '1, 1'b1);
    apply('1, N'(1), 1'b0);
    apply(16'h00ff, 16'hff00, 1'b1);
    apply(16'h0080, 16'h0080, 1'b0);
    for (int v = 0; v < 200000; v++) begin
      a = N'($urandom);
      if (v % 4 == 0) apply(a, ~a ^ N'(1 << ($urandom % N)), 1'($urandom));
      else            apply(a, N'($urandom), 1'($urandom));
    end
    $display("block skips=%0d overflows=%0d", n_skip, n_overflow);
    check(n_skip > 0, "skip path exercised");
    check(n_overflow > 0, "overflow exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
