// tb_ftrca: self-check of the fault tolerant ripple carry adder.
// A 4-bit chain is driven with all 512 values of {x, y, c0} and a 13-bit
// chain with 3000 random values. Each result is compared with x + y + c0
// computed by the simulator, the propagate lines with x ^ y, and the parity
// of {s, cn, prop, g1, g3} with the parity of {x, y, c0} (all constant
// inputs of the chain are 0).
module tb_ftrca;
  localparam int unsigned NA = 4;
  localparam int unsigned NB = 13;

  logic [NA-1:0] xa, ya, sa, pa, g1a, g3a;
  logic          ca, cna;
  logic [NB-1:0] xb, yb, sb, pb, g1b, g3b;
  logic          cb, cnb;
  int checks = 0;
  int failures = 0;

  ftrca #(.N(NA)) dut_a (.x(xa), .y(ya), .c0(ca), .s(sa), .cn(cna), .prop(pa), .g1(g1a), .g3(g3a));
  ftrca #(.N(NB)) dut_b (.x(xb), .y(yb), .c0(cb), .s(sb), .cn(cnb), .prop(pb), .g1(g1b), .g3(g3b));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [NA:0] ea;
    logic [NB:0] eb;
    xb = '0; yb = '0; cb = 1'b0;
    for (int v = 0; v < 512; v++) begin
      {xa, ya, ca} = v[8:0];
      #1;
      ea = {1'b0, xa} + {1'b0, ya} + (NA+1)'(ca);
      check({cna, sa} == ea, $sformatf("N=4 sum %h+%h+%b", xa, ya, ca));
      check(pa == (xa ^ ya), "N=4 propagate");
      check((^{xa, ya, ca}) == (^{sa, cna, pa, g1a, g3a}), "N=4 parity");
    end
    for (int v = 0; v < 3000; v++) begin
      xb = NB'($urandom);
      yb = (v % 4 == 0) ? ~xb : NB'($urandom);   // long propagate runs too
      cb = 1'($urandom);
      #1;
      eb = {1'b0, xb} + {1'b0, yb} + (NB+1)'(cb);
      check({cnb, sb} == eb, $sformatf("N=13 sum %h+%h+%b", xb, yb, cb));
      check(pb == (xb ^ yb), "N=13 propagate");
      check((^{xb, yb, cb}) == (^{sb, cnb, pb, g1b, g3b}), "N=13 parity");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
