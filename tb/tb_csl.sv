// tb_csl: exhaustive self-check of the carry skip logic.
// Both AND-tree variants (NFT and Fredkin) are built for B = 1, 3, 4, 5 and
// 8. For every value of {p, c0, cb} the carry out must be c0 when all bits
// of p are 1 and cb otherwise, the number of garbage lines must be 2B, and
// the parity of {cout, garbage} must equal the parity of {p, c0, cb} (the
// constant inputs are 0).
module tb_csl;
  import vbcsl_pkg::*;

  localparam int unsigned NCFG = 5;
  localparam int unsigned BS [NCFG] = '{1, 3, 4, 5, 8};

  int checks = 0;
  int failures = 0;
  int done = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  for (genvar k = 0; k < 2; k++) begin : g_kind
    for (genvar n = 0; n < NCFG; n++) begin : g_cfg
      localparam int unsigned B = BS[n];
      localparam csl_kind_e   K = (k == 0) ? CSL_NFT : CSL_FRG;
      logic [B-1:0]   p;
      logic           c0, cb, cout;
      logic [2*B-1:0] garbage;

      csl #(.B(B), .KIND(K)) dut (.p(p), .c0(c0), .cb(cb), .cout(cout), .garbage(garbage));

      initial begin
        for (int v = 0; v < (1 << (B + 2)); v++) begin
          {p, c0, cb} = v[B+1:0];
          #1;
          check(cout == ((&p) ? c0 : cb),
                $sformatf("%s B=%0d p=%b c0=%b cb=%b cout=%b", K.name(), B, p, c0, cb, cout));
          check((^{p, c0, cb}) == (^{cout, garbage}),
                $sformatf("%s B=%0d parity", K.name(), B));
        end
        check($bits(garbage) == 2 * B, "garbage count");
        done++;
      end
    end
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wait (done == 2 * NCFG);
    #1;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
