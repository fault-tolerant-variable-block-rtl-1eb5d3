// tb_ftcsa_block: self-check of the B-bit fault tolerant carry skip block.
//
// Part 1, function: both AND-tree variants at B = 4 (the published block)
// get all 512 values of {x, y, cin}; variants at B = 1, 3 and 7 get
// exhaustive or random vectors. {cout, s} must equal x + y + cin, the block
// must have 4B+1 garbage lines (17 at B = 4) and the parity of
// {s, cout, garbage} must equal the parity of {x, y, cin}. Vectors whose
// bits all propagate (the skip path) are counted and must occur.
//
// Part 2, path delay: a B = 4 block built with one time unit per gate.
//   ripple: x, y step from 0 to a carry generated in bit 0 that propagates
//           through bits 1..3; cout must rise 2 + (B-1) + 1 = B+2 gate
//           delays later (two MIGs to c1, one MIG per further bit, the skip
//           Fredkin). The published ripple delay d_ripple(B) = B+3 is an
//           upper bound on it.
//   skip:   with every bit propagating, a step on cin must reach cout after
//           two gates (copy F2G and skip Fredkin), within the published
//           skip delay d_skip(B) = ceil(log2 B)+4.
module tb_ftcsa_block;
  import vbcsl_pkg::*;

  localparam int unsigned NCFG = 4;
  localparam int unsigned BS [NCFG] = '{4, 1, 3, 7};

  int checks = 0;
  int failures = 0;
  int done = 0;
  int skips = 0;

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
      logic [B-1:0] x, y, s;
      logic         cin, cout;
      logic [4*B:0] garbage;

      ftcsa_block #(.B(B), .KIND(K)) dut (.*);

      initial begin
        logic [B:0] e;
        int unsigned nvec;
        nvec = (2 * B + 1 <= 10) ? (1 << (2 * B + 1)) : 3000;
        for (int v = 0; v < int'(nvec); v++) begin
          if (2 * B + 1 <= 10) {x, y, cin} = (2*B+1)'(v);
          else begin
            x = B'($urandom);
            y = (v % 3 == 0) ? ~x : B'($urandom);
            cin = 1'($urandom);
          end
          #1;
          e = {1'b0, x} + {1'b0, y} + (B+1)'(cin);
          check({cout, s} == e, $sformatf("%s B=%0d %h+%h+%b gave %b_%h",
                                          K.name(), B, x, y, cin, cout, s));
          check((^{x, y, cin}) == (^{s, cout, garbage}),
                $sformatf("%s B=%0d parity", K.name(), B));
          if ((x ^ y) == '1) skips++;
        end
        check($bits(garbage) == 4 * B + 1, "garbage count");
        done++;
      end
    end
  end

  // Unit-delay B = 4 block for the path-delay measurements.
  localparam int unsigned BD = 4;
  logic [BD-1:0] dx, dy, ds;
  logic          dcin, dcout;
  logic [4*BD:0] dg;
  time           cout_change;

  ftcsa_block #(.B(BD), .KIND(CSL_NFT), .GATE_DELAY(1)) dut_delay (
    .x(dx), .y(dy), .cin(dcin), .s(ds), .cout(dcout), .garbage(dg)
  );

  int            cout_events = 0;

  always @(dcout) begin
    cout_change = $time;
    cout_events++;
  end

  initial begin
    time t0;
    // ripple path
    dx = '0; dy = '0; dcin = 1'b0;
    #50;
    t0 = $time;
    dx = 4'b1111; dy = 4'b0001;              // bit 0 generates, bits 1..3 propagate
    #50;
    check(dcout == 1'b1, "delay block: ripple result");
    check(cout_change - t0 == BD + 2,
          $sformatf("ripple delay %0d gates, expected %0d", cout_change - t0, BD + 2));
    check(cout_change - t0 <= d_ripple(BD), "ripple delay within published bound");
    $display("ripple delay B=%0d: %0d gates (published d_ripple=%0d)",
             BD, cout_change - t0, d_ripple(BD));
    // skip path
    dx = 4'b1111; dy = 4'b0000; dcin = 1'b0;  // every bit propagates
    #50;
    t0 = $time;
    dcin = 1'b1;
    #50;
    check(dcout == 1'b1, "delay block: skip result");
    check(cout_change - t0 == 2,
          $sformatf("skip delay %0d gates, expected 2", cout_change - t0));
    check(cout_change - t0 <= d_skip(BD), "skip delay within published bound");
    $display("skip delay B=%0d: %0d gates from cin (published d_skip=%0d)",
             BD, cout_change - t0, d_skip(BD));
    done++;
  end

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wait (done == 2 * NCFG + 1);
    #1;
    checks++;
    if (skips == 0) begin
      failures++;
      $display("FAIL skip path never exercised");
    end
    $display("all-propagate (skip) vectors: %0d", skips);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
