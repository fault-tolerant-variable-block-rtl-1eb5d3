// tb_vbcsl_sizes: adder size against worst-case delay, the comparison the
// delay model is used for, at adder sizes N = 2, 4, 8, 16, 32 and 64
// (larger sizes are left out: the C++ build of a unit-delay model of them
// takes too long).
//
// For each N a unit-delay adder (one time unit per reversible gate) is
// built with the fixed block plan, B being the power of two nearest the
// optimum block size sqrt(4N). (For N a power of two the only variable plan
// is T = 2, which is the fixed plan with B = N/2.) It is driven with the
// classic worst case: a carry generated in bit 0 that every higher bit
// propagates. The time at which the most significant sum bit settles is
// measured and must equal the gate count along that path,
//   single block:  N + 1
//   several:       (B_first + 2) + 2 (blocks - 2) + (B_last + 1)
// (two MIGs to the first carry, one MIG per bit, the skip Fredkin; two
// gates, copy F2G and skip Fredkin, per skipped block; the copy F2G and one
// MIG per bit in the last block). The fixed-plan figure must not exceed the
// published bound T_fixed of eq. (3) for the same B. The results, with the
// closed form N/2 + 4 sqrt(N) - 2 of eq. (6), are printed as a table.
module tb_vbcsl_sizes;
  import vbcsl_pkg::*;

  localparam int unsigned NS = 6;
  localparam int unsigned SIZES [NS] = '{2, 4, 8, 16, 32, 64};

  int checks = 0;
  int failures = 0;
  int done = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  function automatic int path_gates(int unsigned n, int unsigned b_first, int unsigned b_last,
                                    int unsigned blocks);
    if (blocks == 1) return int'(n) + 1;
    return int'(b_first + 2) + 2 * (int'(blocks) - 2) + int'(b_last + 1);
  endfunction

  for (genvar k = 0; k < NS; k++) begin : g_size
    localparam int unsigned N  = SIZES[k];
    localparam int unsigned BF = 2 ** ($clog2(N) / 2 + 1) > N ? N : 2 ** ($clog2(N) / 2 + 1);

    logic [N-1:0]        fx, fy, fs;
    logic                fc, fco;
    logic [4*N+N/BF-1:0] fg;
    time                 f_last;

    vbcsl #(.N(N), .PLAN(PLAN_FIXED), .BFIX(BF), .GATE_DELAY(1)) u_fixed (
      .x(fx), .y(fy), .cin(fc), .s(fs), .cout(fco), .garbage(fg));

    int f_events = 0;
    always @(fs[N-1]) begin f_last = $time; f_events++; end

    initial begin
      time t0;
      int  f_exp;
      real eq6;
      fx = '0; fy = '0; fc = 1'b0;
      #(2 * N + 100);
      t0 = $time;
      fx = '1; fy = N'(1);
      #(2 * N + 100);
      check({fco, fs} == {1'b1, {N{1'b0}}}, $sformatf("N=%0d fixed result", N));
      f_exp = path_gates(N, BF, BF, N / BF);
      check(int'(f_last - t0) == f_exp,
            $sformatf("N=%0d fixed B=%0d: %0d gates, expected %0d", N, BF, f_last - t0, f_exp));
      check(int'(f_last - t0) <= t_fixed(N, BF),
            $sformatf("N=%0d fixed delay within eq. (3)", N));
      eq6 = N / 2.0 + 4.0 * $sqrt(real'(N)) - 2.0;
      // Stagger the prints so that the table comes out in order of N.
      #(k);
      $display("N=%4d  B=%3d: measured %4d gate delays, eq. (3) %4d, eq. (6) %6.1f",
               N, BF, f_last - t0, t_fixed(N, BF), eq6);
      done++;
    end
  end

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wait (done == NS);
    #1;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
