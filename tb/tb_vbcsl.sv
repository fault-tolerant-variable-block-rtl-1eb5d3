// tb_vbcsl: end-to-end self-check of the variable block carry skip adder.
//
// Adders under test (all garbage and sum lines observed):
//   a16   N = 16, T = 2 (blocks 8, 8), NFT carry skip logic
//   f16   N = 16, T = 2, Fredkin carry skip logic
//   a22   N = 22, T = 4 (blocks 5, 6, 6, 5), NFT
//   f12   N = 12, T = 6 (blocks 1, 2, 3, 3, 2, 1), Fredkin
//   x20   N = 20, fixed plan, five 4-bit blocks, NFT
//   u22   N = 22, T = 4, NFT, one time unit per gate, for the path delay
//
// Every result is compared with x + y + cin, and the parity of
// {s, cout, garbage} with the parity of {x, y, cin}. The mechanisms the
// design relies on are counted and each must occur at least once:
//   skip      a middle block whose bits all propagate passes its carry in
//             straight to its carry out
//   overflow  the adder's carry out is 1
//   fault     a single internal line of a22 is forced to its opposite value
//             (fault injection); the output parity must then differ from
//             the input parity, i.e. the error is detected
// The worst-case carry path of u22 (generate in bit 0, every other bit
// propagating) must settle after (b+2) + 2(T-2) + (b+1) gate delays, which
// must not exceed the published T_variable of eq. (9).
module tb_vbcsl;
  import vbcsl_pkg::*;

  int checks = 0;
  int failures = 0;
  int n_skip = 0;
  int n_overflow = 0;
  int n_fault_injected = 0;
  int n_fault_detected = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  // ---------------------------------------------------------------- DUTs
  logic [15:0] x16, y16, sa16, sf16;
  logic        c16, coa16, cof16;
  logic [65:0] ga16, gf16;
  vbcsl #(.N(16), .T(2), .KIND(CSL_NFT)) a16 (.x(x16), .y(y16), .cin(c16), .s(sa16), .cout(coa16), .garbage(ga16));
  vbcsl #(.N(16), .T(2), .KIND(CSL_FRG)) f16 (.x(x16), .y(y16), .cin(c16), .s(sf16), .cout(cof16), .garbage(gf16));

  logic [21:0] x22, y22, s22;
  logic        c22, co22;
  logic [91:0] g22;
  vbcsl #(.N(22), .T(4), .KIND(CSL_NFT)) a22 (.x(x22), .y(y22), .cin(c22), .s(s22), .cout(co22), .garbage(g22));

  logic [11:0] x12, y12, s12;
  logic        c12, co12;
  logic [53:0] g12;
  vbcsl #(.N(12), .T(6), .KIND(CSL_FRG)) f12 (.x(x12), .y(y12), .cin(c12), .s(s12), .cout(co12), .garbage(g12));

  logic [19:0] x20, y20, s20;
  logic        c20, co20;
  logic [84:0] g20;
  vbcsl #(.N(20), .PLAN(PLAN_FIXED), .BFIX(4)) x20i (.x(x20), .y(y20), .cin(c20), .s(s20), .cout(co20), .garbage(g20));

  logic [21:0] ux, uy, us;
  logic        uc, uco;
  logic [91:0] ug;
  vbcsl #(.N(22), .T(4), .KIND(CSL_NFT), .GATE_DELAY(1)) u22 (.x(ux), .y(uy), .cin(uc), .s(us), .cout(uco), .garbage(ug));

  time msb_change;
  int  msb_events = 0;
  always @(us[21]) begin
    msb_change = $time;
    msb_events++;
  end

  // Count middle blocks (not the first, not the last) whose bits all propagate.
  function automatic int middle_skips(int unsigned n, int unsigned t, logic [63:0] p);
    int cnt;
    cnt = 0;
    for (int unsigned j = 1; j + 1 < t; j++) begin
      logic all;
      all = 1'b1;
      for (int unsigned i = 0; i < block_bits(n, t, j); i++)
        all &= p[block_lsb(n, t, j) + i];
      if (all) cnt++;
    end
    return cnt;
  endfunction

  task automatic check_all();  // advances time by 1
    logic [16:0] e16;
    logic [22:0] e22;
    logic [12:0] e12;
    logic [20:0] e20;
    x20 = x22[19:0]; y20 = y22[19:0]; c20 = c22;
    #1;
    e20 = {1'b0, x20} + {1'b0, y20} + 21'(c20);
    check({co20, s20} == e20, $sformatf("x20 %h+%h+%b", x20, y20, c20));
    check((^{x20, y20, c20}) == (^{s20, co20, g20}), "x20 parity");
    for (int j = 1; j < 4; j++) if (((x20 ^ y20) >> (4 * j)) % 16 == 15) n_skip++;
    e16 = {1'b0, x16} + {1'b0, y16} + 17'(c16);
    e22 = {1'b0, x22} + {1'b0, y22} + 23'(c22);
    e12 = {1'b0, x12} + {1'b0, y12} + 13'(c12);
    check({coa16, sa16} == e16, $sformatf("a16 %h+%h+%b", x16, y16, c16));
    check({cof16, sf16} == e16, $sformatf("f16 %h+%h+%b", x16, y16, c16));
    check({co22, s22} == e22, $sformatf("a22 %h+%h+%b", x22, y22, c22));
    check({co12, s12} == e12, $sformatf("f12 %h+%h+%b", x12, y12, c12));
    check((^{x16, y16, c16}) == (^{sa16, coa16, ga16}), "a16 parity");
    check((^{x16, y16, c16}) == (^{sf16, cof16, gf16}), "f16 parity");
    check((^{x22, y22, c22}) == (^{s22, co22, g22}), "a22 parity");
    check((^{x12, y12, c12}) == (^{s12, co12, g12}), "f12 parity");
    n_skip += middle_skips(22, 4, 64'(x22 ^ y22)) + middle_skips(12, 6, 64'(x12 ^ y12));
    n_overflow += int'(coa16) + int'(co22) + int'(co12);
  endtask

  // Force one line of a22 to the opposite of its fault-free value, look at
  // the parity, release. Each forced line feeds exactly one gate input.
  task automatic inject(input int which);
    logic v;
    case (which)
      0: v = a22.g_blk[1].u_blk.cb;
      1: v = a22.g_blk[1].u_blk.c0_skip;
      2: v = a22.g_blk[2].u_blk.c0_chain;
      3: v = a22.g_blk[0].u_blk.u_chain.g_bit[3].u_fa.a_xor_b;
      4: v = a22.g_blk[3].u_blk.u_chain.g_bit[1].u_fa.a_and_b;
      default: v = a22.g_blk[2].u_blk.u_chain.g_bit[5].u_fa.a_thru;
    endcase
    case (which)
      0: if (v) force a22.g_blk[1].u_blk.cb = 1'b0; else force a22.g_blk[1].u_blk.cb = 1'b1;
      1: if (v) force a22.g_blk[1].u_blk.c0_skip = 1'b0; else force a22.g_blk[1].u_blk.c0_skip = 1'b1;
      2: if (v) force a22.g_blk[2].u_blk.c0_chain = 1'b0; else force a22.g_blk[2].u_blk.c0_chain = 1'b1;
      3: if (v) force a22.g_blk[0].u_blk.u_chain.g_bit[3].u_fa.a_xor_b = 1'b0;
         else   force a22.g_blk[0].u_blk.u_chain.g_bit[3].u_fa.a_xor_b = 1'b1;
      4: if (v) force a22.g_blk[3].u_blk.u_chain.g_bit[1].u_fa.a_and_b = 1'b0;
         else   force a22.g_blk[3].u_blk.u_chain.g_bit[1].u_fa.a_and_b = 1'b1;
      default: if (v) force a22.g_blk[2].u_blk.u_chain.g_bit[5].u_fa.a_thru = 1'b0;
               else   force a22.g_blk[2].u_blk.u_chain.g_bit[5].u_fa.a_thru = 1'b1;
    endcase
    #1;
    n_fault_injected++;
    if ((^{x22, y22, c22}) != (^{s22, co22, g22})) n_fault_detected++;
    case (which)
      0: release a22.g_blk[1].u_blk.cb;
      1: release a22.g_blk[1].u_blk.c0_skip;
      2: release a22.g_blk[2].u_blk.c0_chain;
      3: release a22.g_blk[0].u_blk.u_chain.g_bit[3].u_fa.a_xor_b;
      4: release a22.g_blk[3].u_blk.u_chain.g_bit[1].u_fa.a_and_b;
      default: release a22.g_blk[2].u_blk.u_chain.g_bit[5].u_fa.a_thru;
    endcase
    #1;
    check((^{x22, y22, c22}) == (^{s22, co22, g22}), "parity restored after release");
  endtask

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    time t0;
    int unsigned b;
    // Block plans, against the widths listed in the header.
    check(block_bits(22, 4, 0) == 5 && block_bits(22, 4, 1) == 6 &&
          block_bits(22, 4, 2) == 6 && block_bits(22, 4, 3) == 5, "plan N=22 T=4");
    check(block_bits(12, 6, 0) == 1 && block_bits(12, 6, 2) == 3 &&
          block_bits(12, 6, 3) == 3 && block_bits(12, 6, 5) == 1, "plan N=12 T=6");
    check(block_bits(16, 2, 0) == 8 && block_bits(16, 2, 1) == 8, "plan N=16 T=2");
    check(!plan_ok(16, 4) && !plan_ok(32, 4) && plan_ok(22, 4), "plan_ok");

    // Directed corner cases.
    for (int k = 0; k < 6; k++) begin
      case (k)
        0: begin x16 = '0; y16 = '0; c16 = 0; x22 = '0; y22 = '0; c22 = 0; x12 = '0; y12 = '0; c12 = 0; end
        1: begin x16 = '1; y16 = '0; c16 = 1; x22 = '1; y22 = '0; c22 = 1; x12 = '1; y12 = '0; c12 = 1; end
        2: begin x16 = '1; y16 = '1; c16 = 1; x22 = '1; y22 = '1; c22 = 1; x12 = '1; y12 = '1; c12 = 1; end
        3: begin x16 = '1; y16 = 16'd1; c16 = 0; x22 = '1; y22 = 22'd1; c22 = 0; x12 = '1; y12 = 12'd1; c12 = 0; end
        4: begin x16 = 16'h5555; y16 = 16'haaaa; c16 = 0; x22 = 22'h155555; y22 = 22'h2aaaaa; c22 = 0;
                 x12 = 12'h555; y12 = 12'haaa; c12 = 0; end
        default: begin x16 = 16'h8000; y16 = 16'h8000; c16 = 0; x22 = 22'h200000; y22 = 22'h200000; c22 = 0;
                 x12 = 12'h800; y12 = 12'h800; c12 = 0; end
      endcase
      #1;
      check_all();
    end

    // Random vectors, with a share of long propagate runs so that skips occur.
    for (int v = 0; v < 20000; v++) begin
      x16 = 16'($urandom); x22 = 22'($urandom); x12 = 12'($urandom);
      if (v % 4 == 0) begin
        y16 = ~x16 ^ 16'(1 << ($urandom % 16));
        y22 = ~x22 ^ 22'(1 << ($urandom % 22));
        y12 = ~x12 ^ 12'(1 << ($urandom % 12));
      end else begin
        y16 = 16'($urandom); y22 = 22'($urandom); y12 = 12'($urandom);
      end
      c16 = 1'($urandom); c22 = 1'($urandom); c12 = 1'($urandom);
      #1;
      check_all();
      if (v % 50 == 0) inject(v / 50 % 6);
    end

    // Worst-case path of the unit-delay adder.
    b = first_block_bits(22, 4);
    ux = '0; uy = '0; uc = 1'b0;
    #100;
    t0 = $time;
    ux = '1; uy = 22'd1;                       // generate in bit 0, propagate above
    #100;
    check({uco, us} == 23'h400000, "u22 result");
    check(msb_change - t0 == time'((b + 2) + 2 * (4 - 2) + (b + 1)),
          $sformatf("u22 worst path %0d gates, expected %0d", msb_change - t0,
                    (b + 2) + 2 * (4 - 2) + (b + 1)));
    check(msb_change - t0 <= time'(t_variable(22, 4)), "u22 within published T_variable");
    $display("worst carry path N=22 T=4: %0d gate delays (published T_variable = %0d)",
             msb_change - t0, t_variable(22, 4));

    $display("mechanisms: skip=%0d overflow=%0d faults injected=%0d detected=%0d",
             n_skip, n_overflow, n_fault_injected, n_fault_detected);
    check(n_skip > 0, "skip path exercised");
    check(n_overflow > 0, "overflow exercised");
    check(n_fault_injected > 0, "fault injection exercised");
    check(n_fault_detected == n_fault_injected, "every injected fault detected by parity");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
