// vbcsl_pkg: types and elaboration-time arithmetic shared by the fault
// tolerant carry skip adder modules.
//
// csl_kind_e picks how the carry skip logic (CSL) builds its B-input AND:
// from New Fault Tolerant gates (the NFT variant) or from Fredkin gates (the
// FRG variant). Both variants are part of the published design.
//
// The block-size functions implement the variable block plan: an N-bit adder
// is cut into t blocks (t even) of widths
//   b, b+1, ..., b+t/2-1, b+t/2-1, ..., b+1, b
// so summing the widths gives N = t*b + (t/2)(t/2-1), i.e.
//   b = N/t - t/4 + 1/2.
// The plan only exists when that b is a positive integer; plan_ok() tells.
//
// The same adder can instead use the fixed block plan: N/B blocks of B
// bits each (B must divide N); blk_* functions take the plan as argument.
//
// The delay functions are the published gate-count delay model:
//   ripple delay of a B-bit block     d_ripple(B) = B + 3
//   skip delay of a B-bit block       d_skip(B)   = ceil(log2 B) + 4
//   worst case of the whole adder     first ripple + intermediate skips + last ripple
// They are used by the testbenches to compare with measured unit-delay paths.
package vbcsl_pkg;

  typedef enum logic {
    CSL_NFT = 1'b0,  // AND tree of NFT gates (first published variant)
    CSL_FRG = 1'b1   // AND tree of Fredkin gates (second published variant)
  } csl_kind_e;

  // Number of garbage lines of one B-bit carry skip block:
  // 2 per FTFA (G1, G3; G2 is used as propagate), 1 from the input F2G,
  // 2 per AND gate of the tree (B-1 gates) and 2 from the skip multiplexer.
  function automatic int unsigned block_garbage(int unsigned bits);
    return 4 * bits + 1;
  endfunction

  function automatic bit plan_ok(int unsigned n, int unsigned t);
    int unsigned m;
    m = t / 2;
    if (t < 2 || (t % 2) != 0) return 1'b0;
    if (n <= m * (m - 1)) return 1'b0;
    return ((n - m * (m - 1)) % t) == 0;
  endfunction

  // Width b of the first and the last block.
  function automatic int unsigned first_block_bits(int unsigned n, int unsigned t);
    int unsigned m;
    m = t / 2;
    return (n - m * (m - 1)) / t;
  endfunction

  // Width of block j, j = 0 being the least significant block.
  function automatic int unsigned block_bits(int unsigned n, int unsigned t, int unsigned j);
    int unsigned b;
    b = first_block_bits(n, t);
    return (j < t / 2) ? b + j : b + (t - 1 - j);
  endfunction

  // Position of the least significant bit of block j.
  function automatic int unsigned block_lsb(int unsigned n, int unsigned t, int unsigned j);
    int unsigned acc;
    acc = 0;
    for (int unsigned i = 0; i < j; i++) acc += block_bits(n, t, i);
    return acc;
  endfunction

  typedef enum logic {
    PLAN_VARIABLE = 1'b0,  // widths b, b+1, ..., b+t/2-1, b+t/2-1, ..., b
    PLAN_FIXED    = 1'b1   // N/B blocks of B bits
  } block_plan_e;

  function automatic bit blk_plan_ok(block_plan_e plan, int unsigned n, int unsigned t,
                                     int unsigned bfix);
    if (plan == PLAN_FIXED) return bfix >= 1 && bfix <= n && (n % bfix) == 0;
    return plan_ok(n, t);
  endfunction

  function automatic int unsigned blk_count(block_plan_e plan, int unsigned n, int unsigned t,
                                            int unsigned bfix);
    return (plan == PLAN_FIXED) ? n / bfix : t;
  endfunction

  function automatic int unsigned blk_bits(block_plan_e plan, int unsigned n, int unsigned t,
                                           int unsigned bfix, int unsigned j);
    return (plan == PLAN_FIXED) ? bfix : block_bits(n, t, j);
  endfunction

  function automatic int unsigned blk_lsb(block_plan_e plan, int unsigned n, int unsigned t,
                                          int unsigned bfix, int unsigned j);
    return (plan == PLAN_FIXED) ? bfix * j : block_lsb(n, t, j);
  endfunction

  function automatic int unsigned d_ripple(int unsigned bits);
    return bits + 3;
  endfunction

  function automatic int unsigned d_skip(int unsigned bits);
    return $clog2(bits) + 4;
  endfunction

  // Published worst-case delay of the variable block adder, eq. (9); with
  // t = 2 it reduces to two block ripples.
  function automatic int unsigned t_variable(int unsigned n, int unsigned t);
    int unsigned acc;
    acc = 2 * d_ripple(first_block_bits(n, t));
    for (int unsigned j = 1; j + 1 < t; j++) acc += d_skip(block_bits(n, t, j));
    return acc;
  endfunction

  // Published worst-case delay of the fixed block adder, eq. (3).
  // Signed, since eq. (3) goes below two ripples when N/B < 2.
  function automatic int t_fixed(int unsigned n, int unsigned bfix);
    return 2 * int'(d_ripple(bfix)) + (int'(n / bfix) - 2) * int'(d_skip(bfix));
  endfunction

endpackage
