// ral_pkg: types and size helpers shared by the reformed-array-logic multiplier.
//
// The multiplier consumes the multiplier operand B three bits at a time. For a
// 3-bit group the partial product is one of 0, A, 2A, ... 7A. The odd multiples
// (A, 3A, 5A, 7A) are formed once by the initial adders and chosen by a one-hot
// multiplexer; the even multiples come from a left shift of 1 or 2 positions.
// The group width of 3 follows the selection tables of the design and is fixed
// here; the operand width N is a parameter of each module.
package ral_pkg;

  // Bits of B consumed per clock (the selection tables are written for 3).
  localparam int unsigned GRP = 3;

  // One-hot selection of the multiplexer: which odd multiple of A passes.
  typedef struct packed {
    logic a7;
    logic a5;
    logic a3;
    logic a1;
  } mux_sel_t;

  // One-hot left shift of the barrel shifter: 2, 1 or 0 positions.
  typedef struct packed {
    logic s2;
    logic s1;
    logic s0;
  } shift_sel_t;

  // Number of 3-bit groups of an N-bit multiplier (B zero-padded on the left).
  function automatic int unsigned b_groups(int unsigned n);
    return (n + GRP - 1) / GRP;
  endfunction

  // Number of 3-bit groups needed to hold the 2N-bit product.
  function automatic int unsigned c_groups(int unsigned n);
    return (2 * n + GRP - 1) / GRP;
  endfunction

  // Width of a counter that can hold 0..c_groups(n).
  function automatic int unsigned cnt_w(int unsigned n);
    return $clog2(c_groups(n) + 1);
  endfunction

endpackage
