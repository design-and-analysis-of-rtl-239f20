// hbaa_pkg -- shared constants, types and configuration helpers for the
// Heterogeneous Block-based Approximate Adder (HBAA).
//
// An N-bit HBAA is cut into k = N/H disjoint H-bit sub-adders. Each of the
// low approximate sub-adders i is described by two numbers: L_i, the number
// of least significant bits whose sum is an OR gate instead of a full adder,
// and S_i, the length of the carry chain, which is cut (carry forced to 0) at
// bit H-S_i of the block. The pair of vectors {[L_1..L_k],[S_1..S_k]} is the
// configuration; these helpers classify and check it.
//
// Follows the paper: the L/S model and the three cases H-S>L, H-S=L, H-S<L.
// Own choices: the array bound MAX_BLOCKS and the check that N is a multiple
// of H (every configuration the paper shows has N divisible by H).
package hbaa_pkg;

  // Upper bound on k = N/H; parameter vectors of the top are sized by it.
  localparam int unsigned MAX_BLOCKS = 16;

  typedef int unsigned cfg_vec_t [MAX_BLOCKS];

  // Relation between the truncated carry segment (H-S bits) and the OR part (L bits).
  typedef enum logic [1:0] {
    CASE_TRUNC_GT_OR = 2'd0,  // H-S > L : OR part, exact central part, S-bit RCA
    CASE_TRUNC_EQ_OR = 2'd1,  // H-S = L : OR part, S-bit RCA
    CASE_TRUNC_LT_OR = 2'd2   // H-S < L : OR part, OR bits feeding a carry calculation, RCA
  } blk_case_e;

  function automatic blk_case_e block_case(int unsigned h, int unsigned l, int unsigned s);
    if (h - s > l)       return CASE_TRUNC_GT_OR;
    else if (h - s == l) return CASE_TRUNC_EQ_OR;
    else                 return CASE_TRUNC_LT_OR;
  endfunction

  // One approximate block is legal when 0 <= L <= H and 0 <= S <= H.
  function automatic bit block_cfg_ok(int unsigned h, int unsigned l, int unsigned s);
    return (h >= 1) && (l <= h) && (s <= h);
  endfunction

  // The whole adder: N a multiple of H, k <= MAX_BLOCKS, every approximate block legal.
  function automatic bit adder_cfg_ok(int unsigned n, int unsigned h, int unsigned n_approx,
                                      cfg_vec_t l_vec, cfg_vec_t s_vec);
    bit ok;
    ok = (h >= 1) && (n % h == 0) && (n / h <= MAX_BLOCKS) && (n_approx <= n / h);
    for (int unsigned i = 0; i < MAX_BLOCKS; i++)
      if (i < n_approx && !block_cfg_ok(h, l_vec[i], s_vec[i])) ok = 1'b0;
    return ok;
  endfunction

endpackage
