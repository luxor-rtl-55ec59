// luxor_maps_pkg -- configurations ("bitstreams") that map the arithmetic
// primitives discussed for LUXOR onto the cell models, plus reference
// arithmetic for the testbenches.
//
// Every LUT truth table is computed here from its arithmetic definition,
// so no table is stored in a file:
//   * xle_atom06     X-LUXOR+ --06-- atom in one Xilinx LE: six bits of
//                    weight 1 plus the carry in -> XSUM (weight 1), SUM
//                    (weight 2) and CO (weight 4). Let n be the number of
//                    ones, p = n mod 2, A1 the pin that the injection mux
//                    passes when p = 0. Then
//                      O6 = (n == 3) | (n == 2 & !A1) | (n == 4 & A1)
//                      O5 = (ones among A5..A1) >= 3.
//   * xle_xnorpop    LUXOR XnorPopcount of three (w, x) pairs on pins
//                    {x2, ~w2, x1, ~w1, x0, ~w0}: S = XOR6 on AMUX,
//                    C = majority of the three XNORs on O6.
//   * xle_c6_bit     C6:111 bit k (1 or 2) of the count of A6..A1 on O6,
//                    with XOR6 (bit 0) on AMUX.
//   * xle_fa         full adder of A1 and A2 with the carry chain
//                    (O6 = A1 ^ A2 propagate, O5 = A1 generate).
//   * alm_c25        I-LUXOR+ C25:121 in one ALM: a0, a1 on A, B; a2, a3,
//                    a4 on C0, D0, E; b0, b1 on C1, D1. O1 = S0, O2 = C0
//                    (weight 2), O0 = S1 (weight 2), O3 = C1 (weight 4).
//   * alm_c6_bit     C6:111 bit k of the count of A, B, C0, D0, E, F on
//                    the ALM's LUT-6 (O1), XOR6 (bit 0) on O0.
//   * alm_add2       two-bit slice of a ripple adder: X bits on A and C1,
//                    Y bits on B and D1; O0 = sum bit 0, O2 = sum bit 1.
package luxor_maps_pkg;
  import luxor_pkg::*;

  function automatic int pop(input logic [31:0] v);
    int n = 0;
    for (int i = 0; i < 32; i++) n += int'(v[i]);
    return n;
  endfunction

  function automatic xle_cfg_t xle_base();
    xle_cfg_t c;
    c.o6_init  = '0;
    c.o5_init  = '0;
    c.di_ax    = 1'b0;
    c.ci_src   = CI_CHAIN;
    c.lux_plus = 1'b0;
    c.amux_sel = XM_O6;
    c.ffd_sel  = XD_O6;
    c.ff2_ax   = 1'b0;
    return c;
  endfunction

  function automatic xle_cfg_t xle_atom06();
    xle_cfg_t c = xle_base();
    for (int i = 0; i < 64; i++) begin
      int n = pop(32'(i));
      logic a1 = i[0];
      c.o6_init[i] = (n == 3) || (n == 2 && !a1) || (n == 4 && a1);
    end
    for (int i = 0; i < 32; i++) c.o5_init[i] = (pop(32'(i)) >= 3);
    c.lux_plus = 1'b1;
    c.amux_sel = XM_XSUM;
    c.ffd_sel  = XD_SUM;
    return c;
  endfunction

  function automatic xle_cfg_t xle_xnorpop();
    xle_cfg_t c = xle_base();
    for (int i = 0; i < 64; i++) begin
      logic p0 = i[0] ^ i[1];
      logic p1 = i[2] ^ i[3];
      logic p2 = i[4] ^ i[5];
      c.o6_init[i] = (p0 & p1) | (p0 & p2) | (p1 & p2);
    end
    c.amux_sel = XM_XOR6;
    return c;
  endfunction

  function automatic xle_cfg_t xle_c6_bit(input int k);
    xle_cfg_t c = xle_base();
    for (int i = 0; i < 64; i++) c.o6_init[i] = pop(32'(i))[k];
    c.amux_sel = XM_XOR6;
    return c;
  endfunction

  function automatic xle_cfg_t xle_fa();
    xle_cfg_t c = xle_base();
    for (int i = 0; i < 64; i++) c.o6_init[i] = i[0] ^ i[1];
    for (int i = 0; i < 32; i++) c.o5_init[i] = i[0];
    c.amux_sel = XM_SUM;
    c.ffd_sel  = XD_CO;
    return c;
  endfunction

  function automatic alm_cfg_t alm_base();
    alm_cfg_t c;
    c.top_mask   = '0;
    c.bot_mask   = '0;
    c.bot_shared = 1'b0;
    c.arith      = 1'b0;
    c.r0_sel     = R0_TOP;
    c.r1_lut6    = 1'b0;
    c.r3_majfa   = 1'b0;
    c.reg_out    = '0;
    return c;
  endfunction

  // LUT-5 index {E, D0, C0, B, A} = {a4, a3, a2, a1, a0}
  function automatic alm_cfg_t alm_c25();
    alm_cfg_t c = alm_base();
    for (int i = 0; i < 32; i++) begin
      logic s_low = i[2] ^ i[3] ^ i[4];
      c.top_mask[i] = i[0] ^ i[1] ^ s_low;
      c.bot_mask[i] = (i[0] & i[1]) | (i[0] & s_low) | (i[1] & s_low);
    end
    c.bot_shared = 1'b1;
    c.r0_sel     = R0_MAJFA_S;
    c.r3_majfa   = 1'b1;
    return c;
  endfunction

  // LUT-6 index {F, E, D0, C0, B, A}
  function automatic alm_cfg_t alm_c6_bit(input int k);
    alm_cfg_t c = alm_base();
    for (int i = 0; i < 32; i++) begin
      c.top_mask[i] = pop(32'(i))[k];
      c.bot_mask[i] = pop(32'(i + 32))[k];
    end
    c.bot_shared = 1'b1;
    c.r1_lut6    = 1'b1;
    c.r0_sel     = R0_XOR6;
    return c;
  endfunction

  function automatic alm_cfg_t alm_add2();
    alm_cfg_t c = alm_base();
    c.arith    = 1'b1;
    c.top_mask = {16'hCCCC, 16'hAAAA};  // LUT-4 #1 = B, #0 = A
    c.bot_mask = {16'hFF00, 16'hF0F0};  // LUT-4 #3 = D1, #2 = C1
    return c;
  endfunction

endpackage
