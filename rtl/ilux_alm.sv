// ilux_alm -- I-LUXOR+ adaptive logic module: an Intel Stratix-10 style
// ALM extended with the LUXOR XOR6 and the I-LUXOR+ MajFA.
//
// Baseline datapath:
//   * Four LUT-4s. The top pair reads {D0,C0,B,A}; the bottom pair reads
//     {D1,C1,B,A}, or {D0,C0,B,A} when cfg.bot_shared is set. E selects
//     within the top pair and F (E when shared) within the bottom pair,
//     giving two LUT-5s; F selects between the two LUT-5s of the shared
//     arrangement, giving the fracturable LUT-6 of A, B, C0, D0, E, F.
//   * Two full adders on a carry chain: in arithmetic mode each adds the
//     two LUT-4 outputs of its half and the carry (cin -> top adder ->
//     bottom adder -> cout).
//   * Four flip-flops, one per result, and a per-output choice of the
//     registered or combinational result on O0..O3.
//
// LUXOR addition: XOR6 = A ^ B ^ C0 ^ D0 ^ E ^ F, selectable as r0.
// I-LUXOR+ addition (MajFA): m = MAJ(C0, D0, E); a full adder forms
// m + C1 + D1. Its sum is selectable as r0, its carry as r3. With the two
// LUT-5s sharing {A,B,C0,D0,E} this maps the GPC C25:121 into one ALM:
// S0 = parity(a0..a4) and C0 from the LUT-5s, S1 and C1 from the MajFA.
//
// Results: r0 = {top result, XOR6, MajFA sum, LUT-6}, r1 = top LUT-5 or
// LUT-6, r2 = bottom adder sum (arithmetic) or bottom LUT-5, r3 = bottom
// LUT-5 or MajFA carry. O_k = cfg.reg_out[k] ? FF_k : r_k. All paths
// from pins to O_k and cout are combinational; the flip-flops load on
// the rising clk edge with clock enable ce and synchronous reset sr.
//
// Taken from the LUXOR ALM drawing: the eight pins A, B, C0, D0, C1, D1,
// E, F, four LUT-4s, two chained adders, XOR6 on A, B, C0, D0, E, F,
// Maj3 on C0, D0, E, the MajFA adder on C1, D1, the red mux on the top
// output path and the blue mux before the bottom flip-flop. This
// design's choices: how the LUT-4s combine into LUT-5/LUT-6 (the drawing
// omits that wiring), the shared-input switch, the reduced output muxes
// (one result per output instead of the vendor's crossbar), clock enable
// and synchronous reset.
module ilux_alm
  import luxor_pkg::*;
(
  input  logic     clk,
  input  logic     ce,
  input  logic     sr,
  input  alm_cfg_t cfg,
  input  logic     a, b, c0, d0, c1, d1, e, f,
  input  logic     cin,
  output logic [3:0] o,     // O0..O3
  output logic     cout
);

  logic [3:0] top_idx, bot_idx;
  logic l0, l1, l2, l3;
  logic top5, bot5, lut6;
  logic sum0, sum1, mid;
  logic xor6, maj3, mfa_s, mfa_c;
  logic [3:0] r, q;

  // fracturable LUT
  assign top_idx = {d0, c0, b, a};
  assign bot_idx = cfg.bot_shared ? {d0, c0, b, a} : {d1, c1, b, a};

  assign l0 = cfg.top_mask[{1'b0, top_idx}];
  assign l1 = cfg.top_mask[{1'b1, top_idx}];
  assign l2 = cfg.bot_mask[{1'b0, bot_idx}];
  assign l3 = cfg.bot_mask[{1'b1, bot_idx}];

  assign top5 = e ? l1 : l0;
  assign bot5 = (cfg.bot_shared ? e : f) ? l3 : l2;
  assign lut6 = f ? bot5 : top5;

  // baseline adders on the carry chain
  assign {mid,  sum0} = 2'(l0) + 2'(l1) + 2'(cin);
  assign {cout, sum1} = 2'(l2) + 2'(l3) + 2'(mid);

  // LUXOR: XOR6
  assign xor6 = a ^ b ^ c0 ^ d0 ^ e ^ f;

  // I-LUXOR+: MajFA
  assign maj3 = (c0 & d0) | (c0 & e) | (d0 & e);
  assign {mfa_c, mfa_s} = 2'(maj3) + 2'(c1) + 2'(d1);

  // results
  always_comb begin
    unique case (cfg.r0_sel)
      R0_TOP:     r[0] = cfg.arith ? sum0 : top5;
      R0_XOR6:    r[0] = xor6;
      R0_MAJFA_S: r[0] = mfa_s;
      default:    r[0] = lut6;
    endcase
  end
  assign r[1] = cfg.r1_lut6  ? lut6  : top5;
  assign r[2] = cfg.arith    ? sum1  : bot5;
  assign r[3] = cfg.r3_majfa ? mfa_c : bot5;

  always_ff @(posedge clk) begin
    if (sr)      q <= '0;
    else if (ce) q <= r;
  end

  for (genvar k = 0; k < 4; k++) begin : g_out
    assign o[k] = cfg.reg_out[k] ? q[k] : r[k];
  end

endmodule
