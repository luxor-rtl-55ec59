// xlux_le -- X-LUXOR+ logic element: one quarter of a Xilinx UltraScale+
// slice with the LUXOR XOR6 and the X-LUXOR+ carry injection.
//
// Baseline datapath (unchanged from the vendor cell):
//   * LUT-6 with two outputs. O6 is a 6-input function of A6..A1, O5 a
//     5-input function of A5..A1.
//   * Carry logic: CO = O6 ? CI : DI with DI = O5 or AX, and the sum
//     output SUM = O6 xor CI. CI is the chain input, AX or a constant.
//   * Wide-function mux F7 = AX ? wide_in : O6 (wide_in is O6 of the
//     neighbouring LE).
//   * Two flip-flops: one (AQ) behind a selectable D mux, a second one
//     whose Q is only reachable through AMUX.
//   * Output A = O6 and the selectable combinational output AMUX.
//
// LUXOR addition: XOR6 = A6 ^ ... ^ A1, in parallel with the LUT on the
// same inputs, selectable on AMUX and the flip-flop input.
//
// X-LUXOR+ addition (cfg.lux_plus):
//   * a mux selected by XOR6 that passes the incoming carry CI when XOR6
//     is 1 and the A1 pin when XOR6 is 0;
//   * a bypass mux that feeds that value, instead of CI, to the carry
//     mux and the sum XOR;
//   * a second XOR2, XSUM = XOR6 xor CI, on AMUX and the flip-flop input.
// With this, six bits of weight 1 plus the carry in (weight 1) are
// counted in one LE: XSUM is bit 0, SUM is bit 1 and CO (weight 4) goes
// to the next LE. The --06-- atom therefore fits a quarter slice and
// C06060606:111111111 fits four LEs.
//
// Interface: a[5:0] are the LUT pins A6..A1 (a[0] = A1). All outputs
// except aq are combinational in a, ax, cin and wide_in; aq and the
// second flip-flop load on the rising clk edge when ce is 1 and clear
// synchronously on sr.
//
// Taken from the LUXOR cell drawing: the signals each mux chooses from,
// XOR6 on A6..A1, the blue mux selected by XOR6 with A1 and the carry
// as data, the blue XOR2 of XOR6 and the carry. This design's choices:
// which mux data input is taken for which select value (derived so that
// the --06-- atom counts correctly), the mux encodings, a separate O5
// truth table (a vendor LUT takes O5 from the lower half of the O6
// table; the --06-- atom needs O5 and O6 to differ on A6 = 0), and the
// clock enable and synchronous reset of the flip-flops.
module xlux_le
  import luxor_pkg::*;
(
  input  logic     clk,
  input  logic     ce,       // flip-flop clock enable
  input  logic     sr,       // flip-flop synchronous reset
  input  xle_cfg_t cfg,
  input  logic [5:0] a,      // A6..A1, a[0] = A1
  input  logic     ax,       // bypass input AX
  input  logic     cin,      // carry from the LE below
  input  logic     wide_in,  // O6 of the neighbouring LE, for F7
  output logic     o6,       // output A
  output logic     amux,     // output AMUX
  output logic     aq,       // output AQ
  output logic     co        // carry to the LE above
);

  logic o5, xor6, ci_base, ci_inj, ci_eff, di, sum, xsum, f7;
  logic ff_d, ff2_d, ff2_q;

  // LUT-6 and the LUXOR XOR6 on the same six pins
  assign o6   = cfg.o6_init[a];
  assign o5   = cfg.o5_init[a[4:0]];
  assign xor6 = ^a;

  // carry input selection (chain, AX, 0, 1)
  always_comb begin
    unique case (cfg.ci_src)
      CI_CHAIN: ci_base = cin;
      CI_AX:    ci_base = ax;
      CI_ZERO:  ci_base = 1'b0;
      default:  ci_base = 1'b1;
    endcase
  end

  // X-LUXOR+ carry injection
  assign ci_inj = xor6 ? ci_base : a[0];
  assign ci_eff = cfg.lux_plus ? ci_inj : ci_base;
  assign xsum   = xor6 ^ ci_base;

  // baseline carry logic
  assign di  = cfg.di_ax ? ax : o5;
  assign co  = o6 ? ci_eff : di;
  assign sum = o6 ^ ci_eff;

  // wide-function mux
  assign f7 = ax ? wide_in : o6;

  // output muxes
  always_comb begin
    unique case (cfg.amux_sel)
      XM_O6:   amux = o6;
      XM_O5:   amux = o5;
      XM_SUM:  amux = sum;
      XM_CO:   amux = co;
      XM_XOR6: amux = xor6;
      XM_XSUM: amux = xsum;
      XM_FF:   amux = ff2_q;
      default: amux = f7;
    endcase
  end

  always_comb begin
    unique case (cfg.ffd_sel)
      XD_O6:   ff_d = o6;
      XD_O5:   ff_d = o5;
      XD_SUM:  ff_d = sum;
      XD_CO:   ff_d = co;
      XD_XOR6: ff_d = xor6;
      XD_XSUM: ff_d = xsum;
      XD_AX:   ff_d = ax;
      default: ff_d = f7;
    endcase
  end

  assign ff2_d = cfg.ff2_ax ? ax : o5;

  always_ff @(posedge clk) begin
    if (sr) begin
      aq    <= 1'b0;
      ff2_q <= 1'b0;
    end else if (ce) begin
      aq    <= ff_d;
      ff2_q <= ff2_d;
    end
  end

endmodule
