// xlux_slice -- one Xilinx slice of X-LUXOR+ logic elements.
//
// N_LE logic elements (four, as in the slice the LUXOR cells extend) are
// stacked on the fast in-slice carry chain: LE i takes its carry from
// LE i-1, LE 0 from the slice input cin, and the carry out of the top
// LE leaves the slice as cout. The wide-function input of each LE is O6
// of its pair neighbour (LE i xor 1), giving the F7 level of the vendor
// slice's wide multiplexers.
//
// With every LE configured as the X-LUXOR+ --06-- atom, the slice is the
// GPC C06060606:111111111: 24 inputs in columns 0, 2, 4 and 6, nine
// result bits (XSUM and SUM of each LE plus cout). The whole carry path
// is combinational; only the AQ outputs are registered.
//
// Follows the LUXOR description: four LEs per slice joined by the carry
// chain. This design's choice: the pairing of LEs on the F7 muxes and
// the per-LE arrays of pins and configuration.
module xlux_slice
  import luxor_pkg::*;
#(
  parameter int unsigned N_LE = 4
) (
  input  logic                 clk,
  input  logic                 ce,
  input  logic                 sr,
  input  xle_cfg_t [N_LE-1:0]  cfg,
  input  logic [N_LE-1:0][5:0] a,
  input  logic [N_LE-1:0]      ax,
  input  logic                 cin,
  output logic [N_LE-1:0]      o6,
  output logic [N_LE-1:0]      amux,
  output logic [N_LE-1:0]      aq,
  output logic [N_LE-1:0]      co,    // carry out of every LE
  output logic                 cout   // carry out of the slice
);

  logic [N_LE:0] chain;
  assign chain[0] = cin;

  for (genvar i = 0; i < N_LE; i++) begin : g_le
    xlux_le u_le (
      .clk     (clk),
      .ce      (ce),
      .sr      (sr),
      .cfg     (cfg[i]),
      .a       (a[i]),
      .ax      (ax[i]),
      .cin     (chain[i]),
      .wide_in (o6[i ^ 1]),
      .o6      (o6[i]),
      .amux    (amux[i]),
      .aq      (aq[i]),
      .co      (co[i])
    );
    assign chain[i+1] = co[i];
  end

  assign cout = chain[N_LE];

endmodule
