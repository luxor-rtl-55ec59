// luxor_top -- a logic tile with both LUXOR cell families side by side.
//
// LUXOR changes FPGA logic cells, not a datapath, so the "design" is a
// piece of fabric: here one Xilinx-style configurable logic block (CLB)
// of N_SLICES X-LUXOR+ slices, each four logic elements on a carry chain,
// and one Intel-style logic array block (LAB) of N_ALM I-LUXOR+ ALMs on
// a carry chain. The two halves share only clock, clock enable and
// synchronous reset; they model the two vendor variants of the same idea
// (an XOR6 in every cell, plus a vendor-specific carry injection or
// MajFA) and are not connected to each other.
//
// The general routing that would feed the cell pins is not modelled: all
// cell pins, per-cell configuration structs and cell outputs are ports.
// Each slice's carry input is a port, as the slices of one CLB are not
// chained to each other but to the slices of the CLBs above and below.
// All logic is combinational from pins to outputs except the cell
// flip-flops (AQ of each Xilinx LE, O0..O3 when registered in the ALMs),
// which load on the rising clk edge.
//
// Follows the LUXOR description: two slices per CLB, four LEs per slice,
// ten ALMs per LAB. This design's choice: putting both families in one
// tile and bringing all pins out.
module luxor_top
  import luxor_pkg::*;
#(
  parameter int unsigned N_SLICES = 2,
  parameter int unsigned N_LE     = 4,
  parameter int unsigned N_ALM    = 10
) (
  input  logic                                clk,
  input  logic                                ce,
  input  logic                                sr,
  // Xilinx CLB
  input  xle_cfg_t [N_SLICES-1:0][N_LE-1:0]   x_cfg,
  input  logic [N_SLICES-1:0][N_LE-1:0][5:0]  x_a,
  input  logic [N_SLICES-1:0][N_LE-1:0]       x_ax,
  input  logic [N_SLICES-1:0]                 x_cin,
  output logic [N_SLICES-1:0][N_LE-1:0]       x_o6,
  output logic [N_SLICES-1:0][N_LE-1:0]       x_amux,
  output logic [N_SLICES-1:0][N_LE-1:0]       x_aq,
  output logic [N_SLICES-1:0][N_LE-1:0]       x_co,
  output logic [N_SLICES-1:0]                 x_cout,
  // Intel LAB
  input  alm_cfg_t [N_ALM-1:0]                i_cfg,
  input  logic [N_ALM-1:0][7:0]               i_pins,  // {F,E,D1,C1,D0,C0,B,A}
  input  logic                                i_cin,
  output logic [N_ALM-1:0][3:0]               i_o,
  output logic                                i_cout
);

  for (genvar s = 0; s < N_SLICES; s++) begin : g_slice
    xlux_slice #(.N_LE(N_LE)) u_slice (
      .clk  (clk),
      .ce   (ce),
      .sr   (sr),
      .cfg  (x_cfg[s]),
      .a    (x_a[s]),
      .ax   (x_ax[s]),
      .cin  (x_cin[s]),
      .o6   (x_o6[s]),
      .amux (x_amux[s]),
      .aq   (x_aq[s]),
      .co   (x_co[s]),
      .cout (x_cout[s])
    );
  end

  ilux_lab #(.N_ALM(N_ALM)) u_lab (
    .clk  (clk),
    .ce   (ce),
    .sr   (sr),
    .cfg  (i_cfg),
    .pins (i_pins),
    .cin  (i_cin),
    .o    (i_o),
    .cout (i_cout)
  );

endmodule
