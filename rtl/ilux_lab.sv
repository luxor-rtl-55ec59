// ilux_lab -- Intel logic array block built from I-LUXOR+ ALMs.
//
// N_ALM ALMs (ten in the Stratix-10 LAB) share clock, clock enable and
// synchronous reset and are joined by the carry chain: ALM i takes its
// carry from ALM i-1, ALM 0 from the LAB input cin, and the carry out of
// the last ALM leaves as cout. Each ALM's eight pins and four outputs
// are brought out directly; the LAB's local interconnect, which would
// route signals to these pins, is not part of this model.
//
// In arithmetic mode every ALM contributes two adder bits, so a full LAB
// is a 2*N_ALM-bit ripple-carry adder; otherwise each ALM is an
// independent logic cell (for example one C25:121 GPC each).
//
// Follows the LUXOR description: ten ALMs per LAB with a carry chain.
// This design's choice: no local interconnect, pins exposed as arrays.
module ilux_lab
  import luxor_pkg::*;
#(
  parameter int unsigned N_ALM = 10
) (
  input  logic                  clk,
  input  logic                  ce,
  input  logic                  sr,
  input  alm_cfg_t [N_ALM-1:0]  cfg,
  input  logic [N_ALM-1:0][7:0] pins,  // {F, E, D1, C1, D0, C0, B, A}
  input  logic                  cin,
  output logic [N_ALM-1:0][3:0] o,
  output logic                  cout
);

  logic [N_ALM:0] chain;
  assign chain[0] = cin;

  for (genvar i = 0; i < N_ALM; i++) begin : g_alm
    ilux_alm u_alm (
      .clk  (clk),
      .ce   (ce),
      .sr   (sr),
      .cfg  (cfg[i]),
      .a    (pins[i][0]),
      .b    (pins[i][1]),
      .c0   (pins[i][2]),
      .d0   (pins[i][3]),
      .c1   (pins[i][4]),
      .d1   (pins[i][5]),
      .e    (pins[i][6]),
      .f    (pins[i][7]),
      .cin  (chain[i]),
      .o    (o[i]),
      .cout (chain[i+1])
    );
  end

  assign cout = chain[N_ALM];

endmodule
