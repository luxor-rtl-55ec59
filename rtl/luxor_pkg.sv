// luxor_pkg -- configuration types shared by the LUXOR logic cells.
//
// An FPGA logic cell is steered by configuration bits: LUT truth tables,
// the select lines of its internal multiplexers and the choice of
// registered or combinational outputs. This package gathers those bits
// into one packed struct per cell type so that a cell, its container
// (slice, LAB) and the tile above them all pass one typed value.
//
//   xle_cfg_t  one quarter of a Xilinx UltraScale+ slice extended with
//              the LUXOR XOR6 and the X-LUXOR+ carry injection.
//   alm_cfg_t  one Intel Stratix-10 ALM extended with the LUXOR XOR6 and
//              the I-LUXOR+ MajFA (majority-of-three plus full adder).
//
// The configuration is static: it is modelled as input ports that are
// held constant while the cell computes. How the bits are loaded
// (configuration memory, frames) is outside this design. The multiplexer
// encodings below are this design's choice; the sets of signals each
// multiplexer can pick follow the LUXOR cell drawings.
package luxor_pkg;

  // ---------------------------------------------------------------------
  // Xilinx quarter slice (X-LUXOR+ logic element)
  // ---------------------------------------------------------------------

  // Carry input of the LE: the chain from the LE below, the AX pin, or a
  // constant (used at the start of a chain).
  typedef enum logic [1:0] {
    CI_CHAIN = 2'd0,
    CI_AX    = 2'd1,
    CI_ZERO  = 2'd2,
    CI_ONE   = 2'd3
  } xle_ci_e;

  // Sources of the AMUX output.
  typedef enum logic [2:0] {
    XM_O6   = 3'd0,  // LUT-6 O6
    XM_O5   = 3'd1,  // LUT-6 O5
    XM_SUM  = 3'd2,  // carry-chain sum, O6 xor carry
    XM_CO   = 3'd3,  // carry out of this LE
    XM_XOR6 = 3'd4,  // LUXOR: parity of A6..A1
    XM_XSUM = 3'd5,  // X-LUXOR+: XOR6 xor incoming carry
    XM_FF   = 3'd6,  // Q of the second flip-flop
    XM_F7   = 3'd7   // wide-function multiplexer
  } xle_amux_e;

  // Sources of the D input of the FF/latch that drives AQ.
  typedef enum logic [2:0] {
    XD_O6   = 3'd0,
    XD_O5   = 3'd1,
    XD_SUM  = 3'd2,
    XD_CO   = 3'd3,
    XD_XOR6 = 3'd4,
    XD_XSUM = 3'd5,
    XD_AX   = 3'd6,
    XD_F7   = 3'd7
  } xle_ffd_e;

  typedef struct packed {
    logic [63:0] o6_init;   // O6 = o6_init[A6..A1]
    logic [31:0] o5_init;   // O5 = o5_init[A5..A1]
    logic        di_ax;     // carry-mux data input: 1 = AX, 0 = O5
    xle_ci_e     ci_src;    // carry input source
    logic        lux_plus;  // 1 = X-LUXOR+ carry injection active
    xle_amux_e   amux_sel;  // AMUX output source
    xle_ffd_e    ffd_sel;   // AQ flip-flop D source
    logic        ff2_ax;    // second flip-flop D: 1 = AX, 0 = O5
  } xle_cfg_t;

  // ---------------------------------------------------------------------
  // Intel ALM (I-LUXOR+)
  // ---------------------------------------------------------------------

  // Sources of result r0, the top result next to the LUXOR additions.
  typedef enum logic [1:0] {
    R0_TOP     = 2'd0,  // top adder sum (arithmetic) or top LUT-5
    R0_XOR6    = 2'd1,  // LUXOR: parity of A, B, C0, D0, E, F
    R0_MAJFA_S = 2'd2,  // I-LUXOR+: MajFA sum
    R0_LUT6    = 2'd3   // full 6-input LUT
  } alm_r0_e;

  typedef struct packed {
    logic [31:0] top_mask;    // LUT-4 #0 = [15:0], #1 = [31:16]
    logic [31:0] bot_mask;    // LUT-4 #2 = [15:0], #3 = [31:16]
    logic        bot_shared;  // bottom LUT-4s read {D0,C0,B,A} and E
                              // instead of {D1,C1,B,A} and F
    logic        arith;       // arithmetic mode: LUT-4 pairs feed the adders
    alm_r0_e     r0_sel;
    logic        r1_lut6;     // r1 = LUT-6 instead of top LUT-5
    logic        r3_majfa;    // r3 = MajFA carry instead of bottom LUT-5
    logic [3:0]  reg_out;     // output k taken from flip-flop k
  } alm_cfg_t;

endpackage
