// tb_luxor_top -- end-to-end testbench of the LUXOR tile at its default
// size (two X-LUXOR+ slices, ten I-LUXOR+ ALMs).
//
// Phase 1, multi-operand addition (six 7-bit operands, the worked example
// of the LUXOR compressor-tree discussion): the CLB compresses the 6x7
// bit array in one stage. Slice 0 holds C06060606 on columns 0, 2, 4, 6,
// slice 1 holds C060606 on columns 1, 3, 5 (its fourth LE idle). The two
// 9-bit rows (slice 1 shifted by one column) are then added on the LAB
// carry chain in arithmetic mode, and the result must equal the sum of
// the six operands.
// Phase 2, BNN XnorPopcount: 24 weight/activation pairs on the eight LEs
// in LUXOR mode, three pairs per LE; sum over LEs of S + 2*C must equal
// the number of matching pairs.
// Phase 3, I-LUXOR+ C25:121 in every ALM and LUXOR C6:111 in ALM pairs,
// with registered outputs one clock after the inputs.
//
// Mechanisms counted, each must occur: carry injection of A1 into the
// X-LUXOR+ chain (even parity with A1 = 1), a carry leaving an X-LUXOR+
// LE, XOR6 used on both cell families, the MajFA majority firing, a
// carry crossing ALMs on the LAB chain, registered outputs.
module tb_luxor_top;
  import luxor_pkg::*;
  import luxor_maps_pkg::*;

  localparam int NS = 2, NL = 4, NA = 10;
  logic clk = 1'b0;
  logic ce = 1'b1, sr = 1'b0;
  xle_cfg_t [NS-1:0][NL-1:0] x_cfg;
  logic [NS-1:0][NL-1:0][5:0] x_a;
  logic [NS-1:0][NL-1:0] x_ax, x_o6, x_amux, x_aq, x_co;
  logic [NS-1:0] x_cin, x_cout;
  alm_cfg_t [NA-1:0] i_cfg;
  logic [NA-1:0][7:0] i_pins;
  logic i_cin, i_cout;
  logic [NA-1:0][3:0] i_o;
  int checks = 0, failures = 0;
  int n_inject = 0, n_xcarry = 0, n_xor6_x = 0, n_xor6_i = 0;
  int n_majfa = 0, n_labcarry = 0, n_reg = 0;

  luxor_top dut (.clk, .ce, .sr, .x_cfg, .x_a, .x_ax, .x_cin, .x_o6,
                 .x_amux, .x_aq, .x_co, .x_cout, .i_cfg, .i_pins, .i_cin,
                 .i_o, .i_cout);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_int(input int got, input int exp, input string what);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  task automatic mech(input int cnt, input string what);
    checks++;
    $display("mechanism %-28s %0d", what, cnt);
    if (cnt == 0) begin
      failures++;
      $display("FAIL mechanism never exercised: %s", what);
    end
  endtask

  initial begin
    int ops[6];
    int exp, row0, row1, got, m;
    x_ax = '0; x_cin = '0; x_a = '0; i_pins = '0; i_cin = 1'b0;
    for (int s = 0; s < NS; s++)
      for (int l = 0; l < NL; l++) x_cfg[s][l] = xle_atom06();
    for (int k = 0; k < NA; k++) i_cfg[k] = alm_add2();

    // ---------------- phase 1: six 7-bit operands ----------------
    for (int t = 0; t < 300; t++) begin
      @(negedge clk);
      exp = 0;
      for (int j = 0; j < 6; j++) begin
        ops[j] = (t == 0) ? 127 : int'($urandom_range(0, 127));
        exp += ops[j];
      end
      for (int s = 0; s < NS; s++)
        for (int l = 0; l < NL; l++) begin
          int col;
          col = 2 * l + s;
          for (int j = 0; j < 6; j++)
            x_a[s][l][j] = (col < 7) ? ops[j][col] : 1'b0;
          if (pop(32'(x_a[s][l])) % 2 == 0 && x_a[s][l][0]) n_inject++;
        end
      @(posedge clk); #1;               // SUM bits arrive through AQ
      row0 = int'(x_cout[0]) << 8;
      row1 = int'(x_cout[1]) << 8;
      for (int l = 0; l < NL; l++) begin
        row0 += (int'(x_amux[0][l]) << (2 * l)) + (int'(x_aq[0][l]) << (2 * l + 1));
        row1 += (int'(x_amux[1][l]) << (2 * l)) + (int'(x_aq[1][l]) << (2 * l + 1));
        if (x_co[0][l] || x_co[1][l]) n_xcarry++;
      end
      // final carry-propagate addition on the LAB: row0 + 2*row1
      for (int k = 0; k < NA; k++) begin
        int xv, yv;
        xv = row0; yv = row1 << 1;
        i_pins[k] = '0;
        i_pins[k][0] = xv[2 * k]; i_pins[k][4] = xv[2 * k + 1];
        i_pins[k][1] = yv[2 * k]; i_pins[k][5] = yv[2 * k + 1];
      end
      #1;
      got = int'(i_cout) << (2 * NA);
      for (int k = 0; k < NA; k++) begin
        got += (int'(i_o[k][0]) << (2 * k)) + (int'(i_o[k][2]) << (2 * k + 1));
        // carry into ALM k: low 2k bits of the operands overflow
        if (k > 0 && ((row0 % (1 << (2 * k))) + ((row1 << 1) % (1 << (2 * k))))
                     >= (1 << (2 * k))) n_labcarry++;
      end
      check_int(row0 + 2 * row1, exp, "compressor stage keeps the sum");
      check_int(got, exp, "six-operand 7-bit addition");
    end

    // ---------------- phase 2: BNN XnorPopcount ----------------
    for (int s = 0; s < NS; s++)
      for (int l = 0; l < NL; l++) x_cfg[s][l] = xle_xnorpop();
    for (int t = 0; t < 200; t++) begin
      logic [23:0] w, x;
      w = 24'($urandom); x = 24'($urandom);
      for (int s = 0; s < NS; s++)
        for (int l = 0; l < NL; l++) begin
          int b;
          b = 3 * (NL * s + l);
          x_a[s][l] = {x[b+2], ~w[b+2], x[b+1], ~w[b+1], x[b], ~w[b]};
        end
      #1;
      got = 0;
      for (int s = 0; s < NS; s++)
        for (int l = 0; l < NL; l++) begin
          got += int'(x_amux[s][l]) + 2 * int'(x_o6[s][l]);
          if (x_amux[s][l]) n_xor6_x++;
        end
      check_int(got, pop(32'(~(w ^ x) & 24'hFFFFFF)), "XnorPopcount of 24 pairs");
    end

    // ---------------- phase 3: ALM GPCs, registered ----------------
    for (int k = 0; k < NA; k++) begin
      i_cfg[k] = (k < 6) ? alm_c25() : alm_c6_bit((k % 2 == 0) ? 1 : 2);
      i_cfg[k].reg_out = 4'b1111;
    end
    for (int t = 0; t < 200; t++) begin
      @(negedge clk);
      for (int k = 0; k < NA; k++) i_pins[k] = 8'($urandom);
      for (int k = 6; k < NA; k += 2) i_pins[k+1] = i_pins[k];
      for (int k = 0; k < 6; k++)
        if (pop(32'({i_pins[k][6], i_pins[k][3:2]})) >= 2) n_majfa++;
      @(posedge clk); #1;
      n_reg++;
      for (int k = 0; k < 6; k++) begin
        m = pop(32'({i_pins[k][6], i_pins[k][3:0]})) + 2 * pop(32'(i_pins[k][5:4]));
        check_int(int'(i_o[k][1]) + 2 * (int'(i_o[k][2]) + int'(i_o[k][0]))
                  + 4 * int'(i_o[k][3]), m, "C25:121 in one ALM");
      end
      for (int k = 6; k < NA; k += 2) begin
        logic [5:0] six;
        six = {i_pins[k][7:6], i_pins[k][3:0]};
        if (i_o[k][0]) n_xor6_i++;
        check_int(int'(i_o[k][0]) + 2 * int'(i_o[k][1]) + 4 * int'(i_o[k+1][1]),
                  pop(32'(six)), "C6:111 in two ALMs");
      end
    end

    mech(n_inject,   "X-LUXOR+ A1 injection");
    mech(n_xcarry,   "X-LUXOR+ carry out");
    mech(n_xor6_x,   "XOR6 in Xilinx LE");
    mech(n_xor6_i,   "XOR6 in Intel ALM");
    mech(n_majfa,    "I-LUXOR+ MajFA majority");
    mech(n_labcarry, "carry across ALMs");
    mech(n_reg,      "registered outputs");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
