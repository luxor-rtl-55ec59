// tb_xlux_le -- self-checking testbench for the X-LUXOR+ logic element.
//
// Exercises the baseline datapath (random LUT-6 truth tables on O6/O5, a
// full adder on the carry logic, F7, both flip-flops with clock enable
// and reset) and the two LUXOR additions: XOR6 on AMUX and the
// XnorPopcount of three pairs in one LE, and the X-LUXOR+ --06-- atom,
// which must count six input bits plus the carry in (0..7) as XSUM +
// 2*SUM + 4*CO for every input pattern and both carry values. The same
// atom configuration with the injection switched off must fall back to
// the vendor behaviour SUM = O6 ^ CI. Registered outputs are checked to
// appear exactly one clock edge after their inputs.
module tb_xlux_le;
  import luxor_pkg::*;
  import luxor_maps_pkg::*;

  logic clk = 1'b0;
  logic ce, sr, ax, cin, wide_in;
  logic [5:0] a;
  xle_cfg_t cfg;
  logic o6, amux, aq, co;
  int checks = 0, failures = 0;

  xlux_le dut (.clk, .ce, .sr, .cfg, .a, .ax, .cin, .wide_in,
               .o6, .amux, .aq, .co);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic got, input logic exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0b expected %0b (a=%b cin=%b ax=%b)",
               what, got, exp, a, cin, ax);
    end
  endtask

  initial begin
    int n, v;
    logic [63:0] t6;
    logic [31:0] t5;
    ce = 1'b1; sr = 1'b0; ax = 1'b0; cin = 1'b0; wide_in = 1'b0; a = '0;
    cfg = xle_base();

    // 1. random LUT-6 truth tables: O6 on A, O5 on AMUX
    for (int t = 0; t < 40; t++) begin
      t6 = {$urandom, $urandom};
      t5 = $urandom;
      cfg = xle_base();
      cfg.o6_init = t6; cfg.o5_init = t5; cfg.amux_sel = XM_O5;
      for (int i = 0; i < 8; i++) begin
        a = 6'($urandom);
        #1;
        check(o6, t6[a], "O6 truth table");
        check(amux, t5[a[4:0]], "O5 truth table");
      end
    end

    // 2. LUXOR XOR6 on AMUX, all patterns
    cfg = xle_base(); cfg.amux_sel = XM_XOR6;
    for (int i = 0; i < 64; i++) begin
      a = 6'(i); #1;
      check(amux, logic'(pop(32'(i)) % 2), "XOR6");
    end

    // 3. carry logic as full adder A1 + A2 + carry (chain, AX, constants)
    cfg = xle_fa();
    for (int i = 0; i < 32; i++) begin
      a = {4'($urandom), i[1:0]};
      cin = i[2]; ax = i[3];
      cfg.ci_src = i[4] ? CI_AX : CI_CHAIN;
      #1;
      v = int'(a[0]) + int'(a[1]) + int'(i[4] ? ax : cin);
      check(amux, logic'(v % 2), "FA sum");
      check(co, logic'(v / 2), "FA carry");
    end
    cfg.ci_src = CI_ONE; a = 6'b000001; #1;
    check(co, 1'b1, "FA carry with constant 1");
    cfg.ci_src = CI_ZERO; a = 6'b000001; cin = 1'b1; #1;
    check(co, 1'b0, "FA carry with constant 0");
    // DI from AX: O6 = 0 -> CO = AX
    cfg.di_ax = 1'b1; a = 6'b000000; ax = 1'b1; #1;
    check(co, 1'b1, "DI from AX");

    // 4. X-LUXOR+ --06-- atom: exhaustive, both carry values;
    //    XSUM on AMUX, SUM through the AQ flip-flop (one cycle)
    cfg = xle_atom06();
    for (int i = 0; i < 128; i++) begin
      @(negedge clk);
      a = 6'(i); cin = i[6];
      n = pop(32'(i));               // six bits plus the carry in
      @(posedge clk); #1;
      check(amux, logic'(n % 2), "atom06 XSUM");
      check(aq, logic'((n / 2) % 2), "atom06 SUM (registered)");
      check(co, logic'(n / 4), "atom06 CO");
    end
    // injection switched off: vendor behaviour SUM = O6 ^ CI
    cfg.lux_plus = 1'b0; cfg.amux_sel = XM_SUM;
    for (int i = 0; i < 128; i++) begin
      a = 6'(i); cin = i[6]; #1;
      check(amux, cfg.o6_init[a] ^ cin, "SUM without LUXOR+");
    end

    // 5. LUXOR XnorPopcount: weights enter complemented
    cfg = xle_xnorpop();
    for (int i = 0; i < 64; i++) begin
      logic [2:0] w, x;
      w = i[2:0]; x = i[5:3];
      a = {x[2], ~w[2], x[1], ~w[1], x[0], ~w[0]};
      n = pop(32'(~(w ^ x) & 3'b111));
      #1;
      check(amux, logic'(n % 2), "XnorPopcount S");
      check(o6, logic'(n / 2), "XnorPopcount C");
    end

    // 6. F7 mux and the second flip-flop through AMUX
    cfg = xle_base(); cfg.o6_init = '1; cfg.amux_sel = XM_F7;
    wide_in = 1'b0; ax = 1'b0; #1; check(amux, 1'b1, "F7 own O6");
    ax = 1'b1; #1; check(amux, 1'b0, "F7 neighbour");
    cfg.amux_sel = XM_FF; cfg.ff2_ax = 1'b1;
    @(negedge clk); ax = 1'b1; @(posedge clk); #1;
    check(amux, 1'b1, "second FF loads AX");
    @(negedge clk); ax = 1'b0; #1;
    check(amux, 1'b1, "second FF holds before edge");
    @(posedge clk); #1;
    check(amux, 1'b0, "second FF loads after one edge");

    // 7. AQ: clock enable and synchronous reset
    cfg.ffd_sel = XD_AX;
    @(negedge clk); ax = 1'b1; @(posedge clk); #1; check(aq, 1'b1, "AQ load");
    @(negedge clk); ax = 1'b0; ce = 1'b0; @(posedge clk); #1;
    check(aq, 1'b1, "AQ hold with CE low");
    @(negedge clk); sr = 1'b1; @(posedge clk); #1;
    check(aq, 1'b0, "AQ synchronous reset");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
