// tb_ilux_alm -- self-checking testbench for the I-LUXOR+ ALM.
//
// 1. Fracturable LUT: random top/bottom masks; O1 = top LUT-5 of
//    {E,D0,C0,B,A}, O2 = bottom LUT-5 of {F,D1,C1,B,A}.
// 2. Arithmetic mode: two-bit adder X + Y + cin through both adders,
//    exhaustive, including cout.
// 3. LUXOR C6:111: XOR6 and count bit 1 in one ALM, bit 2 in a second
//    ALM configuration, exhaustive over 64 patterns.
// 4. I-LUXOR+ C25:121 in one ALM, exhaustive over 128 patterns:
//    O1 + 2*(O2 + O0) + 4*O3 = a0+..+a4 + 2*(b0+b1).
// 5. Registered outputs appear one clock edge later; clock enable holds
//    and synchronous reset clears them.
module tb_ilux_alm;
  import luxor_pkg::*;
  import luxor_maps_pkg::*;

  logic clk = 1'b0;
  logic ce = 1'b1, sr = 1'b0;
  alm_cfg_t cfg;
  logic [7:0] p;   // {F, E, D1, C1, D0, C0, B, A}
  logic cin;
  logic [3:0] o;
  logic cout;
  int checks = 0, failures = 0;

  ilux_alm dut (.clk, .ce, .sr, .cfg,
                .a(p[0]), .b(p[1]), .c0(p[2]), .d0(p[3]),
                .c1(p[4]), .d1(p[5]), .e(p[6]), .f(p[7]),
                .cin, .o, .cout);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_int(input int got, input int exp, input string what);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d (pins=%b)", what, got, exp, p);
    end
  endtask

  initial begin
    logic [31:0] tm, bm;
    int v;
    p = '0; cin = 1'b0;

    // 1. fracturable LUT
    for (int t = 0; t < 200; t++) begin
      tm = $urandom; bm = $urandom;
      cfg = alm_base(); cfg.top_mask = tm; cfg.bot_mask = bm;
      p = 8'($urandom);
      #1;
      check_int(int'(o[1]), int'(tm[{p[6], p[3], p[2], p[1], p[0]}]), "top LUT-5");
      check_int(int'(o[2]), int'(bm[{p[7], p[5], p[4], p[1], p[0]}]), "bottom LUT-5");
    end

    // 2. arithmetic mode
    cfg = alm_add2();
    for (int t = 0; t < 32; t++) begin
      logic [1:0] x, y;
      x = t[1:0]; y = t[3:2]; cin = t[4];
      p = '0; p[0] = x[0]; p[4] = x[1]; p[1] = y[0]; p[5] = y[1];
      #1;
      check_int(int'(o[0]) + 2 * int'(o[2]) + 4 * int'(cout),
                int'(x) + int'(y) + int'(cin), "two-bit adder");
    end
    cin = 1'b0;

    // 3. LUXOR C6:111 over two ALM configurations
    for (int t = 0; t < 64; t++) begin
      p = {t[5], t[4], 2'b00, t[3], t[2], t[1], t[0]};
      cfg = alm_c6_bit(1); #1;
      v = int'(o[0]) + 2 * int'(o[1]);
      cfg = alm_c6_bit(2); #1;
      v += 4 * int'(o[1]);
      check_int(v, pop(32'(t)), "C6:111");
    end

    // 4. I-LUXOR+ C25:121
    cfg = alm_c25();
    for (int t = 0; t < 128; t++) begin
      // a0..a4 = t[4:0], b0, b1 = t[5], t[6]
      p = '0;
      p[0] = t[0]; p[1] = t[1]; p[2] = t[2]; p[3] = t[3]; p[6] = t[4];
      p[4] = t[5]; p[5] = t[6];
      #1;
      check_int(int'(o[1]) + 2 * (int'(o[2]) + int'(o[0])) + 4 * int'(o[3]),
                pop(32'(t[4:0])) + 2 * pop(32'(t[6:5])), "C25:121");
    end

    // 5. registered outputs
    cfg.reg_out = 4'b1111;
    @(negedge clk); p = 8'b0111_1111;   // a0..a4 = 1, b0 = b1 = 1 -> 9
    @(posedge clk); #1;
    check_int(int'(o[1]) + 2 * (int'(o[2]) + int'(o[0])) + 4 * int'(o[3]), 9,
              "C25:121 registered, one cycle");
    @(negedge clk); p = '0; ce = 1'b0; @(posedge clk); #1;
    check_int(int'(o), 4'b1111, "clock enable holds");
    @(negedge clk); sr = 1'b1; @(posedge clk); #1;
    check_int(int'(o), 0, "synchronous reset");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
