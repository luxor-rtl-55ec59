// tb_xlux_slice -- self-checking testbench for a slice of four X-LUXOR+
// logic elements.
//
// 1. C06060606:111111111: every LE holds the --06-- atom; 24 random
//    input bits in columns 0, 2, 4, 6 (LE i = column 2i) and a random
//    slice carry in (weight 1). The nine outputs, XSUM_i (weight 4^i),
//    SUM_i (weight 2*4^i, read through AQ one clock later) and cout
//    (weight 256), must add up to the weighted input count.
// 2. Backward compatibility: a 4-bit ripple-carry adder on the vendor
//    carry chain (O6 = propagate, O5 = generate).
// 3. LUXOR C6:111 in two LEs: count bits 0 and 1 from LE 0 (XOR6 on
//    AMUX, O6), bit 2 from LE 1.
module tb_xlux_slice;
  import luxor_pkg::*;
  import luxor_maps_pkg::*;

  localparam int N = 4;
  logic clk = 1'b0;
  logic ce = 1'b1, sr = 1'b0, cin;
  xle_cfg_t [N-1:0] cfg;
  logic [N-1:0][5:0] a;
  logic [N-1:0] ax, o6, amux, aq, co;
  logic cout;
  int checks = 0, failures = 0;

  xlux_slice #(.N_LE(N)) dut (.clk, .ce, .sr, .cfg, .a, .ax, .cin,
                              .o6, .amux, .aq, .co, .cout);

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
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    int exp, got, x, y;
    ax = '0; cin = 1'b0; a = '0;

    // 1. C06060606:111111111
    for (int i = 0; i < N; i++) cfg[i] = xle_atom06();
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      exp = 0;
      for (int i = 0; i < N; i++) begin
        a[i] = 6'($urandom);
        if (t < 4) a[i] = (t == 3) ? 6'h3f : (t == 2 ? 6'h00 : 6'h15);
        exp += pop(32'(a[i])) << (2 * i);
      end
      cin = (t < 4) ? t[0] : 1'($urandom);
      exp += int'(cin);
      @(posedge clk); #1;
      got = int'(cout) << (2 * N);
      for (int i = 0; i < N; i++)
        got += (int'(amux[i]) << (2 * i)) + (int'(aq[i]) << (2 * i + 1));
      check_int(got, exp, "C06060606 value");
    end

    // 2. 4-bit ripple-carry adder on the vendor carry chain
    for (int i = 0; i < N; i++) cfg[i] = xle_fa();
    for (int t = 0; t < 64; t++) begin
      x = int'($urandom_range(0, 15)); y = int'($urandom_range(0, 15));
      for (int i = 0; i < N; i++) a[i] = {4'b0, y[i] ? 1'b1 : 1'b0, x[i] ? 1'b1 : 1'b0};
      cin = 1'($urandom);
      #1;
      got = int'(cout) << N;
      for (int i = 0; i < N; i++) got += int'(amux[i]) << i;
      check_int(got, x + y + int'(cin), "ripple adder");
    end

    // 3. LUXOR C6:111 in two LEs
    cfg[0] = xle_c6_bit(1);
    cfg[1] = xle_c6_bit(2);
    for (int t = 0; t < 64; t++) begin
      a[0] = 6'(t); a[1] = 6'(t);
      #1;
      check_int(int'(amux[0]) + 2 * int'(o6[0]) + 4 * int'(o6[1]),
                pop(32'(t)), "C6:111 in two LEs");
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
