// tb_ilux_lab -- self-checking testbench for a LAB of ten I-LUXOR+ ALMs.
//
// 1. All ALMs in arithmetic mode form a 20-bit ripple-carry adder on the
//    LAB carry chain; random operands and carry in, checked against the
//    integer sum including cout.
// 2. All ALMs hold the I-LUXOR+ C25:121 GPC at once; each ALM's weighted
//    outputs must equal its own weighted input count.
module tb_ilux_lab;
  import luxor_pkg::*;
  import luxor_maps_pkg::*;

  localparam int N = 10;
  logic clk = 1'b0;
  logic ce = 1'b1, sr = 1'b0, cin;
  alm_cfg_t [N-1:0] cfg;
  logic [N-1:0][7:0] pins;
  logic [N-1:0][3:0] o;
  logic cout;
  int checks = 0, failures = 0;

  ilux_lab #(.N_ALM(N)) dut (.clk, .ce, .sr, .cfg, .pins, .cin, .o, .cout);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_long(input longint got, input longint exp, input string what);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    longint x, y, got;
    int v, e;
    pins = '0; cin = 1'b0;

    for (int i = 0; i < N; i++) cfg[i] = alm_add2();
    for (int t = 0; t < 300; t++) begin
      x = longint'($urandom_range(0, (1 << (2 * N)) - 1));
      y = longint'($urandom_range(0, (1 << (2 * N)) - 1));
      if (t == 0) begin x = (1 << (2 * N)) - 1; y = 1; end
      cin = (t == 0) ? 1'b0 : 1'($urandom);
      for (int i = 0; i < N; i++) begin
        pins[i] = '0;
        pins[i][0] = x[2 * i];     pins[i][4] = x[2 * i + 1];
        pins[i][1] = y[2 * i];     pins[i][5] = y[2 * i + 1];
      end
      #1;
      got = longint'(cout) << (2 * N);
      for (int i = 0; i < N; i++)
        got += (longint'(o[i][0]) << (2 * i)) + (longint'(o[i][2]) << (2 * i + 1));
      check_long(got, x + y + longint'(cin), "20-bit ripple adder");
    end

    for (int i = 0; i < N; i++) cfg[i] = alm_c25();
    for (int t = 0; t < 50; t++) begin
      for (int i = 0; i < N; i++) pins[i] = 8'($urandom) & 8'b0111_1111;
      #1;
      for (int i = 0; i < N; i++) begin
        v = int'(o[i][1]) + 2 * (int'(o[i][2]) + int'(o[i][0])) + 4 * int'(o[i][3]);
        e = pop(32'({pins[i][6], pins[i][3:0]})) + 2 * pop(32'(pins[i][5:4]));
        check_long(longint'(v), longint'(e), "C25:121 per ALM");
      end
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
