// tb_xlux_popcount -- compressor-tree workloads on a pool of LUXOR slices.
//
// Runs the bit-counting micro-benchmarks used to evaluate LUXOR through
// real X-LUXOR+ LEs: popcount of 128/256/512 bits (S128..S512), two-column
// popcount of 128/256/512 bits per column (D128..D512), and BNN
// XnorPopcount of 3x3x64 ... 3x3x1024 weight/activation pairs. A pool of
// 128 slices (512 LEs, chained slice to slice like a column of CLBs) is
// instantiated; the testbench acts as the routing and reuses the pool
// for every tree stage, in batches of at most 512 LEs when a stage is
// larger, so the LE count of a tree is the sum over stages and batches.
//
// Tree construction (a simple greedy reduction, not the optimal ILP
// mapping): in every stage each column is cut into groups of six bits,
// each a LUXOR C6:111 in two LEs (XOR6 for bit 0); a leftover of three to
// five bits gets a C3:11 in one LE; one or two leftover bits pass on.
// In X-LUXOR+ mode the stage first places the slice GPCs C060606 and
// C06060606 (three or four --06-- atoms chained in one slice, sum bits
// read through the LE flip-flops after one clock) wherever columns c,
// c+2, c+4 (and c+6) each still hold six bits; the X-LUXOR+ runs as a
// whole must place at least one. BNN first fuses XNOR and the first 3:2
// compression: one LE per three pairs (XOR6 = sum, O6 = carry), then
// reduces in X-LUXOR+ mode. When every column holds at most two
// bits, the two rows are added by a ripple-carry adder on the slice
// carry chain (one LE per column). The result must equal the count; the
// LE and stage totals are printed for comparison with published numbers.
module tb_xlux_popcount;
  import luxor_pkg::*;
  import luxor_maps_pkg::*;

  localparam int NSL  = 128;
  localparam int NLE  = 4 * NSL;
  localparam int NCOL = 16;
  localparam int MAXB = 4096;

  logic clk = 1'b0;
  logic ce = 1'b1, sr = 1'b0;
  xle_cfg_t [3:0]      cfg  [NSL];
  logic [3:0][5:0]     a    [NSL];
  logic [3:0]          ax   [NSL];
  logic [3:0]          o6   [NSL];
  logic [3:0]          amux [NSL];
  logic [3:0]          aq   [NSL];
  logic [3:0]          co   [NSL];
  logic [NSL:0]        chain;

  assign chain[0] = 1'b0;
  for (genvar s = 0; s < NSL; s++) begin : g_pool
    xlux_slice u_slice (.clk, .ce, .sr, .cfg(cfg[s]), .a(a[s]), .ax(ax[s]),
                        .cin(chain[s]), .o6(o6[s]), .amux(amux[s]),
                        .aq(aq[s]), .co(co[s]), .cout(chain[s+1]));
  end

  int checks = 0, failures = 0;

  // bit columns of the current stage
  bit cb [NCOL][MAXB];
  // columns being built for the next stage
  bit nb [NCOL][MAXB];
  int nh [NCOL];
  int h  [NCOL];
  // outputs of the current stage: LE, source (see get_out), column
  int out_le [3 * NLE];
  int out_src[3 * NLE];
  int out_col[3 * NLE];
  int n_out;
  int n_slice_gpc;      // C060606 / C06060606 placed in the current run
  int total_slice_gpc = 0;

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic clear_pool();
    for (int s = 0; s < NSL; s++) begin
      for (int l = 0; l < 4; l++) cfg[s][l] = xle_base();
      a[s] = '0;
      ax[s] = '0;
    end
  endtask

  task automatic set_le(input int g, input xle_cfg_t c, input logic [5:0] bits);
    cfg[g / 4][g % 4] = c;
    a[g / 4][g % 4]   = bits;
  endtask

  // src: 0 = AMUX, 1 = O6, 2 = flip-flop, 3 = carry out
  function automatic logic get_out(input int g, input int src);
    case (src)
      0:       return amux[g / 4][g % 4];
      1:       return o6[g / 4][g % 4];
      2:       return aq[g / 4][g % 4];
      default: return co[g / 4][g % 4];
    endcase
  endfunction

  task automatic add_out(input int g, input int src, input int col);
    out_le[n_out] = g; out_src[n_out] = src; out_col[n_out] = col;
    n_out++;
  endtask

  function automatic int max_height();
    int m = 0;
    for (int c = 0; c < NCOL; c++) if (h[c] > m) m = h[c];
    return m;
  endfunction

  // one reduction stage; returns the number of LEs used
  // evaluate the cells placed so far (one clock for the flip-flop
  // outputs), move their outputs to the next stage's columns and free
  // the pool for the next batch of the same stage
  task automatic flush(inout int used);
    if (used == 0) return;
    #1;
    clk = 1'b1; #1; clk = 1'b0; #1;
    for (int k = 0; k < n_out; k++) begin
      nb[out_col[k]][nh[out_col[k]]] = get_out(out_le[k], out_src[k]);
      nh[out_col[k]]++;
    end
    n_out = 0;
    used = 0;
    clear_pool();
  endtask

  task automatic stage(input bit plus, output int les);
    int cidx [NCOL];
    int idx, used, k;
    logic [5:0] six;
    xle_cfg_t at;
    used = 0; les = 0; n_out = 0;
    clear_pool();
    for (int c = 0; c < NCOL; c++) begin nh[c] = 0; cidx[c] = 0; end
    // X-LUXOR+: C060606 / C06060606, one slice each, where three or four
    // columns c, c+2, c+4 (, c+6) each still hold six bits
    if (plus) begin
      for (int c = 0; c + 4 < NCOL; c++) begin
        while (h[c] - cidx[c] >= 6 && h[c+2] - cidx[c+2] >= 6 &&
               h[c+4] - cidx[c+4] >= 6) begin
          k = (c + 6 < NCOL && h[c+6] - cidx[c+6] >= 6) ? 4 : 3;
          if (used + 4 > NLE) flush(used);
          for (int i = 0; i < k; i++) begin
            for (int j = 0; j < 6; j++) six[j] = cb[c + 2*i][cidx[c + 2*i] + j];
            at = xle_atom06();
            at.ci_src = (i == 0) ? CI_ZERO : CI_CHAIN;
            set_le(used + i, at, six);
            add_out(used + i, 0, c + 2*i);       // XSUM
            add_out(used + i, 2, c + 2*i + 1);   // sum, via the flip-flop
            cidx[c + 2*i] += 6;
          end
          add_out(used + k - 1, 3, c + 2*k);     // carry out of the chain
          used += 4; les += 4; n_slice_gpc++;   // a whole slice (Table 1)
        end
      end
    end
    for (int c = 0; c < NCOL; c++) begin
      idx = cidx[c];
      while (h[c] - idx >= 6) begin
        if (used + 2 > NLE) flush(used);
        for (int j = 0; j < 6; j++) six[j] = cb[c][idx + j];
        set_le(used, xle_c6_bit(1), six);
        set_le(used + 1, xle_c6_bit(2), six);
        add_out(used, 0, c); add_out(used, 1, c + 1); add_out(used + 1, 1, c + 2);
        used += 2; les += 2; idx += 6;
      end
      if (h[c] - idx >= 3) begin
        if (used + 1 > NLE) flush(used);
        six = {3'b000, cb[c][idx + 2], cb[c][idx + 1], cb[c][idx]};
        set_le(used, xle_c6_bit(1), six);
        add_out(used, 0, c); add_out(used, 1, c + 1);
        used += 1; les += 1; idx += 3;
      end
      while (idx < h[c]) begin
        nb[c][nh[c]] = cb[c][idx]; nh[c]++; idx++;
      end
    end
    flush(used);
    for (int c = 0; c < NCOL; c++) begin
      h[c] = nh[c];
      for (int j = 0; j < nh[c]; j++) cb[c][j] = nb[c][j];
    end
  endtask

  // final two-row addition on the carry chain; returns value and LEs
  task automatic final_add(output longint value, output int used);
    int w = 0;
    clear_pool();
    for (int c = 0; c < NCOL; c++) if (h[c] > 0) w = c + 1;
    for (int c = 0; c < w; c++) begin
      xle_cfg_t f;
      f = xle_fa();
      f.ci_src = (c == 0) ? CI_ZERO : CI_CHAIN;
      set_le(c, f, {4'b0000, (h[c] > 1) ? cb[c][1] : 1'b0,
                             (h[c] > 0) ? cb[c][0] : 1'b0});
    end
    #1;
    value = 0;
    for (int c = 0; c < w; c++) value += longint'(amux[c / 4][c % 4]) << c;
    if (w > 0) value += longint'(co[(w - 1) / 4][(w - 1) % 4]) << w;
    used = w;
  endtask

  // kind 0: popcount of n bits; 1: two-column popcount, n bits per
  // column; 2: BNN XnorPopcount of n pairs (n a multiple of 3)
  task automatic run(input string name, input int kind, input int n,
                     input int vectors, input bit plus, input string paper_note);
    int les, stages, used, exp_v;
    longint got;
    n_slice_gpc = 0;
    for (int v = 0; v < vectors; v++) begin
      les = 0; stages = 0; exp_v = 0;
      for (int c = 0; c < NCOL; c++) h[c] = 0;
      if (kind == 2) begin
        // fused XNOR + 3:2 compression, one LE per three pairs, in
        // batches of the pool size
        for (int base = 0; base < n / 3; base += NLE) begin
          int cnt;
          cnt = (n / 3 - base < NLE) ? n / 3 - base : NLE;
          clear_pool();
          for (int g = 0; g < cnt; g++) begin
            logic [2:0] w, x;
            w = 3'($urandom); x = 3'($urandom);
            if (v == 0) begin w = 3'b000; x = 3'b000; end
            exp_v += pop(32'(~(w ^ x) & 3'b111));
            set_le(g, xle_xnorpop(), {x[2], ~w[2], x[1], ~w[1], x[0], ~w[0]});
          end
          #1;
          for (int g = 0; g < cnt; g++) begin
            cb[0][h[0]] = amux[g / 4][g % 4]; h[0]++;
            cb[1][h[1]] = o6[g / 4][g % 4];   h[1]++;
          end
        end
        les += n / 3; stages++;
      end else begin
        for (int j = 0; j < n; j++) begin
          cb[0][j] = (v == 0) ? 1'b1 : 1'($urandom);
          exp_v += int'(cb[0][j]);
        end
        h[0] = n;
        if (kind == 1) begin
          for (int j = 0; j < n; j++) begin
            cb[1][j] = (v == 0) ? 1'b1 : 1'($urandom);
            exp_v += 2 * int'(cb[1][j]);
          end
          h[1] = n;
        end
      end
      while (max_height() > 2) begin
        stage(plus, used);
        les += used; stages++;
      end
      final_add(got, used);
      les += used;
      checks++;
      if (got != longint'(exp_v)) begin
        failures++;
        $display("FAIL %s: got %0d expected %0d", name, got, exp_v);
      end
    end
    total_slice_gpc += n_slice_gpc;
    $display("%-10s %-8s LEs %4d  compression stages %0d  slice GPCs %0d  (%s)", name,
             plus ? "X-LUXOR+" : "X-LUXOR", les, stages, n_slice_gpc / vectors,
             paper_note);
  endtask

  initial begin
    clear_pool();
    run("S128", 0, 128, 4, 0, "published X-LUXOR: 79 LEs, 3 stages");
    run("S256", 0, 256, 4, 0, "published X-LUXOR: 159 LEs, 4 stages");
    run("S512", 0, 512, 3, 0, "published X-LUXOR: 319 LEs, 5 stages");
    run("D128", 1, 128, 4, 0, "published X-LUXOR: 156 LEs, 4 stages");
    run("D256", 1, 256, 3, 0, "published X-LUXOR: 315 LEs, 5 stages");
    run("D512", 1, 512, 2, 0, "published X-LUXOR: 631 LEs, 5 stages");
    run("S128", 0, 128, 4, 1, "published X-LUXOR+: 78 LEs, 3 stages");
    run("S256", 0, 256, 4, 1, "published X-LUXOR+: 154 LEs, 4 stages");
    run("S512", 0, 512, 3, 1, "published X-LUXOR+: 312 LEs, 4 stages");
    run("D128", 1, 128, 4, 1, "published X-LUXOR+: 150 LEs, 4 stages");
    run("D256", 1, 256, 3, 1, "published X-LUXOR+: 298 LEs, 4 stages");
    run("D512", 1, 512, 2, 1, "published X-LUXOR+: 586 LEs, 5 stages");
    run("BNN3x3x64",   2, 576,  3, 1, "first stage 192 fused LEs");
    run("BNN3x3x128",  2, 1152, 2, 1, "first stage 384 fused LEs");
    run("BNN3x3x256",  2, 2304, 2, 1, "first stage 768 fused LEs");
    run("BNN3x3x512",  2, 4608, 2, 1, "first stage 1536 fused LEs");
    run("BNN3x3x1024", 2, 9216, 2, 1, "first stage 3072 fused LEs");
    checks++;
    if (total_slice_gpc == 0) begin
      failures++;
      $display("FAIL: no X-LUXOR+ slice GPC was ever placed");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
