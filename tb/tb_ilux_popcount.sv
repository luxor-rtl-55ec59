// tb_ilux_popcount -- compressor-tree workloads on a pool of LUXOR ALMs.
//
// Runs the popcount (S128..S512) and two-column popcount (D128..D512)
// micro-benchmarks through real I-LUXOR+ ALMs. A pool of 40 LABs (400
// ALMs, carry chained LAB to LAB) is instantiated; the testbench acts as
// the routing and reuses the pool once per tree stage, so the ALM count
// of a tree is the sum over its stages. Every benchmark is built twice:
//   I-LUXOR  -- C6:111 in two ALMs (XOR6 + LUT6) per six bits of a
//               column, C3:11 in one ALM for a leftover of three to five;
//   I-LUXOR+ -- C25:121 in one ALM: up to five bits of a column and, when
//               five are taken, up to two bits of the next column
//               (two LUT-5s for the low column, the MajFA for the rest).
//               Outputs that are constant zero for the bits placed are
//               not routed on.
// These are simple greedy reductions, not the optimal ILP mapping. When
// every column holds at most two bits, the two rows are added on the
// ALM carry chain (two bits per ALM, one more ALM for the carry out). The
// result must equal the count; the ALM and stage totals are printed.
module tb_ilux_popcount;
  import luxor_pkg::*;
  import luxor_maps_pkg::*;

  localparam int NLAB = 40;
  localparam int NA   = 10;
  localparam int NALM = NLAB * NA;
  localparam int NCOL = 16;
  localparam int MAXB = 1024;

  logic clk = 1'b0;
  logic ce = 1'b1, sr = 1'b0;
  alm_cfg_t [NA-1:0]      cfg  [NLAB];
  logic [NA-1:0][7:0]     pins [NLAB];   // {F, E, D1, C1, D0, C0, B, A}
  logic [NA-1:0][3:0]     o    [NLAB];
  logic [NLAB:0]          chain;

  assign chain[0] = 1'b0;
  for (genvar l = 0; l < NLAB; l++) begin : g_pool
    ilux_lab u_lab (.clk, .ce, .sr, .cfg(cfg[l]), .pins(pins[l]),
                    .cin(chain[l]), .o(o[l]), .cout(chain[l+1]));
  end

  int checks = 0, failures = 0;

  bit cb [NCOL][MAXB];
  int h  [NCOL];
  // outputs of the current stage: ALM, output index, column
  int out_alm[4 * NALM];
  int out_k  [4 * NALM];
  int out_col[4 * NALM];
  int n_out;

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic clear_pool();
    for (int l = 0; l < NLAB; l++) begin
      for (int k = 0; k < NA; k++) cfg[l][k] = alm_base();
      pins[l] = '0;
    end
  endtask

  task automatic set_alm(input int g, input alm_cfg_t c, input logic [7:0] p);
    cfg[g / NA][g % NA]  = c;
    pins[g / NA][g % NA] = p;
  endtask

  task automatic add_out(input int g, input int k, input int col);
    out_alm[n_out] = g; out_k[n_out] = k; out_col[n_out] = col;
    n_out++;
  endtask

  function automatic int max_height();
    int m = 0;
    for (int c = 0; c < NCOL; c++) if (h[c] > m) m = h[c];
    return m;
  endfunction

  // one reduction stage; returns the number of ALMs used
  task automatic stage(input bit plus, output int used);
    bit nb [NCOL][MAXB];
    int nh [NCOL];
    int idx [NCOL];
    int lo, hi, m;
    logic [7:0] p;
    logic [5:0] six;
    used = 0; n_out = 0;
    clear_pool();
    for (int c = 0; c < NCOL; c++) begin nh[c] = 0; idx[c] = 0; end
    for (int c = 0; c < NCOL; c++) begin
      if (plus) begin
        while (h[c] - idx[c] >= 3) begin
          lo = (h[c] - idx[c] > 5) ? 5 : h[c] - idx[c];
          hi = 0;
          if (lo == 5 && c + 1 < NCOL)
            hi = (h[c+1] - idx[c+1] > 2) ? 2 : h[c+1] - idx[c+1];
          // low bits on A, B, C0, D0, E; high bits on C1, D1
          p = '0;
          if (lo > 0) p[0] = cb[c][idx[c]];
          if (lo > 1) p[1] = cb[c][idx[c] + 1];
          if (lo > 2) p[2] = cb[c][idx[c] + 2];
          if (lo > 3) p[3] = cb[c][idx[c] + 3];
          if (lo > 4) p[6] = cb[c][idx[c] + 4];
          if (hi > 0) p[4] = cb[c+1][idx[c+1]];
          if (hi > 1) p[5] = cb[c+1][idx[c+1] + 1];
          set_alm(used, alm_c25(), p);
          m = ((lo >= 4) ? 1 : 0) + hi;     // largest MajFA sum
          add_out(used, 1, c);
          if (lo >= 2) add_out(used, 2, c + 1);
          if (m >= 1)  add_out(used, 0, c + 1);
          if (m >= 2)  add_out(used, 3, c + 2);
          used += 1; idx[c] += lo; idx[c+1] += hi;
        end
      end else begin
        while (h[c] - idx[c] >= 6) begin
          for (int j = 0; j < 6; j++) six[j] = cb[c][idx[c] + j];
          p = {six[5:4], 2'b00, six[3:0]};
          set_alm(used, alm_c6_bit(1), p);
          set_alm(used + 1, alm_c6_bit(2), p);
          add_out(used, 0, c); add_out(used, 1, c + 1); add_out(used + 1, 1, c + 2);
          used += 2; idx[c] += 6;
        end
        if (h[c] - idx[c] >= 3) begin
          p = {5'b00000, cb[c][idx[c] + 2], cb[c][idx[c] + 1], cb[c][idx[c]]};
          set_alm(used, alm_c6_bit(1), p);
          add_out(used, 0, c); add_out(used, 1, c + 1);
          used += 1; idx[c] += 3;
        end
      end
      while (idx[c] < h[c]) begin
        nb[c][nh[c]] = cb[c][idx[c]]; nh[c]++; idx[c]++;
      end
    end
    if (used > NALM) $fatal(1, "ALM pool too small");
    #1;
    for (int k = 0; k < n_out; k++) begin
      nb[out_col[k]][nh[out_col[k]]] = o[out_alm[k] / NA][out_alm[k] % NA][out_k[k]];
      nh[out_col[k]]++;
    end
    for (int c = 0; c < NCOL; c++) begin
      h[c] = nh[c];
      for (int j = 0; j < nh[c]; j++) cb[c][j] = nb[c][j];
    end
  endtask

  // final two-row addition on the carry chain; returns value and ALMs
  task automatic final_add(output longint value, output int used);
    int w = 0;
    logic [7:0] p;
    logic x0, y0, x1, y1;
    clear_pool();
    for (int c = 0; c < NCOL; c++) if (h[c] > 0) w = c + 1;
    used = (w + 2) / 2;                  // one extra bit position for the carry
    for (int g = 0; g < used; g++) begin
      x0 = (2 * g < w && h[2 * g] > 0)         ? cb[2 * g][0]     : 1'b0;
      y0 = (2 * g < w && h[2 * g] > 1)         ? cb[2 * g][1]     : 1'b0;
      x1 = (2 * g + 1 < w && h[2 * g + 1] > 0) ? cb[2 * g + 1][0] : 1'b0;
      y1 = (2 * g + 1 < w && h[2 * g + 1] > 1) ? cb[2 * g + 1][1] : 1'b0;
      p = '0;
      p[0] = x0; p[1] = y0; p[4] = x1; p[5] = y1;
      set_alm(g, alm_add2(), p);
    end
    #1;
    value = 0;
    for (int g = 0; g < used; g++)
      value += (longint'(o[g / NA][g % NA][0]) << (2 * g))
             + (longint'(o[g / NA][g % NA][2]) << (2 * g + 1));
  endtask

  // kind 0: popcount of n bits; 1: two-column popcount, n bits per column
  task automatic run(input string name, input int kind, input int n,
                     input int vectors, input bit plus);
    int alms, stages, used, exp_v;
    longint got;
    for (int v = 0; v < vectors; v++) begin
      alms = 0; stages = 0; exp_v = 0;
      for (int c = 0; c < NCOL; c++) h[c] = 0;
      for (int col = 0; col <= kind; col++) begin
        for (int j = 0; j < n; j++) begin
          cb[col][j] = (v == 0) ? 1'b1 : 1'($urandom);
          exp_v += int'(cb[col][j]) << col;
        end
        h[col] = n;
      end
      while (max_height() > 2) begin
        stage(plus, used);
        alms += used; stages++;
      end
      final_add(got, used);
      alms += used;
      checks++;
      if (got != longint'(exp_v)) begin
        failures++;
        $display("FAIL %s %s: got %0d expected %0d", name,
                 plus ? "I-LUXOR+" : "I-LUXOR", got, exp_v);
      end
    end
    $display("%-5s %-8s ALMs %4d  compression stages %0d", name,
             plus ? "I-LUXOR+" : "I-LUXOR", alms, stages);
  endtask

  initial begin
    clear_pool();
    for (int pl = 0; pl < 2; pl++) begin
      run("S128", 0, 128, 4, 1'(pl));
      run("S256", 0, 256, 3, 1'(pl));
      run("S512", 0, 512, 2, 1'(pl));
      run("D128", 1, 128, 3, 1'(pl));
      run("D256", 1, 256, 2, 1'(pl));
      run("D512", 1, 512, 2, 1'(pl));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
