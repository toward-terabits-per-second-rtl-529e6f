// tb_gn_coset_decoder: end-to-end test of the decoder at a reduced size: sub-codes of
// length NS = 64 (a 4096-bit code, 16 groups of 4 SC cores) instead of the default 128, which
// keeps the simulation model small enough to build in minutes. All mechanisms are the same.
//
// Codewords are drawn from a product code: every column is a codeword of a length-NS code
// with frozen set Fc (the sub-codes of graph G) and every row one of a code with frozen set
// Fr (graph G_pi), both Reed-Muller-like, at sub-code rates near the paper's 115/128 and
// 119/128 (57/64 and 59/64). Channel LLRs are +-A plus uniform noise, clamped.
//
// A reference model of the parallel decoding algorithm, written in this file on top of the
// reference SC decoder, predicts every iteration: input LLRs from the Type-1/Type-2 rule,
// error flags, SC decoding or hard decision, early termination, and the final index mapping.
// Each decoded row is compared with it; low-noise codewords must also come out error-free.
// The latency from the last input row to the first output row is checked against the schedule
// (11 cycles plus the slowest core's SC time per iteration, then 4 capture cycles) for every
// codeword that finds the output buffer empty. Input of a codeword overlaps
// the output of the previous one and the receiver applies back-pressure. The test counts the
// mechanisms it exercised and fails if one never happened.
module tb_gn_coset_decoder;
  import gn_pkg::*;
  import gn_ref_pkg::*;

  // Sub-code length of the simulated decoder (the design's default is NSUB = 128).
  localparam int NS   = 64;
  localparam int NPKT = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                 in_valid = 0, in_ready;
  llr_t                 in_llr [NS];
  logic [NS-1:0]         frozen_g [NS], frozen_pi [NS];
  llr_t                 coef_delta [TMAX], coef_theta [TMAX], coef_gamma [TMAX];
  logic [3:0]           tmax;
  logic                 early_en;
  logic                 out_valid, out_ready = 0, out_last;
  logic [NS-1:0]         out_bits;
  logic [$clog2(NS)-1:0] out_row;
  logic [3:0]           iters;
  logic                 early;

  gn_coset_decoder #(.N(NS)) dut (
    .clk, .rst_n, .in_valid_i(in_valid), .in_ready_o(in_ready), .in_llr_i(in_llr),
    .frozen_g_i(frozen_g), .frozen_pi_i(frozen_pi), .coef_delta_i(coef_delta),
    .coef_theta_i(coef_theta), .coef_gamma_i(coef_gamma), .tmax_i(tmax), .early_en_i(early_en),
    .out_valid_o(out_valid), .out_ready_i(out_ready), .out_bits_o(out_bits), .out_row_o(out_row),
    .out_last_o(out_last), .iters_o(iters), .early_o(early));

  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle++;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 12) $display("FAIL: %s", what);
    end
  endtask

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------- test vectors
  int           Y    [NS][NS];          // channel LLRs, k = r*NS + c
  logic [NS-1:0] X    [NS];             // transmitted codeword, rows
  logic [NS-1:0] expx [NPKT][NS];       // expected decoder output
  int           exp_iters [NPKT];
  bit           exp_early [NPKT];
  bit           must_match [NPKT];
  int           exp_lat [NPKT];
  longint       done_cycle [NPKT];
  longint       last_in_cycle [NPKT];
  // mechanism counters
  int n_type1 = 0, n_type2 = 0, n_early = 0, n_tmax = 0, n_graph_pi = 0, n_stall = 0,
      n_overlap = 0, n_in_gap = 0, n_lat = 0;

  // Product-code codeword: columns in the code of Fc, rows in the code of Fr.
  task automatic make_codeword(input logic [NS-1:0] fc, input logic [NS-1:0] fr, input int amp,
                               input int nz);
    logic [NS-1:0] R [NS];
    logic [NS-1:0] v, col;
    for (int r = 0; r < NS; r++) begin
      v = NS'({$urandom, $urandom, $urandom, $urandom}) & ~fr;
      R[r] = fc[r] ? '0 : NS'(encode(N'(v)));
    end
    for (int c = 0; c < NS; c++) begin
      for (int r = 0; r < NS; r++) v[r] = R[r][c];
      col = NS'(encode(N'(v)));
      for (int r = 0; r < NS; r++) X[r][c] = col[r];
    end
    for (int r = 0; r < NS; r++)
      for (int c = 0; c < NS; c++)
        Y[r][c] = clamp((X[r][c] ? -amp : amp) + int'($urandom_range(0, 2 * nz)) - nz);
  endtask

  // Reference model of the parallel decoding framework.
  task automatic reference(input int p, input int tm, input bit een,
                           input int dl [TMAX], input int th [TMAX], input int ga [TMAX],
                           output int lat);
    logic [NS-1:0] c1 [NS], c2 [NS], cn [NS];
    logic [NS-1:0] e1, en;
    int t, L[N], maxb;
    bit pi;
    lat = 0;
    for (int i = 0; i < NS; i++) begin
      c1[i] = '0;
      c2[i] = '0;
    end
    e1 = '0;
    t = 0;
    do begin
      t++;
      pi = (t % 2 == 0);
      if (pi) n_graph_pi++;
      maxb = 0;
      for (int i = 0; i < NS; i++) begin
        logic [NS-1:0] h;
        for (int j = 0; j < NS; j++) begin
          int yk, d;
          yk = pi ? Y[i][j] : Y[j][i];
          if (t == 1)     d = 0;
          else if (e1[j]) d = (c1[j][i] != (t >= 3 ? c2[i][j] : 1'b0)) ? dl[t-1] : th[t-1];
          else            d = ga[t-1];
          L[j] = clamp(yk + (c1[j][i] ? -d : d));
          h[j] = L[j] < 0;
        end
        en[i] = syndrome(N'(h), N'(pi ? frozen_pi[i] : frozen_g[i]));
        if (en[i]) begin
          ref_visits = 0;
          cn[i] = NS'(ref_sc(L, N'(pi ? frozen_pi[i] : frozen_g[i]), NS));
          if (2 * ref_visits > maxb) maxb = 2 * ref_visits;
          n_type1++;
        end else begin
          cn[i] = h;
          n_type2++;
        end
      end
      lat += 11 + maxb;
      for (int i = 0; i < NS; i++) begin
        c2[i] = c1[i];
        c1[i] = cn[i];
      end
      e1 = en;
    end while (t < tm && !(een && en == '0));
    exp_iters[p] = t;
    exp_early[p] = (t < tm);
    if (t < tm) n_early++;
    else        n_tmax++;
    for (int r = 0; r < NS; r++)
      for (int c = 0; c < NS; c++) expx[p][r][c] = pi ? c1[r][c] : c1[c][r];
    lat += CPG;
  endtask

  // ---------------------------------------------------------------- stimulus
  int p_tmax [NPKT] = '{8, 5, 8, 4};
  bit p_early [NPKT] = '{1, 0, 1, 1};
  int p_k [NPKT] = '{NS * 115 / 128, NS * 115 / 128, NS * 119 / 128, NS * 119 / 128};
  int p_nz [NPKT] = '{2, 14, 15, 4};

  initial begin
    int dl [TMAX], th [TMAX], ga [TMAX];
    // damping factors: alpha = 2..3, beta = 1 (0 at t = 2), gamma = 4..5
    for (int t = 0; t < TMAX; t++) begin
      int al, be;
      al = (t < 3) ? 2 : 3;
      be = (t == 1) ? 0 : 1;
      dl[t] = al + be;
      th[t] = al - be;
      ga[t] = (t < 3) ? 4 : 5;
      coef_delta[t] = llr_t'(dl[t]);
      coef_theta[t] = llr_t'(th[t]);
      coef_gamma[t] = llr_t'(ga[t]);
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int p = 0; p < NPKT; p++) begin
      int lat;
      for (int i = 0; i < NS; i++) begin
        frozen_g[i]  = NS'(rm_frozen(p_k[p], NS));
        frozen_pi[i] = NS'(rm_frozen(p_k[p], NS));
      end
      make_codeword(frozen_g[0], frozen_pi[0], 7, p_nz[p]);
      reference(p, p_tmax[p], p_early[p], dl, th, ga, lat);
      exp_lat[p] = lat;
      must_match[p] = (p_nz[p] < 7);
      for (int r = 0; r < NS; r++)
        if (must_match[p]) check(expx[p][r] == X[r], $sformatf("reference decodes codeword %0d", p));
      $display("codeword %0d: K=%0d, %0d iteration(s)%s, reference latency %0d cycles",
               p, p_k[p] * p_k[p], exp_iters[p], exp_early[p] ? " (early stop)" : "", lat);
      // configuration is static while a codeword is inside the decoder
      while (!in_ready) @(negedge clk);
      tmax = 4'(p_tmax[p]);
      early_en = p_early[p];
      if (out_valid) n_overlap++;
      for (int r = 0; r < NS; r++) begin
        if (r % 37 == 5) begin
          in_valid = 0;
          n_in_gap++;
          @(negedge clk);
        end
        in_valid = 1;
        for (int c = 0; c < NS; c++) in_llr[c] = llr_t'(Y[r][c]);
        #1;
        check(in_ready, "input accepted");
        @(negedge clk);
      end
      in_valid = 0;
      last_in_cycle[p] = cycle;
      // wait until this codeword has left the input stage before touching the configuration
      while (in_ready) @(negedge clk);
      while (!in_ready) @(negedge clk);
    end
  end

  // ---------------------------------------------------------------- output checker
  initial begin
    for (int p = 0; p < NPKT; p++) begin
      int r, bad;
      bit seen;
      r = 0;
      bad = 0;
      seen = 0;
      while (r < NS) begin
        out_ready = (p == 0) ? 1'b1 : ($urandom_range(0, 3) != 0);
        #1;
        if (out_valid && !out_ready) n_stall++;
        // latency from the last input row to the first valid output row, checked when the
        // output buffer was already empty so that only the decoder's own schedule counts
        if (out_valid && !seen) begin
          seen = 1;
          if (p == 0 || done_cycle[p-1] + CPG + 2 < last_in_cycle[p] + exp_lat[p]) begin
            n_lat++;
            check(cycle - last_in_cycle[p] == longint'(exp_lat[p]),
                  $sformatf("codeword %0d latency %0d, expected %0d", p, cycle - last_in_cycle[p], exp_lat[p]));
          end
        end
        if (out_valid && out_ready) begin
          if (r == 0)
            check(int'(iters) == exp_iters[p] && early == exp_early[p],
                  $sformatf("codeword %0d status: %0d iterations, early %0d", p, iters, early));
          if (out_bits != expx[p][r] || int'(out_row) != r || out_last != (r == NS - 1)) bad++;
          r++;
        end
        @(negedge clk);
      end
      out_ready = 0;
      done_cycle[p] = cycle;
      check(bad == 0, $sformatf("codeword %0d: %0d bad rows", p, bad));
      $display("codeword %0d out at cycle %0d", p, cycle);
    end
    check(n_type1 > 0,    "Type-1 sub-codes (SC decoding) occurred");
    check(n_type2 > 0,    "Type-2 sub-codes (bypass) occurred");
    check(n_early > 0,    "early termination occurred");
    check(n_tmax > 0,     "iteration limit reached");
    check(n_graph_pi > 0, "graph G_pi decoded");
    check(n_stall > 0,    "output back-pressure occurred");
    check(n_overlap > 0,  "input overlapped output");
    check(n_in_gap > 0,   "input gaps occurred");
    check(n_lat > 1,      "latency checked on more than one codeword");
    $display("mechanisms: type1=%0d type2=%0d early=%0d tmax=%0d graph_pi=%0d stall=%0d overlap=%0d in_gap=%0d latency_checked=%0d",
             n_type1, n_type2, n_early, n_tmax, n_graph_pi, n_stall, n_overlap, n_in_gap, n_lat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
