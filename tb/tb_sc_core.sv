// tb_sc_core: self-checking test of the SC component decoder.
//
// Each trial picks a frozen set (Reed-Muller-like weight order at several rates, or random),
// loads LLRs through the shared PE adders (y plus a signed Delta), then either decodes or
// bypasses. Expected values come from a recursive reference decoder written here
// independently of the RTL's iterative tree walker: it applies the same node rules
// (Rate-0, Rate-1/REP/SPC up to 16 bits, 4-bit ML by correlation) and counts the nodes it
// ref_visits, so the test checks both the decoded codeword and the cycle count (2 per node).
// Noise-free trials must return the transmitted codeword.
module tb_sc_core;
  import gn_pkg::*;
  import gn_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [N-1:0] frozen;
  logic         ld_valid = 0, ld_beat = 0, start = 0, bypass = 0;
  llr_t         ld_y [N], ld_d [N];
  logic [N-1:0] ld_neg;
  logic [N-1:0] hard, chat;
  logic         busy;

  sc_core #(.N(N)) dut (
    .clk, .rst_n, .frozen_i(frozen),
    .ld_valid_i(ld_valid), .ld_beat_i(ld_beat), .ld_y_i(ld_y), .ld_d_i(ld_d), .ld_neg_i(ld_neg),
    .hard_o(hard), .start_i(start), .bypass_i(bypass), .busy_o(busy), .chat_o(chat));

  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int L[N];
    logic [N-1:0] u, x, expb;
    int cyc, nz;
    int ks[6] = '{111, 115, 119, 122, 64, 128};
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int trial = 0; trial < 120; trial++) begin
      if (trial % 8 == 7) frozen = {$urandom, $urandom, $urandom, $urandom};
      else                frozen = rm_frozen(ks[trial % 6]);
      u = {$urandom, $urandom, $urandom, $urandom} & ~frozen;
      x = encode(u);
      nz = (trial % 3 == 0) ? 0 : (trial % 3 == 1 ? 6 : 14);
      for (int j = 0; j < N; j++) begin
        int d, y;
        d = int'($urandom_range(0, LLR_MAX));
        y = (x[j] ? -8 : 8) + int'($urandom_range(0, 2 * nz)) - nz;
        ld_y[j]   = llr_t'(clamp(y));
        ld_d[j]   = (nz == 0) ? '0 : llr_t'(d);
        ld_neg[j] = $urandom_range(0, 1);
        L[j] = clamp(clamp(y) + (nz == 0 ? 0 : (ld_neg[j] ? -d : d)));
      end
      // two load beats
      ld_valid = 1; ld_beat = 0;
      @(negedge clk);
      ld_beat = 1;
      @(negedge clk);
      ld_valid = 0;
      begin
        logic [N-1:0] he;
        he = '0;
        for (int j = 0; j < N; j++) he[j] = L[j] < 0;
        check(hard == he, $sformatf("trial %0d hard decisions", trial));
      end
      if (trial % 10 == 9) begin
        bypass = 1;
        @(negedge clk);
        bypass = 0;
        check(chat == hard && !busy, $sformatf("trial %0d bypass", trial));
        continue;
      end
      ref_visits = 0;
      expb = ref_sc(L, frozen);
      start = 1;
      @(negedge clk);
      start = 0;
      cyc = 0;
      while (busy) begin
        cyc++;
        @(negedge clk);
      end
      check(chat == expb, $sformatf("trial %0d codeword vs reference", trial));
      check(cyc == 2 * ref_visits, $sformatf("trial %0d cycles %0d expected %0d", trial, cyc, 2 * ref_visits));
      if (nz == 0) check(chat == x, $sformatf("trial %0d noise-free codeword", trial));
      if (trial < 6) $display("K=%0d: %0d cycles", N - $countones(frozen), cyc);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
