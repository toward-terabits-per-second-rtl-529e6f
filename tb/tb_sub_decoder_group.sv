// tb_sub_decoder_group: one group of four SC cores driven through three iterations by a
// testbench model of the controller and of the other 31 groups (random routed bits c^{t-1}
// and error flags). The expected input LLRs follow the Type-1/Type-2 formulas with the
// group's own c^{t-2} (none before iteration 3); expected error flags come from the syndrome
// check, expected outputs from the reference SC decoder (Type-1) or hard decisions (Type-2).
// Outputs are read back through the shared, column-interleaved output pins. The busy time must
// equal that of the slowest decoding core (2 cycles per visited node).
module tb_sub_decoder_group;
  import gn_pkg::*;
  import gn_ref_pkg::*;
  localparam int COLS = N / CPG;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic           ld_valid = 0, ld_beat = 0, first = 0, det_valid = 0, dec_start = 0;
  logic [1:0]     ld_q = 0, det_q = 0;
  llr_t           delta, theta, gamma;
  llr_t           y [N];
  logic [N-1:0]   cin, e_all;
  logic [N-1:0]   frozen [CPG];
  logic [N-1:0]   cout;
  logic [CPG-1:0] e_o;
  logic           busy;
  int checks = 0, failures = 0;

  sub_decoder_group #(.N(N)) dut (.clk, .rst_n, .ld_valid_i(ld_valid), .ld_q_i(ld_q),
    .ld_beat_i(ld_beat), .first_i(first), .det_valid_i(det_valid), .det_q_i(det_q),
    .dec_start_i(dec_start), .delta_i(delta), .theta_i(theta), .gamma_i(gamma), .y_i(y),
    .cin_i(cin), .e_all_i(e_all), .frozen_i(frozen), .cout_o(cout), .e_o(e_o), .busy_o(busy));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  initial begin : watchdog
    #5000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int           ych  [CPG][N];
  logic [N-1:0] cin_t [CPG], chat_m [CPG], c2_m [CPG], exp_c [CPG];
  logic [CPG-1:0] exp_e;
  int           Lm   [CPG][N];
  int           type1_runs = 0, type2_runs = 0;

  initial begin
    int maxv, busy_cyc;
    for (int q = 0; q < CPG; q++) begin
      logic [N-1:0] msg, x;
      int nz;
      frozen[q] = rm_frozen(q % 2 ? 115 : 119);
      msg = {$urandom, $urandom, $urandom, $urandom} & ~frozen[q];
      x = encode(msg);
      nz = (q == 0) ? 0 : 9 + q;
      for (int j = 0; j < N; j++) ych[q][j] = clamp((x[j] ? -7 : 7) + int'($urandom_range(0, 2 * nz)) - nz);
      chat_m[q] = '0;
      c2_m[q] = '0;
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int t = 1; t <= 3; t++) begin
      int al, be, ga;
      al = 3; be = (t == 2) ? 0 : 1; ga = 5;
      delta = llr_t'(al + be);
      theta = llr_t'(al - be);
      gamma = llr_t'(ga);
      first = (t == 1);
      e_all = {$urandom, $urandom, $urandom, $urandom};
      for (int q = 0; q < CPG; q++) begin
        cin_t[q] = {$urandom, $urandom, $urandom, $urandom};
        for (int j = 0; j < N; j++) begin
          int dlt;
          if (t == 1)        dlt = 0;
          else if (e_all[j]) dlt = al * (1 - 2 * cin_t[q][j]) - be * (1 - 2 * c2_m[q][j]);
          else               dlt = ga * (1 - 2 * cin_t[q][j]);
          Lm[q][j] = clamp(ych[q][j] + dlt);
        end
      end
      // ten-step load/detect/start sequence
      for (int k = 0; k < 10; k++) begin
        ld_valid = (k < 8);
        ld_q = 2'(k / 2);
        ld_beat = k[0];
        det_valid = (k >= 2 && k <= 8 && k % 2 == 0);
        det_q = 2'((k - 2) / 2);
        dec_start = (k == 9);
        for (int j = 0; j < N; j++) y[j] = llr_t'(ych[k / 2 < CPG ? k / 2 : 0][j]);
        cin = cin_t[k / 2 < CPG ? k / 2 : 0];
        @(negedge clk);
      end
      ld_valid = 0; det_valid = 0; dec_start = 0;
      // expected results
      maxv = 0;
      for (int q = 0; q < CPG; q++) begin
        int Lq[N];
        logic [N-1:0] h;
        for (int j = 0; j < N; j++) begin
          Lq[j] = Lm[q][j];
          h[j] = Lq[j] < 0;
        end
        c2_m[q] = (t == 1) ? '0 : chat_m[q];
        exp_e[q] = syndrome(h, frozen[q]);
        if (exp_e[q]) begin
          ref_visits = 0;
          exp_c[q] = ref_sc(Lq, frozen[q]);
          if (2 * ref_visits > maxv) maxv = 2 * ref_visits;
          type1_runs++;
        end else begin
          exp_c[q] = h;
          type2_runs++;
        end
        chat_m[q] = exp_c[q];
      end
      check(e_o == exp_e, $sformatf("t%0d error flags %b expected %b", t, e_o, exp_e));
      busy_cyc = 0;
      while (busy) begin
        busy_cyc++;
        @(negedge clk);
      end
      check(busy_cyc == maxv, $sformatf("t%0d busy %0d cycles, expected %0d", t, busy_cyc, maxv));
      // read back over the shared pins
      for (int qq = 0; qq < CPG; qq++) begin
        ld_q = 2'(qq);
        #1;
        for (int qp = 0; qp < CPG; qp++) begin
          logic ok;
          ok = 1;
          for (int m = 0; m < COLS; m++)
            if (cout[qp * COLS + m] != exp_c[qp][CPG * m + qq]) ok = 0;
          check(ok, $sformatf("t%0d core %0d outputs, columns %0d mod 4", t, qp, qq));
        end
      end
      @(negedge clk);
    end
    check(type1_runs > 0 && type2_runs > 0, "both Type-1 and Type-2 sub-codes occurred");
    $display("Type-1 (SC decoded) %0d, Type-2 (bypassed) %0d", type1_runs, type2_runs);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
