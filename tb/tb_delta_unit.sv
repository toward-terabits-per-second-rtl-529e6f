// tb_delta_unit: checks the damping-factor selection of the LLR generator.
// For random hard outputs, error flags and coefficients, the expected term is computed from
// the unsimplified Type-1/Type-2 formulas, alpha(1-2a) - beta(1-2b) and gamma(1-2a), with
// delta = alpha+beta and theta = alpha-beta, and compared with the unit's
// (neg ? -d : d). The first iteration must give zero.
module tb_delta_unit;
  import gn_pkg::*;
  localparam int N = NSUB;

  logic [N-1:0] c1, c2, e, neg;
  llr_t         delta, theta, gamma;
  logic         first;
  llr_t         d [N];
  int checks = 0, failures = 0;

  delta_unit #(.N(N)) dut (.c1_i(c1), .c2_i(c2), .e_i(e), .delta_i(delta), .theta_i(theta),
                           .gamma_i(gamma), .first_i(first), .d_o(d), .neg_o(neg));

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int alpha, beta, gam, expv, got;
    for (int t = 0; t < 200; t++) begin
      alpha = $urandom_range(0, 7);
      beta  = $urandom_range(0, alpha);
      gam   = $urandom_range(0, 15);
      delta = llr_t'(alpha + beta);
      theta = llr_t'(alpha - beta);
      gamma = llr_t'(gam);
      c1 = {$urandom, $urandom, $urandom, $urandom};
      c2 = {$urandom, $urandom, $urandom, $urandom};
      e  = {$urandom, $urandom, $urandom, $urandom};
      first = (t % 10 == 0);
      #1;
      for (int j = 0; j < N; j++) begin
        if (first)     expv = 0;
        else if (e[j]) expv = alpha * (1 - 2 * c1[j]) - beta * (1 - 2 * c2[j]);
        else           expv = gam * (1 - 2 * c1[j]);
        got = neg[j] ? -int'(d[j]) : int'(d[j]);
        checks++;
        if (got != expv) begin
          failures++;
          if (failures < 10) $display("FAIL: t=%0d j=%0d got %0d expected %0d", t, j, got, expv);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
