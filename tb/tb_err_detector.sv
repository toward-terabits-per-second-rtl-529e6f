// tb_err_detector: checks the syndrome check against the matrix definition of G_N.
// Random hard-decision vectors and random or Reed-Muller-like frozen sets are applied; u_o must
// equal c * G_N computed bit by bit, and err_o must be set exactly when a frozen u bit is 1.
// Valid codewords (u zero on the frozen set) must pass.
module tb_err_detector;
  import gn_pkg::*;
  import gn_ref_pkg::*;

  logic [N-1:0] hard, frozen, u;
  logic         err;
  int checks = 0, failures = 0;

  err_detector #(.N(N)) dut (.hard_i(hard), .frozen_i(frozen), .u_o(u), .err_o(err));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [N-1:0] uref, msg;
    for (int t = 0; t < 300; t++) begin
      frozen = (t % 2) ? rm_frozen(100 + t % 28) : {$urandom, $urandom, $urandom, $urandom};
      if (t % 3 == 0) begin
        msg  = {$urandom, $urandom, $urandom, $urandom} & ~frozen;
        hard = encode(msg);
      end else begin
        hard = {$urandom, $urandom, $urandom, $urandom};
      end
      #1;
      uref = encode(hard);
      check(u == uref, $sformatf("vector %0d: u", t));
      check(err == ((uref & frozen) != '0), $sformatf("vector %0d: err", t));
      if (t % 3 == 0) check(!err, $sformatf("vector %0d: codeword flagged", t));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
