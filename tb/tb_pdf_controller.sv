// tb_pdf_controller: drives the iteration controller with a model of the datapath and checks
// its schedule cycle by cycle. Per codeword: 128 input rows (with idle gaps) must be written
// to rows 0..127; each iteration must issue load beats (q = k/2, beat = k%2) in cycles 0..7,
// detection of core (k-2)/2 in cycles 2,4,6,8 and dec_start in cycle 9, with graph G on odd
// and G_pi on even iterations; the next iteration must begin in the cycle after the one in
// which the cores are seen idle. Iterations must end at tmax or, with early termination on, at the first
// iteration without errors. Capture must wait for the output buffer and then take 4 steps.
module tb_pdf_controller;
  import gn_pkg::*;
  localparam int N = NSUB;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid = 0, in_ready, wr_en, early_en = 0, busy = 0, e_any = 1, ob_busy = 0;
  logic [$clog2(N)-1:0] wr_row;
  logic [3:0] tmax, iter, iters;
  logic ld_valid, ld_beat, det_valid, dec_start, first, cap_valid, cap_last, early;
  logic [1:0] ld_q, det_q;
  graph_e graph;
  int checks = 0, failures = 0;

  pdf_controller #(.N(N)) dut (.clk, .rst_n, .in_valid_i(in_valid), .in_ready_o(in_ready),
    .wr_en_o(wr_en), .wr_row_o(wr_row), .tmax_i(tmax), .early_en_i(early_en), .busy_i(busy),
    .e_any_i(e_any), .ob_busy_i(ob_busy), .ld_valid_o(ld_valid), .ld_q_o(ld_q),
    .ld_beat_o(ld_beat), .det_valid_o(det_valid), .det_q_o(det_q), .dec_start_o(dec_start),
    .first_o(first), .graph_o(graph), .iter_o(iter), .cap_valid_o(cap_valid),
    .cap_last_o(cap_last), .iters_o(iters), .early_o(early));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  initial begin : watchdog
    #2000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // one codeword; clean_at = first iteration that reports no error (0 = never)
  task automatic run(input int tm, input bit early_on, input int clean_at, input int exp_iters);
    int rows, gap;
    tmax = 4'(tm);
    early_en = early_on;
    rows = 0;
    while (rows < N) begin
      in_valid = ($urandom_range(0, 4) != 0);
      #1;
      check(in_ready, "in_ready while storing");
      if (in_valid) begin
        check(wr_en && int'(wr_row) == rows, $sformatf("row %0d written", rows));
        rows++;
      end
      @(negedge clk);
    end
    in_valid = 0;
    for (int t = 1; t <= exp_iters; t++) begin
      int k, wait_c;
      wait_c = 0;
      while (!ld_valid && wait_c < 10) begin
        @(negedge clk);
        wait_c++;
      end
      check(wait_c == (t == 1 ? 0 : 1) && !in_ready, $sformatf("iteration %0d starts after %0d", t, wait_c));
      for (k = 0; k < 10; k++) begin
        check(ld_valid == (k < 8) && (k >= 8 || (ld_q == 2'(k / 2) && ld_beat == k[0])),
              $sformatf("t%0d k%0d load step", t, k));
        check(det_valid == (k >= 2 && k <= 8 && k % 2 == 0) && (!det_valid || det_q == 2'((k - 2) / 2)),
              $sformatf("t%0d k%0d detect step", t, k));
        check(dec_start == (k == 9), $sformatf("t%0d k%0d dec_start", t, k));
        check(first == (t == 1) && graph == (t % 2 ? GRAPH_G : GRAPH_PI) && int'(iter) == t,
              $sformatf("t%0d graph/first/iter", t));
        @(negedge clk);
      end
      // datapath model: cores busy for a random time, error flags per scenario
      e_any = !(clean_at != 0 && t >= clean_at);
      gap = $urandom_range(0, 40);
      for (int c = 0; c < gap; c++) begin
        busy = 1;
        @(negedge clk);
        check(!ld_valid && !cap_valid && !dec_start, "idle while cores busy");
      end
      busy = 0;
    end
    // capture, with the output buffer still busy for a while
    ob_busy = 1;
    repeat (3) begin
      @(negedge clk);
      check(!cap_valid && !ld_valid, "no capture while output buffer busy");
    end
    ob_busy = 0;
    #1;
    for (int qq = 0; qq < CPG; qq++) begin
      check(cap_valid && ld_q == 2'(qq) && cap_last == (qq == CPG - 1), $sformatf("capture step %0d", qq));
      @(negedge clk);
    end
    check(!cap_valid && in_ready, "back to input");
    check(int'(iters) == exp_iters && early == (exp_iters < tm),
          $sformatf("status iters %0d early %0d", iters, early));
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    run(5, 0, 2, 5);   // early termination off: all five iterations
    run(8, 1, 3, 3);   // early termination at iteration 3
    run(3, 1, 0, 3);   // never clean: stops at tmax
    run(8, 0, 0, 8);   // maximum iterations
    run(1, 1, 0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
