// tb_output_buffer: presents a random matrix of sub-decoder outputs C[i][j] on the groups'
// output pins in the interleaved order the groups use (step q, group g, pin q'*N/4 + m
// carries C[4g+q'][4m+q]), for both graphs, and checks the streamed rows against eq. (1):
// graph G puts C[i][j] at k = j*N + i, graph G_pi at k = i*N + j. The receiver drops
// out_ready at random; row order, out_last and busy must follow.
module tb_output_buffer;
  import gn_pkg::*;
  localparam int N    = NSUB;
  localparam int NG   = NSUB / CPG;
  localparam int COLS = N / CPG;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                 cap_valid = 0, cap_last = 0, out_ready = 0;
  logic [1:0]           cap_q;
  graph_e               graph;
  logic [N-1:0]         bus [NG];
  logic                 busy, out_valid, out_last;
  logic [N-1:0]         out_row;
  logic [$clog2(N)-1:0] out_idx;
  logic [N-1:0]         cm [N];
  int checks = 0, failures = 0;

  output_buffer #(.N(N), .NG(NG)) dut (.clk, .rst_n, .cap_valid_i(cap_valid), .cap_q_i(cap_q),
    .cap_last_i(cap_last), .graph_i(graph), .bus_i(bus), .busy_o(busy),
    .out_valid_o(out_valid), .out_ready_i(out_ready), .out_row_o(out_row),
    .out_idx_o(out_idx), .out_last_o(out_last));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int pkt = 0; pkt < 4; pkt++) begin
      int r, cyc;
      graph = graph_e'(pkt % 2);
      for (int i = 0; i < N; i++) cm[i] = {$urandom, $urandom, $urandom, $urandom};
      check(!busy, "idle before capture");
      for (int qq = 0; qq < CPG; qq++) begin
        cap_valid = 1;
        cap_q = 2'(qq);
        cap_last = (qq == CPG - 1);
        for (int g = 0; g < NG; g++)
          for (int qp = 0; qp < CPG; qp++)
            for (int m = 0; m < COLS; m++)
              bus[g][qp * COLS + m] = cm[CPG * g + qp][CPG * m + qq];
        @(negedge clk);
      end
      cap_valid = 0;
      cap_last = 0;
      r = 0;
      cyc = 0;
      while (r < N && cyc < 10 * N) begin
        out_ready = ($urandom_range(0, 3) != 0);
        #1;
        if (out_valid && out_ready) begin
          logic [N-1:0] expr;
          for (int c = 0; c < N; c++) expr[c] = (graph == GRAPH_G) ? cm[c][r] : cm[r][c];
          check(out_row == expr && int'(out_idx) == r, $sformatf("packet %0d row %0d", pkt, r));
          check(out_last == (r == N - 1), $sformatf("packet %0d last flag row %0d", pkt, r));
          r++;
        end
        @(negedge clk);
        cyc++;
      end
      out_ready = 0;
      check(r == N, $sformatf("packet %0d: %0d rows", pkt, r));
      check(!busy && !out_valid, "idle after last row");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
