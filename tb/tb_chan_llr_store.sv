// tb_chan_llr_store: writes a random N x N LLR array row by row (values include -2^(QW-1),
// which must be clamped) and reads it back through all NG ports for every load step and both
// graphs: graph G must give column 4g+q, graph G_pi row 4g+q.
module tb_chan_llr_store;
  import gn_pkg::*;
  localparam int N  = NSUB;
  localparam int NG = NSUB / CPG;

  logic clk = 0;
  always #5 clk = ~clk;

  logic                 wr_en = 0;
  logic [$clog2(N)-1:0] wr_row;
  llr_t                 wr_data [N];
  graph_e               graph;
  logic [1:0]           q;
  llr_t                 y [NG][N];
  int                   model [N][N];
  int checks = 0, failures = 0;

  chan_llr_store #(.N(N), .NG(NG)) dut (.clk, .wr_en_i(wr_en), .wr_row_i(wr_row),
    .wr_data_i(wr_data), .graph_i(graph), .q_i(q), .y_o(y));

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    @(negedge clk);
    for (int r = 0; r < N; r++) begin
      wr_en = 1;
      wr_row = 7'(r);
      for (int c = 0; c < N; c++) begin
        int v;
        v = int'($urandom_range(0, 31)) - 16;
        wr_data[c] = llr_t'(v);
        model[r][c] = v < -LLR_MAX ? -LLR_MAX : v;
      end
      @(negedge clk);
    end
    wr_en = 0;
    for (int gr = 0; gr < 2; gr++)
      for (int qq = 0; qq < CPG; qq++) begin
        graph = graph_e'(gr);
        q = 2'(qq);
        #1;
        for (int g = 0; g < NG; g++) begin
          int i, bad;
          i = CPG * g + qq;
          bad = 0;
          for (int j = 0; j < N; j++)
            if (int'(y[g][j]) != (gr == 0 ? model[j][i] : model[i][j])) bad++;
          checks++;
          if (bad != 0) begin
            failures++;
            if (failures < 10) $display("FAIL: graph %0d q %0d group %0d: %0d wrong", gr, qq, g, bad);
          end
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
