// chan_llr_store: channel-LLR storage of the whole length N*N codeword.
//
// What it does. Holds the received LLRs y_k, k = r*N + c, as an N x N array Y[r][c], written
// one row of N LLRs per cycle. In every load step it serves each sub-decoder group the N LLRs
// of the sub-code it is loading: sub-decoder i reads column i (Y[j][i], k = j*N + i) when the
// iteration decodes graph G and row i (Y[i][j], k = i*N + j) when it decodes graph G_pi.
//
// How it works. A register array with NG read ports; port g serves sub-decoder CPG*g + q_i,
// q_i being the load step shared by all groups. Written LLRs are clamped to the symmetric
// range used everywhere else.
//
// Interface and timing. wr_en_i writes wr_data_i into row wr_row_i at the clock edge; the
// read ports are combinational. The storage and the row/column addressing of eq. (1) follow
// the paper; the row-wise write port and register implementation are this design's choice.
module chan_llr_store
  import gn_pkg::*;
#(
  parameter int unsigned N  = NSUB,
  parameter int unsigned NG = NSUB / CPG
) (
  input  logic                 clk,
  input  logic                 wr_en_i,
  input  logic [$clog2(N)-1:0] wr_row_i,
  input  llr_t                 wr_data_i [N],
  input  graph_e               graph_i,
  input  logic [1:0]           q_i,
  output llr_t                 y_o [NG][N]
);
  llr_t mem [N][N];

  always_ff @(posedge clk)
    if (wr_en_i)
      for (int c = 0; c < N; c++)
        mem[wr_row_i][c] <= sat({{8{wr_data_i[c][QW-1]}}, wr_data_i[c]});

  always_comb
    for (int g = 0; g < NG; g++)
      for (int j = 0; j < N; j++)
        if (graph_i == GRAPH_G) y_o[g][j] = mem[j][CPG * g + 32'(q_i)];
        else                    y_o[g][j] = mem[CPG * g + 32'(q_i)][j];
endmodule
