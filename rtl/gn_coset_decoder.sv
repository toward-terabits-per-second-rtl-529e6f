// gn_coset_decoder: parallel decoder (PDF-SC) for G_N-coset codes of length N = NSUB^2.
//
// What it does. Decodes one codeword of length N = 16384 from its channel LLRs. The code is
// viewed as NSUB = 128 inner sub-codes of length 128 in two ways (graph G: sub-code i holds
// code bits k = j*128 + i; graph G_pi: k = i*128 + j). Iterations alternate between the two
// graphs; in each, all 128 sub-codes are decoded in parallel by SC cores, and the input LLRs
// of iteration t are the channel LLRs plus a damping term built from the hard outputs of
// iteration t-1 (alternate graph) and t-2 (same graph) and the error flags of iteration t-1.
//
// How it works. Blocks:
//   chan_llr_store     channel LLRs, read by row or column depending on the graph;
//   pdf_controller     iteration FSM, lock-step control of all groups;
//   sub_decoder_group  x32, four SC cores each sharing pins, Delta unit and error detector;
//   output_buffer      final codeword, streamed out row by row.
// The interleaved connection routing between the groups lives here and is wiring only: in
// load step q, sub-decoder i = 4g+q needs bit i of every sub-decoder's output, and group g'
// presents bits 4m+q (m = 0..31) of its four cores q' on its pins, so the bit for
// sub-decoder j = 4g'+q' is cin[g][j] = cout[g'][q'*32 + g]. The error flags of all 128
// sub-decoders are broadcast to every group. Frozen sets of both graphs are inputs; each
// group receives those of its cores for the graph of the current iteration.
//
// Interface and timing. in_valid_i/in_ready_o: one row of N LLRs per cycle, row r holding
// y_k for k = r*NSUB .. r*NSUB+NSUB-1, NSUB rows per codeword. Damping factors per iteration
// (delta = alpha+beta, theta = alpha-beta, gamma) are inputs, index t-1; iteration 1 uses
// the channel LLRs alone, and since no t-2 output exists at t = 2 the factors for t = 2 should
// have delta = theta. tmax_i (1..8) limits the iterations, early_en_i enables early
// termination when all sub-codes pass their check. out_valid_o/out_ready_i: NSUB rows of
// NSUB decoded code bits in the same order as the input. Per-codeword latency is NSUB input
// cycles + per iteration (11 + SC cycles of the slowest core) + 4 capture cycles + NSUB
// output cycles; input of the next codeword overlaps the output of the previous one.
//
// Sizes, the graph alternation, the Lgen rule, core sharing and early termination follow the
// paper; the interfaces, schedule and anything not named above are this design's choices.
module gn_coset_decoder
  import gn_pkg::*;
#(
  parameter int unsigned N = NSUB
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // channel LLRs
  input  logic                 in_valid_i,
  output logic                 in_ready_o,
  input  llr_t                 in_llr_i    [N],
  // code configuration
  input  logic [N-1:0]         frozen_g_i  [N],
  input  logic [N-1:0]         frozen_pi_i [N],
  input  llr_t                 coef_delta_i [TMAX],
  input  llr_t                 coef_theta_i [TMAX],
  input  llr_t                 coef_gamma_i [TMAX],
  input  logic [3:0]           tmax_i,
  input  logic                 early_en_i,
  // decoded codeword
  output logic                 out_valid_o,
  input  logic                 out_ready_i,
  output logic [N-1:0]         out_bits_o,
  output logic [$clog2(N)-1:0] out_row_o,
  output logic                 out_last_o,
  // status
  output logic [3:0]           iters_o,
  output logic                 early_o
);
  localparam int unsigned NG   = N / CPG;
  localparam int unsigned COLS = N / CPG;

  // ---------------------------------------------------------------- controller
  logic                 wr_en;
  logic [$clog2(N)-1:0] wr_row;
  logic                 ld_valid, ld_beat, det_valid, dec_start, first;
  logic [1:0]           ld_q, det_q;
  graph_e               graph;
  logic [3:0]           iter;
  logic                 cap_valid, cap_last;
  logic                 busy_any, e_any, ob_busy;

  pdf_controller #(.N(N)) u_ctrl (
    .clk, .rst_n,
    .in_valid_i, .in_ready_o, .wr_en_o(wr_en), .wr_row_o(wr_row),
    .tmax_i, .early_en_i,
    .busy_i(busy_any), .e_any_i(e_any), .ob_busy_i(ob_busy),
    .ld_valid_o(ld_valid), .ld_q_o(ld_q), .ld_beat_o(ld_beat),
    .det_valid_o(det_valid), .det_q_o(det_q), .dec_start_o(dec_start),
    .first_o(first), .graph_o(graph), .iter_o(iter),
    .cap_valid_o(cap_valid), .cap_last_o(cap_last),
    .iters_o, .early_o);

  // ---------------------------------------------------------------- channel-LLR storage
  llr_t y [NG][N];

  chan_llr_store #(.N(N), .NG(NG)) u_chan (
    .clk, .wr_en_i(wr_en), .wr_row_i(wr_row), .wr_data_i(in_llr_i),
    .graph_i(graph), .q_i(ld_q), .y_o(y));

  // ---------------------------------------------------------------- damping factors of t
  llr_t delta, theta, gamma;
  always_comb begin
    delta = coef_delta_i[3'(iter - 4'd1)];
    theta = coef_theta_i[3'(iter - 4'd1)];
    gamma = coef_gamma_i[3'(iter - 4'd1)];
  end

  // ---------------------------------------------------------------- interleaved routing
  logic [N-1:0]   cout  [NG];
  logic [N-1:0]   cin   [NG];
  logic [CPG-1:0] e_grp [NG];
  logic [NG-1:0]  busy_grp;
  logic [N-1:0]   e_all;
  logic [N-1:0]   frz   [NG][CPG];

  always_comb
    for (int g = 0; g < NG; g++) begin
      for (int gp = 0; gp < NG; gp++)
        for (int qp = 0; qp < CPG; qp++)
          cin[g][CPG * gp + qp] = cout[gp][qp * COLS + g];
      for (int q = 0; q < CPG; q++) begin
        e_all[CPG * g + q] = e_grp[g][q];
        frz[g][q] = (graph == GRAPH_G) ? frozen_g_i[CPG * g + q] : frozen_pi_i[CPG * g + q];
      end
    end

  assign busy_any = |busy_grp;
  assign e_any    = |e_all;

  // ---------------------------------------------------------------- sub-decoder groups
  for (genvar g = 0; g < NG; g++) begin : g_grp
    sub_decoder_group #(.N(N)) u_grp (
      .clk, .rst_n,
      .ld_valid_i(ld_valid), .ld_q_i(ld_q), .ld_beat_i(ld_beat), .first_i(first),
      .det_valid_i(det_valid), .det_q_i(det_q), .dec_start_i(dec_start),
      .delta_i(delta), .theta_i(theta), .gamma_i(gamma),
      .y_i(y[g]), .cin_i(cin[g]), .e_all_i(e_all), .frozen_i(frz[g]),
      .cout_o(cout[g]), .e_o(e_grp[g]), .busy_o(busy_grp[g]));
  end

  // ---------------------------------------------------------------- output buffer
  output_buffer #(.N(N), .NG(NG)) u_out (
    .clk, .rst_n,
    .cap_valid_i(cap_valid), .cap_q_i(ld_q), .cap_last_i(cap_last), .graph_i(graph),
    .bus_i(cout), .busy_o(ob_busy),
    .out_valid_o, .out_ready_i, .out_row_o(out_bits_o), .out_idx_o(out_row_o), .out_last_o);

endmodule
