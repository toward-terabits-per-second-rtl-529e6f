// sub_decoder_group: four SC cores that share pins, the LLR-update circuit and the error
// detector ("SC core sharing").
//
// What it does. Group g owns sub-decoders i = CPG*g + q, q = 0..CPG-1. Each iteration it
// (1) loads new input LLRs into its cores one after another, (2) checks each core's hard
// decisions for errors, and (3) on dec_start_i lets every core with an error run SC decoding
// while the others take their hard decisions as output.
//
// How it works. Only one core is loaded at a time, so one Delta unit, one set of LLR/hard-
// output pins and one error detector serve all four cores:
//  * load step q (two beats): the Delta unit combines the routed bits cin_i = c^{t-1}(j,i),
//    the error flags of the previous iteration e_all_i and this core's own c^{t-2} (kept in
//    c2 registers) into Delta; core q adds it to y_i with its own PE adders. At the second beat
//    the c2 register of core q takes the core's current output c^{t-1} ("updated when the
//    related sub-decoder's LLRs are ready").
//  * detect step q: the shared detector checks core q's hard decisions, result kept pending.
//  * dec_start_i: pending flags become e_o (the P_i flags seen by all groups next iteration);
//    cores then start or bypass. Holding the flags and outputs until then keeps the values the
//    other groups read during the load phase at iteration t-1.
// The output pins carry, during step q (ld_q_i), bit q + CPG*m of every core's output:
// cout_o[q'*N/CPG + m] = c(CPG*g+q', CPG*m+q). Together with the same step in the other
// groups this is exactly the set of bits the cores being loaded need (see the top's routing).
//
// Interface and timing. Steps are driven by the controller in lock step across all groups.
// Load beat of core q at ld_valid_i; its hard decisions are ready for det_valid_i with
// det_q_i = q from the next cycle. busy_o is high while any core decodes.
//
// The sharing of pins, Delta circuit and detector between four cores and the c^{t-2} store
// follow the paper (Fig. 4). The step order, the pending/commit of flags and the column-
// interleaved use of the shared output pins are this design's.
module sub_decoder_group
  import gn_pkg::*;
#(
  parameter int unsigned N = NSUB
) (
  input  logic         clk,
  input  logic         rst_n,
  // lock-step control from the controller
  input  logic         ld_valid_i,
  input  logic [1:0]   ld_q_i,
  input  logic         ld_beat_i,
  input  logic         first_i,
  input  logic         det_valid_i,
  input  logic [1:0]   det_q_i,
  input  logic         dec_start_i,
  // damping factors of this iteration
  input  llr_t         delta_i,
  input  llr_t         theta_i,
  input  llr_t         gamma_i,
  // shared input pins
  input  llr_t         y_i     [N],
  input  logic [N-1:0] cin_i,
  input  logic [N-1:0] e_all_i,
  input  logic [N-1:0] frozen_i [CPG],
  // shared output pins
  output logic [N-1:0] cout_o,
  output logic [CPG-1:0] e_o,
  output logic         busy_o
);
  localparam int unsigned COLS = N / CPG;

  logic [N-1:0]   chat  [CPG];
  logic [N-1:0]   hard  [CPG];
  logic [CPG-1:0] busy;
  logic [N-1:0]   c2    [CPG];
  logic [CPG-1:0] e_pend;

  // ---------------------------------------------------------------- shared Delta unit
  llr_t         d   [N];
  logic [N-1:0] neg;

  delta_unit #(.N(N)) u_delta (
    .c1_i(cin_i), .c2_i(c2[ld_q_i]), .e_i(e_all_i),
    .delta_i, .theta_i, .gamma_i, .first_i,
    .d_o(d), .neg_o(neg));

  // ---------------------------------------------------------------- four SC cores
  for (genvar q = 0; q < CPG; q++) begin : g_core
    sc_core #(.N(N)) u_core (
      .clk, .rst_n,
      .frozen_i  (frozen_i[q]),
      .ld_valid_i(ld_valid_i && ld_q_i == 2'(q)),
      .ld_beat_i,
      .ld_y_i    (y_i),
      .ld_d_i    (d),
      .ld_neg_i  (neg),
      .hard_o    (hard[q]),
      .start_i   (dec_start_i && e_pend[q]),
      .bypass_i  (dec_start_i && !e_pend[q]),
      .busy_o    (busy[q]),
      .chat_o    (chat[q]));
  end

  assign busy_o = |busy;

  // ---------------------------------------------------------------- shared error detector
  logic         det_err;

  err_detector #(.N(N)) u_det (
    .hard_i(hard[det_q_i]), .frozen_i(frozen_i[det_q_i]), .u_o(), .err_o(det_err));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      e_pend <= '0;
      e_o    <= '0;
      for (int q = 0; q < CPG; q++) c2[q] <= '0;
    end else begin
      if (det_valid_i) e_pend[det_q_i] <= det_err;
      if (dec_start_i) e_o <= e_pend;
      // c^{t-2} store: takes the core's c^{t-1} once the core's new LLRs are in
      if (ld_valid_i && ld_beat_i) c2[ld_q_i] <= first_i ? '0 : chat[ld_q_i];
    end
  end

  // ---------------------------------------------------------------- shared output pins
  always_comb
    for (int qq = 0; qq < CPG; qq++)
      for (int m = 0; m < COLS; m++)
        cout_o[qq * COLS + m] = chat[qq][CPG * m + 32'(ld_q_i)];

  // ---------------------------------------------------------------- protocol rules
  a_no_load_busy: assert property (@(posedge clk) disable iff (!rst_n) ld_valid_i |-> !busy_o);
  a_det_after_ld: assert property (@(posedge clk) disable iff (!rst_n)
                                   !(det_valid_i && ld_valid_i && det_q_i == ld_q_i));

endmodule
