// sc_core: successive-cancellation (SC) decoder for one length-N sub-code.
//
// What it does. It decodes one inner sub-code of the G_N-coset code and returns hard code-bit
// estimates (not information bits): chat_o = u * G_N. The frozen set of the sub-code is an
// input, so the same core serves both factor graphs.
//
// How it works. LLRs of the node being visited live in a level-indexed store: level s (node
// size 2^s) occupies alpha[2^s .. 2^(s+1)-1]; level log2(N) is the channel-level "LLR storage".
// A small FSM walks the SC tree depth first, one action per clock:
//   NODE, internal node: f (min-sum) into the left child's level, descend.
//   NODE, leaf node:     decide the whole node at once and return its partial sums (beta).
//   RET,  left child:    keep its beta, run g with the PE adders into the right child's level.
//   RET,  right child:   combine (beta_left ^ beta_right, beta_right) and return to the parent.
// A node is a leaf if it is Rate-0 (all frozen, any size: skipped, beta = 0), or, for nodes
// of at most 16 bits, Rate-1 (hard decision), REP (only last bit free: sign of the LLR sum)
// or SPC (only first bit frozen: hard decision, least reliable bit flipped on odd parity),
// or else a 4-bit node decided by exhaustive maximum-likelihood search over its codewords.
// The N/2 PE adders (pe_add) are shared: when the core is idle they compute the input LLRs
// y + Delta(1-2c) for the decoder's LLR generator, N/2 per beat, two beats per load.
//
// Interface and timing. ld_valid_i with ld_beat_i = 0 then 1 writes LLRs [0,N/2) then [N/2,N)
// of the channel level. hard_o gives their sign bits one cycle later. start_i (idle only) runs
// SC decoding: busy_o is high for exactly 2 cycles per visited tree node, and chat_o is valid
// when busy_o falls. bypass_i (idle only) loads chat_o with hard_o in one cycle instead.
//
// Paper versus this design. The node types, the 4-bit ML leaves, the 16-bit limit on special
// nodes, the sharing of PE adders with the LLR update and N = 128 follow the paper. The
// paper's core comes from an earlier architecture it does not describe; this tree walker, its
// cycle count (about twice the paper's Table I latency) and the min-sum f are this design's.
module sc_core
  import gn_pkg::*;
#(
  parameter int unsigned N = NSUB
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] frozen_i,
  // input-LLR update through the shared PE adders
  input  logic         ld_valid_i,
  input  logic         ld_beat_i,
  input  llr_t         ld_y_i  [N],
  input  llr_t         ld_d_i  [N],
  input  logic [N-1:0] ld_neg_i,
  output logic [N-1:0] hard_o,
  // decoding
  input  logic         start_i,
  input  logic         bypass_i,
  output logic         busy_o,
  output logic [N-1:0] chat_o
);
  localparam int unsigned LN  = $clog2(N);
  localparam int unsigned NPE = N / 2;
  localparam int unsigned SMALL_LVL = 4;   // special nodes only up to 16 bits

  typedef enum logic [1:0] {S_IDLE, S_NODE, S_RET} state_e;

  state_e          state;
  logic [4:0]      lvl;      // level of the node being visited
  logic [LN-1:0]   idx;      // index of that node within its level
  logic [N-1:0]    bret;     // beta being returned by the node just finished
  logic [N-1:0]    betal;    // left-child beta, level s at bits [2^s, 2^(s+1))
  llr_t            alpha [2*N];

  // ---------------------------------------------------------------- level read-out
  llr_t clo [NPE], chi [NPE];   // current level, lower and upper half
  llr_t plo [NPE], phi [NPE];   // parent level, lower and upper half
  llr_t cur [16];               // current level, first 16 LLRs (leaf decisions)
  logic [N-1:0] bl_cur;         // betal of current level, right aligned

  always_comb begin
    for (int j = 0; j < NPE; j++) begin
      clo[j] = '0; chi[j] = '0; plo[j] = '0; phi[j] = '0;
    end
    for (int j = 0; j < 16; j++) cur[j] = '0;
    bl_cur = '0;
    for (int l = 0; l <= LN; l++) begin
      if (32'(lvl) == l) begin
        for (int j = 0; j < (1 << l) && j < 16; j++) cur[j] = alpha[(1 << l) + j];
        if (l < LN) for (int j = 0; j < (1 << l); j++) bl_cur[j] = betal[(1 << l) + j];
      end
      if (l >= 1) begin
        if (32'(lvl) == l)
          for (int j = 0; j < (1 << (l - 1)); j++) begin
            clo[j] = alpha[(1 << l) + j];
            chi[j] = alpha[(1 << l) + (1 << (l - 1)) + j];
          end
        if (32'(lvl) + 1 == l)
          for (int j = 0; j < (1 << (l - 1)); j++) begin
            plo[j] = alpha[(1 << l) + j];
            phi[j] = alpha[(1 << l) + (1 << (l - 1)) + j];
          end
      end
    end
  end

  always_comb
    for (int j = 0; j < N; j++) hard_o[j] = alpha[N + j][QW-1];

  // ---------------------------------------------------------------- node classification
  logic [N-1:0] lowmask, fm;
  logic         all_frz, all_inf, is_rep, is_spc, is_small, leaf;

  always_comb begin
    lowmask = (32'(lvl) >= LN) ? '1 : ((N'(1) << (1 << lvl)) - N'(1));
    fm      = (frozen_i >> (N'(idx) << lvl)) & lowmask;
    all_frz = (fm == lowmask);
    all_inf = (fm == '0);
    is_rep  = (fm == (lowmask >> 1));
    is_spc  = (fm == N'(1));
    is_small = (32'(lvl) <= SMALL_LVL);
    leaf    = all_frz || (is_small && (all_inf || is_rep || is_spc)) || (lvl <= 2);
  end

  // ---------------------------------------------------------------- leaf decision
  logic [15:0] hard16, leaf_beta;

  always_comb begin
    int              sum, minv, mini, metric, best;
    logic            par;
    logic [3:0]      x4, bestx;
    hard16 = '0;
    for (int j = 0; j < 16; j++) hard16[j] = cur[j][QW-1] & lowmask[j];
    // REP: sign of the LLR sum
    sum = 0;
    for (int j = 0; j < 16; j++) if (lowmask[j]) sum += int'(cur[j]);
    // SPC: least reliable position
    minv = LLR_MAX + 1;
    mini = 0;
    for (int j = 0; j < 16; j++)
      if (lowmask[j] && int'(llr_abs(cur[j])) < minv) begin
        minv = int'(llr_abs(cur[j]));
        mini = j;
      end
    par = ^hard16;
    // ML over the codewords of a 4-bit node
    best  = 32'h7fff_ffff;
    bestx = '0;
    for (int u = 0; u < 16; u++) begin
      if ((4'(u) & fm[3:0]) == 4'd0) begin
        x4[0] = u[0] ^ u[1] ^ u[2] ^ u[3];
        x4[1] = u[1] ^ u[3];
        x4[2] = u[2] ^ u[3];
        x4[3] = u[3];
        metric = 0;
        for (int j = 0; j < 4; j++)
          if (x4[j] != hard16[j]) metric += int'(llr_abs(cur[j]));
        if (metric < best) begin
          best  = metric;
          bestx = x4;
        end
      end
    end
    if (all_frz)                   leaf_beta = '0;
    else if (is_small && all_inf)  leaf_beta = hard16;
    else if (is_small && is_rep)   leaf_beta = (sum < 0) ? lowmask[15:0] : '0;
    else if (is_small && is_spc)   leaf_beta = hard16 ^ (16'(par) << mini);
    else                           leaf_beta = {12'd0, bestx} & lowmask[15:0];
  end

  // ---------------------------------------------------------------- shared PE adders
  llr_t pe_a [NPE], pe_b [NPE], pe_o [NPE];
  logic pe_neg [NPE];

  always_comb
    for (int j = 0; j < NPE; j++) begin
      if (state == S_IDLE) begin
        // input LLR update: y + Delta * (1 - 2c)
        pe_a[j]   = ld_beat_i ? ld_y_i[NPE + j]   : ld_y_i[j];
        pe_b[j]   = ld_beat_i ? ld_d_i[NPE + j]   : ld_d_i[j];
        pe_neg[j] = ld_beat_i ? ld_neg_i[NPE + j] : ld_neg_i[j];
      end else begin
        // g function: upper + (1 - 2 beta_left) * lower
        pe_a[j]   = phi[j];
        pe_b[j]   = plo[j];
        pe_neg[j] = bret[j];
      end
      pe_o[j] = pe_add(pe_a[j], pe_b[j], pe_neg[j]);
    end

  // ---------------------------------------------------------------- tree walk
  // The LLR store is not reset: every level is written before it is read.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      lvl    <= '0;
      idx    <= '0;
      bret   <= '0;
      betal  <= '0;
      chat_o <= '0;
    end else begin
      unique case (state)
        S_IDLE: begin
          if (ld_valid_i)
            for (int j = 0; j < NPE; j++)
              if (ld_beat_i) alpha[N + NPE + j] <= pe_o[j];
              else           alpha[N + j]       <= pe_o[j];
          if (bypass_i) chat_o <= hard_o;
          if (start_i) begin
            state <= S_NODE;
            lvl   <= 5'(LN);
            idx   <= '0;
          end
        end
        S_NODE: begin
          if (leaf) begin
            bret  <= N'(leaf_beta);
            state <= S_RET;
          end else begin
            for (int l = 0; l < LN; l++)
              if (32'(lvl) == l + 1)
                for (int j = 0; j < (1 << l); j++) alpha[(1 << l) + j] <= f_min(clo[j], chi[j]);
            lvl <= lvl - 5'd1;
            idx <= idx << 1;
          end
        end
        S_RET: begin
          if (32'(lvl) == LN) begin
            chat_o <= bret;
            state  <= S_IDLE;
          end else if (!idx[0]) begin
            for (int l = 0; l < LN; l++)
              if (32'(lvl) == l)
                for (int j = 0; j < (1 << l); j++) begin
                  betal[(1 << l) + j] <= bret[j];
                  alpha[(1 << l) + j] <= pe_o[j];
                end
            idx   <= idx + 1'b1;
            state <= S_NODE;
          end else begin
            for (int l = 0; l < LN; l++)
              if (32'(lvl) == l)
                for (int j = 0; j < (1 << l); j++) begin
                  bret[j]            <= bl_cur[j] ^ bret[j];
                  bret[(1 << l) + j] <= bret[j];
                end
            lvl <= lvl + 5'd1;
            idx <= idx >> 1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy_o = (state != S_IDLE);

  // ---------------------------------------------------------------- protocol rules
  a_no_ld_busy: assert property (@(posedge clk) disable iff (!rst_n) ld_valid_i |-> !busy_o);
  a_one_cmd:    assert property (@(posedge clk) disable iff (!rst_n) !(start_i && bypass_i));
  a_cmd_idle:   assert property (@(posedge clk) disable iff (!rst_n) (start_i || bypass_i) |-> !busy_o);

endmodule
