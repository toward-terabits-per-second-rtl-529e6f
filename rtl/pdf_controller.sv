// pdf_controller: finite-state machine of the parallel decoding framework.
//
// What it does. Sequences one codeword through the decoder: store the channel LLRs, run up to
// tmax iterations alternating between graph G (odd t) and graph G_pi (even t), stop early once
// no sub-code reports an error (if enabled), then hand the result to the output buffer.
//
// How it works. States:
//   S_IN   accept N rows of channel LLRs (in_ready_o high), one per cycle.
//   S_LOAD ten-cycle step sequence broadcast to all sub-decoder groups in lock step:
//          cycles 0..7 load core q = cnt/2, beat cnt%2; cycles 2,4,6,8 check core (cnt-2)/2
//          with the shared error detector; cycle 9 dec_start (decode or bypass).
//   S_DEC  wait until no core is busy, then either start the next iteration or finish.
//   S_CAP  wait until the output buffer is free, then CPG capture steps over the groups'
//          output pins; back to S_IN, so the next codeword can be stored while the
//          previous one streams out.
//
// Interface and timing. An iteration takes 10 + 1 + (SC cycles of the slowest busy core)
// cycles. iter_o is the current t (1-based) for the damping-factor select; graph_o is the
// graph of that iteration and stays with the last iteration during capture. iters_o and
// early_o report, per codeword, how many iterations ran and whether it stopped early.
//
// The alternation of graphs, the iteration limit and early termination follow the paper;
// the step schedule, state split and status outputs are this design's.
module pdf_controller
  import gn_pkg::*;
#(
  parameter int unsigned N = NSUB
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // channel-LLR input
  input  logic                 in_valid_i,
  output logic                 in_ready_o,
  output logic                 wr_en_o,
  output logic [$clog2(N)-1:0] wr_row_o,
  // configuration
  input  logic [3:0]           tmax_i,
  input  logic                 early_en_i,
  // status of the datapath
  input  logic                 busy_i,
  input  logic                 e_any_i,
  input  logic                 ob_busy_i,
  // lock-step control of the sub-decoder groups
  output logic                 ld_valid_o,
  output logic [1:0]           ld_q_o,
  output logic                 ld_beat_o,
  output logic                 det_valid_o,
  output logic [1:0]           det_q_o,
  output logic                 dec_start_o,
  output logic                 first_o,
  output graph_e               graph_o,
  output logic [3:0]           iter_o,
  // output-buffer capture
  output logic                 cap_valid_o,
  output logic                 cap_last_o,
  // per-codeword status
  output logic [3:0]           iters_o,
  output logic                 early_o
);
  typedef enum logic [1:0] {S_IN, S_LOAD, S_DEC, S_CAP} state_e;

  state_e     state;
  logic [3:0] cnt;
  logic [3:0] tlim;

  assign tlim = (tmax_i == 4'd0) ? 4'd1 : ((tmax_i > 4'(TMAX)) ? 4'(TMAX) : tmax_i);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IN;
      cnt      <= '0;
      wr_row_o <= '0;
      iter_o   <= 4'd1;
      iters_o  <= '0;
      early_o  <= 1'b0;
    end else begin
      unique case (state)
        S_IN:
          if (in_valid_i) begin
            wr_row_o <= wr_row_o + 1'b1;
            if (wr_row_o == $clog2(N)'(N - 1)) begin
              state  <= S_LOAD;
              cnt    <= '0;
              iter_o <= 4'd1;
            end
          end
        S_LOAD: begin
          cnt <= cnt + 4'd1;
          if (cnt == 4'd9) state <= S_DEC;
        end
        S_DEC:
          if (!busy_i) begin
            if (iter_o >= tlim || (early_en_i && !e_any_i)) begin
              state   <= S_CAP;
              cnt     <= '0;
              iters_o <= iter_o;
              early_o <= (iter_o < tlim);
            end else begin
              state  <= S_LOAD;
              cnt    <= '0;
              iter_o <= iter_o + 4'd1;
            end
          end
        S_CAP:
          if (!ob_busy_i) begin
            cnt <= cnt + 4'd1;
            if (cnt == 4'(CPG - 1)) begin
              state <= S_IN;
              cnt   <= '0;
            end
          end
        default: state <= S_IN;
      endcase
    end
  end

  always_comb begin
    in_ready_o  = (state == S_IN);
    wr_en_o     = (state == S_IN) && in_valid_i;
    ld_valid_o  = (state == S_LOAD) && cnt < 4'd8;
    ld_beat_o   = cnt[0];
    det_valid_o = (state == S_LOAD) && cnt >= 4'd2 && cnt <= 4'd8 && !cnt[0];
    det_q_o     = 2'((cnt - 4'd2) >> 1);
    dec_start_o = (state == S_LOAD) && cnt == 4'd9;
    cap_valid_o = (state == S_CAP) && !ob_busy_i;
    cap_last_o  = cap_valid_o && cnt == 4'(CPG - 1);
    // during capture the step counter selects the groups' output columns
    ld_q_o      = (state == S_CAP) ? cnt[1:0] : cnt[2:1];
    first_o     = (iter_o == 4'd1);
    graph_o     = iter_o[0] ? GRAPH_G : GRAPH_PI;
  end
endmodule
