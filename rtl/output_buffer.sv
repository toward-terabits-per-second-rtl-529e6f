// output_buffer: collects the decoded codeword and streams it out in code-bit order.
//
// What it does. After the last iteration it reads every sub-decoder's hard output through the
// groups' shared output pins and stores the codeword x_k, k = r*N + c, as N rows of N bits.
// Bit j of sub-decoder i is x_k with k = j*N + i if the last iteration decoded graph G and
// k = i*N + j if it decoded graph G_pi (the paper's eq. (1)). Rows then leave one per cycle.
//
// How it works. Capture takes CPG steps: in step q group g presents bits
// c(CPG*g+q', CPG*m+q) on bus_i[g][q'*N/CPG + m]; each is written to its row and column.
// cap_last_i marks the final step and starts the stream: out_valid_o/out_ready_i handshake,
// out_row_o = row out_idx_o, out_last_o on row N-1. busy_o is high while rows are pending;
// capture must not start while busy_o is high.
//
// The buffer and the index mapping follow the paper; capture over the shared pins and the
// row-per-cycle valid/ready output are this design's choice.
module output_buffer
  import gn_pkg::*;
#(
  parameter int unsigned N  = NSUB,
  parameter int unsigned NG = NSUB / CPG
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 cap_valid_i,
  input  logic [1:0]           cap_q_i,
  input  logic                 cap_last_i,
  input  graph_e               graph_i,
  input  logic [N-1:0]         bus_i [NG],
  output logic                 busy_o,
  output logic                 out_valid_o,
  input  logic                 out_ready_i,
  output logic [N-1:0]         out_row_o,
  output logic [$clog2(N)-1:0] out_idx_o,
  output logic                 out_last_o
);
  localparam int unsigned COLS = N / CPG;

  logic [N-1:0] xbuf [N];

  always_ff @(posedge clk)
    if (cap_valid_i)
      for (int g = 0; g < NG; g++)
        for (int qq = 0; qq < CPG; qq++)
          for (int m = 0; m < COLS; m++)
            if (graph_i == GRAPH_G)
              xbuf[CPG * m + 32'(cap_q_i)][CPG * g + qq] <= bus_i[g][qq * COLS + m];
            else
              xbuf[CPG * g + qq][CPG * m + 32'(cap_q_i)] <= bus_i[g][qq * COLS + m];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy_o    <= 1'b0;
      out_idx_o <= '0;
    end else if (cap_valid_i && cap_last_i) begin
      busy_o    <= 1'b1;
      out_idx_o <= '0;
    end else if (busy_o && out_ready_i) begin
      out_idx_o <= out_idx_o + 1'b1;
      if (out_last_o) busy_o <= 1'b0;
    end
  end

  assign out_valid_o = busy_o;
  assign out_row_o   = xbuf[out_idx_o];
  assign out_last_o  = busy_o && (out_idx_o == $clog2(N)'(N - 1));

  a_no_cap_busy: assert property (@(posedge clk) disable iff (!rst_n) cap_valid_i |-> !busy_o);
endmodule
