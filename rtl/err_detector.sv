// err_detector: syndrome check of one sub-code's hard decisions.
//
// What it does. Given the hard decisions c (sign bits of a sub-decoder's input LLRs) and the
// sub-code's frozen set, it raises err_o when c is not a codeword: u = c * G_N is computed
// and any frozen position of u that is 1 is an error (a "Type-1" sub-code, which must be SC
// decoded). With err_o low the sub-code is "Type-2" and its hard decisions are final.
//
// How it works. G_N is its own inverse over GF(2), so u is obtained from c with the usual
// log2(N)-stage XOR butterfly of the polar transform; the frozen bits of u are ORed.
//
// Interface and timing. Purely combinational; the sub-decoder group registers err_o.
// The check itself is the paper's; the butterfly is the obvious way to build it.
module err_detector #(
  parameter int unsigned N = 128
) (
  input  logic [N-1:0] hard_i,
  input  logic [N-1:0] frozen_i,
  output logic [N-1:0] u_o,
  output logic         err_o
);
  localparam int unsigned LN = $clog2(N);

  logic [N-1:0] st [LN+1];

  assign st[0] = hard_i;
  for (genvar s = 0; s < LN; s++) begin : g_stage
    for (genvar j = 0; j < N; j++) begin : g_bit
      if ((j & (1 << s)) == 0) begin : g_xor
        assign st[s+1][j] = st[s][j] ^ st[s][j + (1 << s)];
      end else begin : g_pass
        assign st[s+1][j] = st[s][j];
      end
    end
  end

  assign u_o   = st[LN];
  assign err_o = |(st[LN] & frozen_i);
endmodule
