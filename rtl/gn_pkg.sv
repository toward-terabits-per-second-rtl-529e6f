// gn_pkg: types, sizes and arithmetic shared by the G_N-coset parallel decoder.
//
// The decoder splits a length-N code (N = NSUB*NSUB) into NSUB sub-codes of length
// NSUB that are decoded by NSUB successive-cancellation (SC) cores, grouped CPG at a time.
// All soft values are QW-bit two's-complement LLRs kept in the symmetric range
// [-LLR_MAX, +LLR_MAX] so that magnitude and negation never overflow.
//
// Sizes that follow the paper: NSUB = 128 (N = 16384), four cores per group, 32 groups,
// up to eight iterations, 5-bit LLRs (the smallest width the paper found within 0.1 dB of
// floating point). Symmetric saturation and the min-sum f function are this design's choices.
package gn_pkg;

  // LLR quantization width.
  localparam int unsigned QW      = 5;
  localparam int signed   LLR_MAX = (1 <<< (QW - 1)) - 1;

  // Sub-code length sqrt(N), cores per sub-decoder group, maximum iterations.
  localparam int unsigned NSUB    = 128;
  localparam int unsigned CPG     = 4;
  localparam int unsigned TMAX    = 8;

  typedef logic signed [QW-1:0] llr_t;

  // Which of the two equivalent factor graphs an iteration decodes.
  typedef enum logic {GRAPH_G = 1'b0, GRAPH_PI = 1'b1} graph_e;

  // Clamp a wide signed value to [-LLR_MAX, LLR_MAX].
  function automatic llr_t sat(input logic signed [QW+7:0] v);
    if (32'(v) > LLR_MAX)       return llr_t'(LLR_MAX);
    else if (32'(v) < -LLR_MAX) return llr_t'(-LLR_MAX);
    else                   return llr_t'(v);
  endfunction

  // One processing-element adder: a + (neg ? -b : b), saturated. It serves both the SC
  // g function (b = upper LLR, neg = partial sum) and the input-LLR update y + Delta(1-2c).
  function automatic llr_t pe_add(input llr_t a, input llr_t b, input logic neg);
    logic signed [QW+7:0] wa, wb;
    wa = {{8{a[QW-1]}}, a};
    wb = {{8{b[QW-1]}}, b};
    return sat(neg ? (wa - wb) : (wa + wb));
  endfunction

  // Min-sum f function: sign(a)sign(b)min(|a|,|b|).
  function automatic llr_t f_min(input llr_t a, input llr_t b);
    llr_t ma, mb, m;
    ma = a[QW-1] ? -a : a;
    mb = b[QW-1] ? -b : b;
    m  = (ma < mb) ? ma : mb;
    return (a[QW-1] ^ b[QW-1]) ? -m : m;
  endfunction

  function automatic llr_t llr_abs(input llr_t a);
    return a[QW-1] ? -a : a;
  endfunction
endpackage
