// gn_ref_pkg: reference models for the testbenches, written without reference to the RTL.
//
//   encode      x = u * G_n from the matrix definition of G_n (bit c of x is the XOR of u_r
//               over all r whose binary digits contain those of c);
//   syndrome    error check of a hard-decision vector against a frozen set;
//   ref_sc      recursive SC decoder with the node rules of the design: Rate-0 at any size;
//               Rate-1, REP and SPC up to 16 bits; ML by correlation on 4-bit nodes; min-sum f;
//               g and stored LLRs clamped to +-LLR_MAX. It counts visited nodes in ref_visits.
//   rm_frozen   a Reed-Muller-like frozen set: the n-k indices of lowest Hamming weight.
// All work on vectors of N = NSUB bits; shorter codes (n < N) use the low n bits, since the
// matrix definition of G_n is the top-left corner of G_N.
package gn_ref_pkg;
  import gn_pkg::*;

  localparam int N = NSUB;
  int ref_visits;

  function automatic int clamp(int v);
    return v > LLR_MAX ? LLR_MAX : (v < -LLR_MAX ? -LLR_MAX : v);
  endfunction

  function automatic int iabs(int v);
    return v < 0 ? -v : v;
  endfunction

  function automatic logic [N-1:0] encode(logic [N-1:0] u);
    logic [N-1:0] x;
    x = '0;
    for (int c = 0; c < N; c++)
      for (int r = 0; r < N; r++)
        if (((r & c) == c) && u[r]) x[c] = ~x[c];
    return x;
  endfunction

  function automatic bit syndrome(logic [N-1:0] h, logic [N-1:0] frz);
    return ((encode(h) & frz) != '0);
  endfunction

  function automatic logic [N-1:0] rm_frozen(int k, int n = N);
    logic [N-1:0] f;
    int left;
    f = '0;
    left = n - k;
    for (int w = 0; w <= $clog2(n) && left > 0; w++)
      for (int i = 0; i < n && left > 0; i++)
        if ($countones(i) == w) begin
          f[i] = 1'b1;
          left--;
        end
    return f;
  endfunction

  function automatic logic [N-1:0] ref_node(int s, int idx, int L[N], logic [N-1:0] frz);
    int n;
    logic [N-1:0] fm, h, b, bl, br;
    int nf;
    int Lf[N], Lg[N];
    n = 1 << s;
    fm = '0; h = '0; b = '0; nf = 0;
    ref_visits++;
    for (int j = 0; j < n; j++) begin
      fm[j] = frz[idx * n + j];
      nf += fm[j];
      h[j] = L[j] < 0;
    end
    if (nf == n) return '0;
    if (n <= 16) begin
      if (nf == 0) return h;
      if (nf == n - 1 && !fm[n-1]) begin
        int sum;
        sum = 0;
        for (int j = 0; j < n; j++) sum += L[j];
        return sum < 0 ? ((N'(1) << n) - 1) : '0;
      end
      if (nf == 1 && fm[0]) begin
        int mi, par;
        mi = 0; par = 0;
        for (int j = 0; j < n; j++) begin
          par ^= h[j];
          if (iabs(L[j]) < iabs(L[mi])) mi = j;
        end
        if (par) h[mi] = ~h[mi];
        return h;
      end
    end
    if (n <= 4) begin
      int bestc;
      logic [N-1:0] bx, x;
      bestc = -1000000;
      bx = '0;
      for (int u = 0; u < (1 << n); u++) begin
        int corr;
        corr = 0;
        if ((N'(u) & fm) != '0) continue;
        x = encode(N'(u));
        for (int j = 0; j < n; j++) corr += x[j] ? -L[j] : L[j];
        if (corr > bestc) begin
          bestc = corr;
          bx = x;
        end
      end
      return bx & ((N'(1) << n) - 1);
    end
    for (int j = 0; j < n / 2; j++) begin
      int a, c, m;
      a = L[j]; c = L[j + n / 2];
      m = iabs(a) < iabs(c) ? iabs(a) : iabs(c);
      Lf[j] = ((a < 0) != (c < 0)) ? -m : m;
    end
    bl = ref_node(s - 1, 2 * idx, Lf, frz);
    for (int j = 0; j < n / 2; j++) Lg[j] = clamp(L[j + n / 2] + (bl[j] ? -L[j] : L[j]));
    br = ref_node(s - 1, 2 * idx + 1, Lg, frz);
    for (int j = 0; j < n / 2; j++) begin
      b[j] = bl[j] ^ br[j];
      b[j + n / 2] = br[j];
    end
    return b;
  endfunction

  // Full SC decoding of one sub-code of length n (default N); L and frz use the low n entries.
  function automatic logic [N-1:0] ref_sc(int L[N], logic [N-1:0] frz, int n = N);
    return ref_node($clog2(n), 0, L, frz);
  endfunction
endpackage
