// hhk_ref_pkg -- reference models shared by the testbenches.
//
// polar_encode: x = u * F^(x)n for the first n bits (natural order).
// sc_reference: successive-cancellation decoding of a hard-decision word with
//   channel LLRs of +1/-1, written as a direct top-down recomputation for each
//   bit: left-sibling partial sums are re-encoded from the decided bits rather
//   than propagated, so it shares no structure with the RTL decoder.
package hhk_ref_pkg;
  import hhk_pkg::*;

  function automatic logic [POLAR_N-1:0] polar_encode(input logic [POLAR_N-1:0] u, input int n);
    logic [POLAR_N-1:0] x = u;
    for (int h = 1; h < n; h = h * 2)
      for (int j = 0; j < n; j++)
        if ((j & h) == 0) x[j] = x[j] ^ x[j + h];
    return x;
  endfunction

  function automatic int minsum(input int a, input int b);
    int ma = a < 0 ? -a : a;
    int mb = b < 0 ? -b : b;
    int m  = ma < mb ? ma : mb;
    return ((a < 0) != (b < 0)) ? -m : m;
  endfunction

  function automatic logic [POLAR_N-1:0] sc_reference(input logic [POLAR_N-1:0] rr);
    logic [POLAR_N-1:0] uh = '0;
    int L [POLAR_N];
    int Ln [POLAR_N];
    for (int i = 0; i < POLAR_N; i++) begin
      for (int k = 0; k < POLAR_N; k++) L[k] = rr[k] ? -1 : 1;
      for (int d = 1; d <= 7; d++) begin
        int n  = POLAR_N >> d;
        int nd = i >> (7 - d);
        if ((nd % 2) == 0) begin
          for (int k = 0; k < n; k++) Ln[k] = minsum(L[k], L[k + n]);
        end else begin
          logic [POLAR_N-1:0] sub = '0, beta;
          for (int k = 0; k < n; k++) sub[k] = uh[(nd - 1) * n + k];
          beta = polar_encode(sub, n);
          for (int k = 0; k < n; k++) Ln[k] = beta[k] ? L[k + n] - L[k] : L[k + n] + L[k];
        end
        for (int k = 0; k < n; k++) L[k] = Ln[k];
      end
      uh[i] = INFO_MASK[i] && (L[0] < 0);
    end
    return uh;
  endfunction

endpackage
