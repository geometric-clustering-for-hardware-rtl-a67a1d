// tb_tdce_ref_pkg -- reference model of the clustered equalizer for the
// testbenches.
//
// Works on plain integers, independently of the RTL's package: a 16-bit word
// is an int in [-32768, 32767]; sums wrap modulo 2^16; a complex product is
// (ar*br - ai*bi, ar*bi + ai*br) computed exactly, shifted right by 11 with
// rounding toward minus infinity and wrapped to 16 bits.
// ref_block() computes one block of L outputs directly from the definition
//   x_S[j][w] = sum over {i : Q[i] = w} of x[base+i+j]
//   y[j]      = sum over w of x_S[j][w] * g_C[w]
package tb_tdce_ref_pkg;

  function automatic int wrap16(longint v);
    longint m;
    m = v & 64'hFFFF;
    if (m >= 32768) m = m - 65536;
    return int'(m);
  endfunction

  function automatic int shr11(longint v);
    // floor division by 2^11
    longint q;
    q = v / 2048;
    if ((v % 2048) != 0 && v < 0) q = q - 1;
    return wrap16(q);
  endfunction

  function automatic void cmul_ref(input int ar, ai, br, bi, output int pr, pi);
    longint r, i;
    r = longint'(ar) * br - longint'(ai) * bi;
    i = longint'(ar) * bi + longint'(ai) * br;
    pr = shr11(r);
    pi = shr11(i);
  endfunction

  // x*: whole input sequence including the M-1 leading zeros of history
  function automatic void ref_block(input int xre[$], input int xim[$], input int base,
                                    input int q[], input int gre[], input int gim[],
                                    input int M, input int L, input int NC,
                                    output int yre[], output int yim[]);
    int sre[], sim[];
    int pr, pi;
    yre = new[L];
    yim = new[L];
    for (int j = 0; j < L; j++) begin
      sre = new[NC];
      sim = new[NC];
      foreach (sre[w]) begin sre[w] = 0; sim[w] = 0; end
      for (int i = 0; i < M; i++) begin
        sre[q[i]] = wrap16(longint'(sre[q[i]]) + longint'(xre[base+i+j]));
        sim[q[i]] = wrap16(longint'(sim[q[i]]) + longint'(xim[base+i+j]));
      end
      yre[j] = 0;
      yim[j] = 0;
      for (int w = 0; w < NC; w++) begin
        cmul_ref(sre[w], sim[w], gre[w], gim[w], pr, pi);
        yre[j] = wrap16(longint'(yre[j]) + longint'(pr));
        yim[j] = wrap16(longint'(yim[j]) + longint'(pi));
      end
    end
  endfunction

  // signed random integer in [-a, a]
  function automatic int srand(int a);
    return int'($urandom_range(2*a)) - a;
  endfunction

endpackage
