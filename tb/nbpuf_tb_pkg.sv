// nbpuf_tb_pkg -- reference model shared by the testbenches.
//
// Holds the threshold tables as the decimal fractions printed in the paper
// (not the Q0.32 constants of the RTL) and computes, in double precision,
// what a cell with m ones in K evaluations must produce: its class, its
// section index and Gray code, and the key bits it adds.
package nbpuf_tb_pkg;

  const real THR_Q4 [3]  = '{0.0010616, 0.5049029, 0.998969};
  const real THR_O8 [7]  = '{0.000032, 0.001061, 0.032387, 0.504902, 0.968752,
                             0.998969, 0.999968};
  const real THR_H16 [15] = '{0.000005, 0.000032, 0.000186, 0.001061, 0.005956,
                              0.032387, 0.156357, 0.504902, 0.848678, 0.968752,
                              0.994241, 0.998969, 0.999817, 0.999968, 0.999994};

  // Paper's threshold j of the alphabet with t bits per symbol.
  function automatic real paper_thr(int t, int j);
    case (t)
      2:       return THR_Q4[j];
      3:       return THR_O8[j];
      default: return THR_H16[j];
    endcase
  endfunction

  // Smallest count m with m / K >= T.
  function automatic longint ref_thr_count(real thr, longint k);
    return longint'($ceil(thr * real'(k)));
  endfunction

  // Section of a one-frequency m/K: i such that T(i-1) <= m/K < T(i).
  function automatic int ref_symbol(longint m, longint k, int t, longint thr_cnt [15]);
    int s = 0;
    for (int j = 0; j < (1 << t) - 1; j++)
      if (m >= thr_cnt[j]) s = j + 1;
    return s;
  endfunction

  // Same, straight from the paper's fractions.
  function automatic int ref_symbol_real(longint m, longint k, int t);
    int s = 0;
    for (int j = 0; j < (1 << t) - 1; j++)
      if (real'(m) / real'(k) >= paper_thr(t, j)) s = j + 1;
    return s;
  endfunction

  // Reflected Gray code, built bit by bit: g(b) = s(b) xor s(b+1).
  function automatic int ref_gray(int s, int t);
    int g = 0;
    for (int b = 0; b < t; b++)
      if (((s >> b) & 1) != ((s >> (b + 1)) & 1)) g |= (1 << b);
    return g;
  endfunction

endpackage
