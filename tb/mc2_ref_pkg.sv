// mc2_ref_pkg: reference model of the MC2RAM arithmetic for the testbenches,
// written independently of the RTL (plain integer loops, no bit columns of
// the RTL). It reproduces the in-memory bit-column products with the DAC
// model, the hold-cell scaling and the saturating ADC, the log-add table,
// the uniform generator and the Metropolis-Hastings decision.
package mc2_ref_pkg;
  // One row of a bank, as the reference sees it.
  typedef struct {
    int r;          // R_i, signed, units of 1/16
    int x;          // x_i, signed, units of 1/16
    int mu   [2];   // mu_ij
    int isig [2];   // 1/sigma_ij^2, units of 1/4
  } row_t;

  function automatic int bit_of(int v, int b, int nbits);
    int u;
    u = v & ((1 << nbits) - 1);
    return (u >> b) & 1;
  endfunction

  // DAC current of a row for its operand v (integer DAC LSB units).
  function automatic int dac_i(int v, int dac_bits, int ratio);
    int mag, ds;
    mag = (v < 0) ? -v : v;
    ds  = (dac_bits >= 7) ? 0 : 7 - dac_bits;
    return ((mag >> ds) * ratio) / 64;
  endfunction

  // dE_j of one bank: quantised exactly as the datapath does.
  // kind 0 = R column, 1 = x column, 2 = mu_j column.
  function automatic longint bank_de(row_t rows [], int n, int j, int r_shift,
                                     int dac_bits, int adc_bits, int ratio,
                                     ref int sat_count);
    longint acc;
    int ds;
    ds  = (dac_bits >= 7) ? 0 : 7 - dac_bits;
    acc = 0;
    for (int ph = 0; ph < 2; ph++)
      for (int kind = 0; kind < 3; kind++) begin
        int nb;
        nb = (kind == 0) ? 4 : 8;
        for (int b = 0; b < nb; b++) begin
          longint cur, vs, code, contrib;
          bit neg;
          int shift;
          cur = 0;
          for (int i = 0; i < n; i++) begin
            int v, w;
            v = rows[i].r * rows[i].isig[j];
            if (v == 0 || ((v < 0) != (ph == 1))) continue;
            w = (kind == 0) ? rows[i].r : (kind == 1) ? rows[i].x : rows[i].mu[j];
            if (bit_of(w, b, nb)) cur += dac_i(v, dac_bits, ratio);
          end
          vs   = (cur * 256) >> r_shift;
          code = vs >> 8;
          if (code >= (1 << adc_bits)) begin code = (1 << adc_bits) - 1; sat_count++; end
          shift = b + ((kind == 0) ? 0 : 1) + r_shift + ds;
          neg = (b == nb - 1) ^ (ph == 1);
          if (kind == 2) neg = !neg;
          contrib = code << shift;
          acc += neg ? -contrib : contrib;
        end
      end
    return acc;
  endfunction

  // Exact dE_j = sum R v + 2 (x - mu) v, in Q10.
  function automatic longint exact_de(row_t rows [], int n, int j);
    longint s;
    s = 0;
    for (int i = 0; i < n; i++) begin
      longint v;
      v = rows[i].r * rows[i].isig[j];
      s += rows[i].r * v + 2 * (rows[i].x - rows[i].mu[j]) * v;
    end
    return s;
  endfunction

  function automatic longint lse(longint a, longint b, ref int sat_count);
    longint mx, d, k;
    mx = (a > b) ? a : b;
    d  = (a > b) ? a - b : b - a;
    k  = d / 128;
    if (k >= 64) begin sat_count++; return mx; end
    return mx + longint'($rtoi(1024.0 * $ln(1.0 + $exp(-(real'(k) + 0.5) / 8.0)) + 0.5));
  endfunction

  function automatic logic [15:0] lfsr_next(logic [15:0] u);
    return u[0] ? ((u >> 1) ^ 16'hB400) : (u >> 1);
  endfunction

  function automatic longint ref_ln_u(logic [15:0] u);
    int k;
    longint f, l2;
    k = 0;
    for (int i = 0; i < 16; i++) if (u[i]) k = i;
    f  = ((longint'(u) << (15 - k)) & 16'h7fff) >> 5;
    l2 = longint'(k) * 1024 + f - 16 * 1024;
    return (l2 * 710) >>> 10;
  endfunction

  // log density sum_j exp(c_j - E_j/2) folded pairwise
  function automatic longint log_density(longint c [2], longint e [2], int m, ref int sat_count);
    longint acc;
    acc = c[0] - (e[0] >>> 1);
    for (int j = 1; j < m; j++) acc = lse(acc, c[j] - (e[j] >>> 1), sat_count);
    return acc;
  endfunction
endpackage
