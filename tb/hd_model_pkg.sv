// Reference model of the HDC arithmetic, used by the testbenches to work out
// expected vectors and scores independently of the RTL.  N-grams are built
// from the closed form  XOR_i  B(c_i) >> (N-1-i)  (zero-filling shift) rather
// than by the step-by-step recurrence of the hardware; bundling counts the
// ones per position and compares with T; scores are matching positions,
// counted per chunk with the ADC saturation applied.
package hd_model_pkg;

  class hd_model #(int unsigned D = 64);
    typedef logic [D-1:0] vec_t;
    typedef bit   [1:0]   seq_t[$];

    static function vec_t ngram(input vec_t atom[4], input seq_t sq,
                                int unsigned start, int unsigned n);
      vec_t r = '0;
      for (int unsigned i = 0; i < n; i++)
        r ^= atom[sq[start + i]] >> (n - 1 - i);
      return r;
    endfunction

    // All HD vectors one sequence produces (split every m N-grams).
    static function void encode(input vec_t atom[4], input seq_t sq,
                                int unsigned n, int unsigned m, int unsigned t,
                                ref vec_t out[$]);
      int unsigned cnt[];
      int unsigned k = 0;
      cnt = new[D];
      for (int unsigned s = 0; s + n <= sq.size(); s++) begin
        vec_t g = ngram(atom, sq, s, n);
        for (int unsigned b = 0; b < D; b++) cnt[b] += g[b];
        k++;
        if (k == m || s + n == sq.size()) begin
          vec_t v;
          for (int unsigned b = 0; b < D; b++) begin
            v[b] = (cnt[b] > t);
            cnt[b] = 0;
          end
          out.push_back(v);
          k = 0;
        end
      end
    endfunction

    static function int unsigned score(vec_t q, vec_t p, int unsigned rows,
                                       int unsigned adc_bits);
      int unsigned total = 0;
      int unsigned amax  = (1 << adc_bits) - 1;
      for (int unsigned c0 = 0; c0 < D; c0 += rows) begin
        int unsigned a1 = 0, a0 = 0;
        for (int unsigned b = c0; b < c0 + rows && b < D; b++) begin
          if (q[b] && p[b])   a1++;
          if (!q[b] && !p[b]) a0++;
        end
        total += (a1 > amax ? amax : a1) + (a0 > amax ? amax : a0);
      end
      return total;
    endfunction

    static function vec_t rand_vec();
      vec_t v;
      for (int unsigned b = 0; b < D; b++) v[b] = 1'($urandom);
      return v;
    endfunction
  endclass

endpackage
