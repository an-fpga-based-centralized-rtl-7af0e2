// tb_vlc_ref_pkg: reference models used by the testbenches.
//
// Written independently of the RTL: the Polar encoder follows the textbook
// loop form of the transform, the frozen set is chosen by repeatedly taking
// the best remaining index, and the line codes use their own tables.
package tb_vlc_ref_pkg;

  typedef logic [4095:0] bigvec_t;

  function automatic int unsigned ref_weight(int unsigned v);
    int unsigned c = 0;
    while (v != 0) begin
      c += v & 1;
      v >>= 1;
    end
    return c;
  endfunction

  // Information positions: the k indices with the largest (weight, index).
  function automatic bigvec_t ref_info_mask(int unsigned n, int unsigned k);
    bigvec_t m = '0;
    for (int unsigned t = 0; t < k; t++) begin
      int best = -1;
      int unsigned best_score = 0;
      for (int unsigned i = 0; i < n; i++) begin
        int unsigned score = ref_weight(i) * 65536 + i;
        if (!m[i] && (best < 0 || score > best_score)) begin
          best = int'(i);
          best_score = score;
        end
      end
      m[best] = 1'b1;
    end
    return m;
  endfunction

  // Frozen-bit insertion followed by the Polar transform, loop by loop.
  function automatic bigvec_t ref_polar(bigvec_t msg, int unsigned n, int unsigned k);
    bigvec_t mask = ref_info_mask(n, k);
    bigvec_t u = '0;
    int unsigned bit_index = 0;
    int unsigned lg = 0;
    while ((1 << lg) < n) lg++;
    for (int unsigned c = 0; c < n; c++) begin
      if (mask[c]) begin
        u[c] = msg[bit_index];
        bit_index++;
      end
    end
    for (int unsigned i = 0; i < lg; i++) begin
      int unsigned b = 1 << (lg - i);
      int unsigned nb = 1 << i;
      for (int unsigned j = 0; j < nb; j++) begin
        int unsigned base = j * b;
        int unsigned bdiv2 = b / 2;
        for (int unsigned t = 0; t < bdiv2; t++)
          u[base + t] = u[base + t] ^ u[base + t + bdiv2];
      end
    end
    return u;
  endfunction

  function automatic bigvec_t ref_manchester(bigvec_t cw, int unsigned n);
    bigvec_t o = '0;
    for (int unsigned z = 0; z < 2 * n; z += 2) begin
      if (cw[z / 2]) begin o[z] = 1'b1; o[z + 1] = 1'b0; end
      else           begin o[z] = 1'b0; o[z + 1] = 1'b1; end
    end
    return o;
  endfunction

  // IEEE 802.15.7 4B6B table, indexed by the nibble value.
  localparam logic [5:0] TBL4B6B [16] = '{
    6'b001110, 6'b001101, 6'b010011, 6'b010110,
    6'b010101, 6'b100011, 6'b100110, 6'b100101,
    6'b011001, 6'b011010, 6'b011100, 6'b110001,
    6'b110010, 6'b101001, 6'b101010, 6'b101100
  };

  function automatic bigvec_t ref_4b6b(bigvec_t cw, int unsigned n);
    bigvec_t o = '0;
    int unsigned x = 0;
    for (int unsigned z = 0; z < n / 4 * 6; z += 6) begin
      logic [5:0] w = TBL4B6B[{cw[x + 3], cw[x + 2], cw[x + 1], cw[x]}];
      for (int b = 0; b < 6; b++) o[z + b] = w[b];
      x += 4;
    end
    return o;
  endfunction

  // Full transmitter: mode 0 = Manchester, 1 = 4B6B.
  function automatic bigvec_t ref_frame(bigvec_t msg, int unsigned n, int unsigned k, bit mode);
    bigvec_t cw = ref_polar(msg, n, k);
    return mode ? ref_4b6b(cw, n) : ref_manchester(cw, n);
  endfunction

  function automatic bigvec_t rand_vec(int unsigned bits);
    bigvec_t v = '0;
    for (int unsigned i = 0; i < bits; i += 32) v[i +: 32] = $urandom;
    for (int unsigned i = bits; i < 4096; i++) v[i] = 1'b0;
    return v;
  endfunction

endpackage
