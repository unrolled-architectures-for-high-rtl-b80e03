// tb_ref_pkg -- golden model for the multi-kernel polar encoder testbenches.
//
// Computes x = u * G with G = T_k0 (x) T_k1 (x) ... (x) T_ks directly from the
// definition of the Kronecker product, without reusing any structure of the
// RTL: entry G[r][c] is the product over all kernels of T_l[r_d][c_d], where
// r_d and c_d are the mixed-radix digits of r and c (kernel k0 gives the most
// significant digit). The kernels are
//   T2 = [1 0; 1 1]            (row = input index, column = output index)
//   T3 = [1 1 1; 1 0 1; 0 1 1] (x0 = u0^u1, x1 = u0^u2, x2 = u0^u1^u2)
// Frames are carried as bit queues, bit i = u_i, so one function serves any N.
package tb_ref_pkg;

  typedef int unsigned ker_q_t [$];
  typedef bit          bits_q_t [$];

  function automatic bit kernel_entry(int unsigned l, int unsigned r, int unsigned c);
    if (l == 2) return (r == 1) || (c == 0);           // [1 0; 1 1]
    case ({r[1:0], c[1:0]})                            // [1 1 1; 1 0 1; 0 1 1]
      4'b00_00, 4'b00_01, 4'b00_10: return 1'b1;
      4'b01_00, 4'b01_10:           return 1'b1;
      4'b10_01, 4'b10_10:           return 1'b1;
      default:                      return 1'b0;
    endcase
  endfunction

  function automatic int unsigned code_len(ker_q_t ker);
    int unsigned n = 1;
    foreach (ker[k]) n *= ker[k];
    return n;
  endfunction

  // G[r][c] of the Kronecker product of the kernel ordering.
  function automatic bit gen_entry(ker_q_t ker, int unsigned r, int unsigned c);
    for (int k = ker.size() - 1; k >= 0; k--) begin
      if (!kernel_entry(ker[k], r % ker[k], c % ker[k])) return 1'b0;
      r /= ker[k];
      c /= ker[k];
    end
    return 1'b1;
  endfunction

  // x = u * G (non-systematic encoding).
  function automatic bits_q_t encode(ker_q_t ker, bits_q_t u);
    bits_q_t x;
    int unsigned n = code_len(ker);
    x = {};
    for (int unsigned c = 0; c < n; c++) x.push_back(1'b0);
    for (int unsigned r = 0; r < n; r++) begin
      if (u[r]) begin
        for (int unsigned c = 0; c < n; c++) x[c] ^= gen_entry(ker, r, c);
      end
    end
    return x;
  endfunction

  // Two-pass systematic encoding: x = (u*G with frozen positions cleared) * G.
  function automatic bits_q_t encode_sys(ker_q_t ker, bits_q_t u, bits_q_t frozen);
    bits_q_t v = encode(ker, u);
    foreach (v[i]) if (frozen[i]) v[i] = 1'b0;
    return encode(ker, v);
  endfunction

  // Frozen set of a pure-binary code: indices whose binary weight is below
  // min_wt (a Reed-Muller-like set, for which two-pass encoding is systematic).
  function automatic bits_q_t rm_frozen(int unsigned n, int unsigned min_wt);
    bits_q_t f = {};
    for (int unsigned i = 0; i < n; i++) f.push_back($countones(i) < min_wt);
    return f;
  endfunction

endpackage
