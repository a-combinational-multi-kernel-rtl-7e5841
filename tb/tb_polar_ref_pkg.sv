// tb_polar_ref_pkg: bit-true reference model of the multi-kernel SC decoder,
// written from the decoding equations with integer arithmetic, for the
// testbenches. An LLR is handled as its Q-bit sign-magnitude code word.
//
//  - llr_val / llr_code convert between code words and signed integers; the
//    code of a sum saturates at 2^(Q-1)-1 and zero is coded +0.
//  - ref_f2, ref_f3, ref_g, ref_g1, ref_g2 and ref_leaf are the node
//    functions; ref_decode is the recursive SC decoder (first kernel at the
//    root); ref_encode is x = u * G for the same kernel order, used to build
//    noiseless test words.
//  - The counters record how often each mechanism of the datapath was used
//    (binary/ternary nodes, saturated sums, the two branches of the odd-leaf
//    rule), so a testbench can prove that its stimulus reached them.
//
// The equations are the published ones. The same conventions this design
// chose are modelled too: Q-bit saturation, +0, the zero-sign rule and the
// leaf tie rule. These are the only points where the model follows the RTL
// instead of the mathematics. The noiseless-word checks do not depend on them.
package tb_polar_ref_pkg;

  typedef int unsigned iq_t[$];

  // Mechanism counters, passed through the model by the caller.
  typedef struct {
    int unsigned bin_nodes;
    int unsigned ter_nodes;
    int unsigned sat;
    int unsigned leaf_big1;
    int unsigned leaf_else;
  } cnt_t;

  function automatic int llr_val(int unsigned c, int unsigned q);
    int m = int'(c % (1 << (q - 1)));
    return (((c >> (q - 1)) & 1) != 0) ? -m : m;
  endfunction

  function automatic int unsigned llr_code(int v, int unsigned q, inout cnt_t c);
    int mx = (1 << (q - 1)) - 1;
    int a  = (v < 0) ? -v : v;
    if (a > mx) begin a = mx; c.sat++; end
    return (v < 0) ? ((1 << (q - 1)) | a) : a;
  endfunction

  function automatic int unsigned sgn(int unsigned c, int unsigned q);
    return (c >> (q - 1)) & 1;
  endfunction

  function automatic int unsigned mag(int unsigned c, int unsigned q);
    return c % (1 << (q - 1));
  endfunction

  function automatic int unsigned neg(int unsigned c, int unsigned q);
    return c ^ (1 << (q - 1));
  endfunction

  function automatic int unsigned ref_f2(int unsigned a, int unsigned b, int unsigned q);
    int unsigned m = (mag(a, q) < mag(b, q)) ? mag(a, q) : mag(b, q);
    return ((sgn(a, q) ^ sgn(b, q)) << (q - 1)) | m;
  endfunction

  function automatic int unsigned ref_f3(int unsigned a, int unsigned b, int unsigned c,
                                         int unsigned q);
    return ref_f2(ref_f2(a, b, q), c, q);
  endfunction

  // (1-2*bl)*a + b
  function automatic int unsigned ref_g(int unsigned a, int unsigned b, int unsigned bl,
                                        int unsigned q, inout cnt_t c);
    return llr_code(((bl != 0) ? -llr_val(a, q) : llr_val(a, q)) + llr_val(b, q), q, c);
  endfunction

  // (1-2*bl)*a0 + f(a1, a2)
  function automatic int unsigned ref_g1(int unsigned a0, int unsigned a1, int unsigned a2,
                                         int unsigned bl, int unsigned q, inout cnt_t c);
    int unsigned f = ref_f2(a1, a2, q);
    return llr_code(((bl != 0) ? -llr_val(a0, q) : llr_val(a0, q)) + llr_val(f, q), q, c);
  endfunction

  // (1-2*bl)*a1 + (1-2*(bl^bc))*a2
  function automatic int unsigned ref_g2(int unsigned a1, int unsigned a2, int unsigned bl,
                                         int unsigned bc, int unsigned q, inout cnt_t c);
    int v1 = (bl != 0) ? -llr_val(a1, q) : llr_val(a1, q);
    int v2 = ((bl ^ bc) != 0) ? -llr_val(a2, q) : llr_val(a2, q);
    return llr_code(v1 + v2, q, c);
  endfunction

  // Size-2 leaf: u0 from the sign of f, u1 by the odd-leaf rule.
  function automatic void ref_leaf(int unsigned l0, int unsigned l1, int unsigned a0,
                                   int unsigned a1, int unsigned q,
                                   output int unsigned u0, output int unsigned u1,
                                   inout cnt_t c);
    u0 = (a0 != 0) ? (sgn(l0, q) ^ sgn(l1, q)) : 0;
    if (a1 == 0) u1 = 0;
    else if (mag(l1, q) >= mag(l0, q)) begin u1 = sgn(l1, q); c.leaf_big1++; end
    else begin u1 = sgn(l0, q) ^ u0; c.leaf_else++; end
  endfunction

  function automatic int unsigned code_len(int unsigned m, int unsigned tern);
    int unsigned n = 1;
    for (int unsigned s = 0; s < m; s++) n *= (((tern >> s) & 1) != 0) ? 3 : 2;
    return n;
  endfunction

  // x = u * G, first kernel outermost.
  function automatic iq_t ref_encode(iq_t u, int unsigned m, int unsigned tern);
    int unsigned n = u.size();
    iq_t x;
    if (m == 0) return u;
    if ((tern & 1) != 0) begin
      int unsigned t = n / 3;
      iq_t l, c, r;
      l = ref_encode(u[0:t-1], m - 1, tern >> 1);
      c = ref_encode(u[t:2*t-1], m - 1, tern >> 1);
      r = ref_encode(u[2*t:n-1], m - 1, tern >> 1);
      for (int unsigned i = 0; i < t; i++) x.push_back(l[i] ^ c[i]);
      for (int unsigned i = 0; i < t; i++) x.push_back(l[i] ^ r[i]);
      for (int unsigned i = 0; i < t; i++) x.push_back(l[i] ^ c[i] ^ r[i]);
    end else begin
      int unsigned h = n / 2;
      iq_t l, r;
      l = ref_encode(u[0:h-1], m - 1, tern >> 1);
      r = ref_encode(u[h:n-1], m - 1, tern >> 1);
      for (int unsigned i = 0; i < h; i++) x.push_back(l[i] ^ r[i]);
      for (int unsigned i = 0; i < h; i++) x.push_back(r[i]);
    end
    return x;
  endfunction

  // SC decoding of one node; returns the decided bits u and the node codeword.
  function automatic void ref_decode(iq_t alpha, iq_t info, int unsigned m, int unsigned tern,
                                     int unsigned q, output iq_t u, output iq_t beta,
                                     inout cnt_t c);
    int unsigned n = alpha.size();
    u = {}; beta = {};
    if (m == 1) begin
      int unsigned u0, u1;
      ref_leaf(alpha[0], alpha[1], info[0], info[1], q, u0, u1, c);
      u = '{u0, u1};
      beta = '{u0 ^ u1, u1};
    end else if ((tern & 1) != 0) begin
      int unsigned t = n / 3;
      iq_t al, ac, ar, ul, uc, ur, bl, bc, br;
      c.ter_nodes++;
      for (int unsigned i = 0; i < t; i++) al.push_back(ref_f3(alpha[i], alpha[i+t], alpha[i+2*t], q));
      ref_decode(al, info[0:t-1], m - 1, tern >> 1, q, ul, bl, c);
      for (int unsigned i = 0; i < t; i++) ac.push_back(ref_g1(alpha[i], alpha[i+t], alpha[i+2*t], bl[i], q, c));
      ref_decode(ac, info[t:2*t-1], m - 1, tern >> 1, q, uc, bc, c);
      for (int unsigned i = 0; i < t; i++) ar.push_back(ref_g2(alpha[i+t], alpha[i+2*t], bl[i], bc[i], q, c));
      ref_decode(ar, info[2*t:n-1], m - 1, tern >> 1, q, ur, br, c);
      u = {ul, uc, ur};
      for (int unsigned i = 0; i < t; i++) beta.push_back(bl[i] ^ bc[i]);
      for (int unsigned i = 0; i < t; i++) beta.push_back(bl[i] ^ br[i]);
      for (int unsigned i = 0; i < t; i++) beta.push_back(bl[i] ^ bc[i] ^ br[i]);
    end else begin
      int unsigned h = n / 2;
      iq_t al, ar, ul, ur, bl, br;
      c.bin_nodes++;
      for (int unsigned i = 0; i < h; i++) al.push_back(ref_f2(alpha[i], alpha[i+h], q));
      ref_decode(al, info[0:h-1], m - 1, tern >> 1, q, ul, bl, c);
      for (int unsigned i = 0; i < h; i++) ar.push_back(ref_g(alpha[i], alpha[i+h], bl[i], q, c));
      ref_decode(ar, info[h:n-1], m - 1, tern >> 1, q, ur, br, c);
      u = {ul, ur};
      for (int unsigned i = 0; i < h; i++) beta.push_back(bl[i] ^ br[i]);
      for (int unsigned i = 0; i < h; i++) beta.push_back(br[i]);
    end
  endfunction

endpackage
