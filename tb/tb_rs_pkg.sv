// tb_rs_pkg: reference Reed-Solomon arithmetic for the link testbenches.
//
// Written independently of the RTL: GF(2^8) multiplication via log and
// antilog tables built at time zero, encoding by long division of the
// message polynomial by g(x) = prod_{i=0}^{7} (x - alpha^i), and syndrome
// evaluation by direct power sums. A cell is 32 interleaved RS(19,11)
// codewords; byte k of the cell is symbol k div 32 of codeword k mod 32.
package tb_rs_pkg;

  int unsigned exp_t [512];
  int unsigned log_t [256];

  function automatic void tables();
    int unsigned x;
    x = 1;
    for (int i = 0; i < 255; i++) begin
      exp_t[i] = x;
      exp_t[i+255] = x;
      log_t[x] = i;
      x = x << 1;
      if ((x & 256) != 0) x ^= 'h11D;
    end
  endfunction

  function automatic byte unsigned mul(byte unsigned a, byte unsigned b);
    if (a == 0 || b == 0) return 0;
    return byte'(exp_t[log_t[a] + log_t[b]]);
  endfunction

  // Encode one cell: sys[0..351] in, cbuf[0..607] out.
  function automatic void encode_cell(input byte unsigned sys [352],
                                      output byte unsigned cbuf [608]);
    byte unsigned g [9];
    for (int i = 0; i < 9; i++) g[i] = 0;
    g[0] = 1;                               // g[i] = coefficient of x^i
    for (int r = 0; r < 8; r++) begin
      byte unsigned root;
      root = byte'(exp_t[r]);
      for (int i = 8; i > 0; i--) g[i] = g[i-1] ^ mul(g[i], root);
      g[0] = mul(g[0], root);
    end
    for (int k = 0; k < 352; k++) cbuf[k] = sys[k];
    for (int j = 0; j < 32; j++) begin
      byte unsigned w [19];                 // w[0] = highest degree
      for (int s = 0; s < 11; s++) w[s] = sys[s*32 + j];
      for (int s = 11; s < 19; s++) w[s] = 0;
      for (int s = 0; s < 11; s++) begin
        byte unsigned q;
        q = w[s];
        if (q != 0)
          for (int i = 0; i <= 8; i++) w[s+i] ^= mul(q, g[8-i]);
      end
      for (int s = 11; s < 19; s++) cbuf[s*32 + j] = w[s];
    end
  endfunction

  // True when every codeword of the cell has all eight syndromes zero.
  function automatic bit cell_is_codeword(input byte unsigned cbuf [608]);
    for (int j = 0; j < 32; j++)
      for (int r = 0; r < 8; r++) begin
        byte unsigned acc;
        acc = 0;
        for (int s = 0; s < 19; s++)
          acc ^= mul(cbuf[s*32 + j], byte'(exp_t[(r * (18 - s)) % 255]));
        if (acc != 0) return 0;
      end
    return 1;
  endfunction

endpackage
