// tb_scramble_pkg: reference models shared by the testbenches.
//
// crlb_dest() follows one input of a CRLB through the network instead of
// evaluating the switch boxes' wiring: in stage s the input sits at position
// p, the box in row p/2 with key bit key_sw[(p/2)*STAGES + s] flips the
// lowest position bit when set, and between stages the position's address
// bits are rotated left by one (perfect shuffle). crlb_model() uses the
// resulting destinations plus the inversion keys to compute the outputs.
package tb_scramble_pkg;

  localparam int MAXN = 64;
  localparam int MAXK = 1024;

  typedef int unsigned dest_t [MAXN];

  function automatic int unsigned stages(int unsigned n, int unsigned m);
    return $clog2(n) + m;
  endfunction

  // destination output of every input
  function automatic dest_t crlb_dest(int unsigned n, int unsigned m,
                                      logic [MAXK-1:0] key_sw);
    dest_t d;
    int unsigned w, st, p;
    w  = $clog2(n);
    st = stages(n, m);
    for (int unsigned a = 0; a < n; a++) begin
      p = a;
      for (int unsigned s = 0; s < st; s++) begin
        if (key_sw[(p / 2) * st + s]) p = p ^ 1;
        if (s != st - 1) p = ((p * 2) % n) + (p / (n / 2));
      end
      d[a] = p;
    end
    return d;
  endfunction

  function automatic logic [MAXN-1:0] crlb_model(int unsigned n, int unsigned m,
                                                 logic [MAXN-1:0] in,
                                                 logic [MAXK-1:0] key_sw,
                                                 logic [MAXN-1:0] key_inv);
    dest_t d;
    logic [MAXN-1:0] o;
    d = crlb_dest(n, m, key_sw);
    o = '0;
    for (int unsigned a = 0; a < n; a++) o[d[a]] = in[a] ^ key_inv[d[a]];
    return o;
  endfunction

  // source input of every output (inverse of crlb_dest)
  function automatic dest_t crlb_src(int unsigned n, int unsigned m,
                                     logic [MAXK-1:0] key_sw);
    dest_t d, s;
    d = crlb_dest(n, m, key_sw);
    for (int unsigned a = 0; a < n; a++) s[d[a]] = a;
    return s;
  endfunction

  function automatic logic [MAXK-1:0] rand_bits();
    logic [MAXK-1:0] r;
    for (int i = 0; i < MAXK / 32; i++) r[i*32 +: 32] = $urandom;
    return r;
  endfunction

endpackage
