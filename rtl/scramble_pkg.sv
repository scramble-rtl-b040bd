// scramble_pkg: constants and helper functions shared by the SCRAMBLE locking
// blocks.
//
// A CRLB (configurable routing and logic block) of size N is a logarithmic
// shuffle network LOG2(N, M, 1): log2(N) switching stages plus M extra
// cascaded stages, each stage holding N/2 key-programmable 2x2 switch boxes,
// followed by one XOR inversion layer of N key bits. The near non-blocking
// form used throughout has M = log2(N) - 2. The functions below give the
// stage count and key widths so that every block and testbench sizes its key
// ports the same way. The 8-bit NVM word matches the 2^8 x 8 SRAM of the
// SCRAMBLE-L memory; that width is this design's choice.
package scramble_pkg;

  // Number of switching stages of LOG2(N, M, 1).
  function automatic int unsigned crlb_stages(int unsigned n, int unsigned m);
    return $clog2(n) + m;
  endfunction

  // Switch-box key bits: N/2 switch boxes per stage.
  function automatic int unsigned crlb_sw_keys(int unsigned n, int unsigned m);
    return (n / 2) * crlb_stages(n, m);
  endfunction

  // Whole CRLB key: switch-box keys plus one inversion key per output.
  function automatic int unsigned crlb_key_bits(int unsigned n, int unsigned m);
    return crlb_sw_keys(n, m) + n;
  endfunction

  // Perfect-shuffle wiring between two stages: position p of a stage drives
  // position rotl(p) of the next one (address bits rotated left by one).
  function automatic int unsigned shuffle_pos(int unsigned p, int unsigned n);
    int unsigned w;
    w = $clog2(n);
    return ((p << 1) | (p >> (w - 1))) & (n - 1);
  endfunction

  // Default FSMIM select map (see fsmim_mux): for state s and multiplexer j
  // the selected input is (s + j*i_w/ip_w) mod i_w, packed at bit offset
  // (s*ip_w + j)*selw. Returned in a wide vector that the caller truncates.
  localparam int unsigned FSMIM_MAP_MAX = 4096;
  function automatic logic [FSMIM_MAP_MAX-1:0] fsmim_default_map(
      int unsigned i_w, int unsigned ip_w, int unsigned s_w, int unsigned selw);
    logic [FSMIM_MAP_MAX-1:0] m;
    m = '0;
    for (int unsigned s = 0; s < 2**s_w; s++)
      for (int unsigned j = 0; j < ip_w; j++)
        for (int unsigned b = 0; b < selw; b++)
          m[(s*ip_w + j)*selw + b] = 1'(((s + j * (i_w / ip_w)) % i_w) >> b);
    return m;
  endfunction

  // Width of one word read from the tamper-proof key NVM.
  localparam int unsigned NVM_WORD_W = 8;

endpackage
