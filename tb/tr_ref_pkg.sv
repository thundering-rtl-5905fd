// tr_ref_pkg: reference models used by the testbenches, written independently of the RTL.
//   lcg_next   one LCG step, x*a + c mod 2^64
//   xsh_rr     O'Neill's XSH-RR 64 -> 32 output function, rotation done on a doubled word
//   xs128_next one xorshift128 step on a 4-word state, returning the new last word
//   splitmix   a seed scrambler for making test seeds
package tr_ref_pkg;

  localparam longint unsigned A = 64'd6364136223846793005;
  localparam longint unsigned C = 64'd54;

  function automatic longint unsigned lcg_next(input longint unsigned x);
    return x * A + C;
  endfunction

  function automatic int unsigned xsh_rr(input longint unsigned s);
    int unsigned      word;
    int unsigned      r;
    logic [63:0]      both;
    word = int'((s ^ (s >> 18)) >> 27);
    r    = int'(s >> 59);
    both = {word, word} >> r;
    return both[31:0];
  endfunction

  typedef int unsigned xs_state_t [4];

  function automatic int unsigned xs128_next(ref xs_state_t st);
    int unsigned t;
    t     = st[0] ^ (st[0] << 11);
    st[0] = st[1];
    st[1] = st[2];
    st[2] = st[3];
    st[3] = st[3] ^ (st[3] >> 19) ^ (t ^ (t >> 8));
    return st[3];
  endfunction

  function automatic longint unsigned splitmix(input longint unsigned z);
    z = z + 64'h9e3779b97f4a7c15;
    z = (z ^ (z >> 30)) * 64'hbf58476d1ce4e5b9;
    z = (z ^ (z >> 27)) * 64'h94d049bb133111eb;
    return z ^ (z >> 31);
  endfunction

endpackage
