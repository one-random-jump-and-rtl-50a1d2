// tb_ref_pkg: reference models used by the testbenches.
//
// Plain step-by-step software versions of the generator's parts, written
// from the algorithm descriptions and independent of the RTL structure:
// the three strategy generators (Taus88, LFSR113, xorshift128), the
// 8-bit chaotic iteration, the random-xorshift permutation and a whole
// generator model that yields one output word per call.
package tb_ref_pkg;

  import ciprng_pkg::*;

  typedef struct {
    strategy_e   kind;
    int unsigned z [4];
  } strat_state_t;

  function automatic strat_state_t strat_seed(strategy_e kind, logic [127:0] seed);
    strat_state_t st;
    st.kind = kind;
    for (int i = 0; i < 4; i++) st.z[i] = seed[32*i +: 32];
    if (kind == STRAT_XORSHIFT128) begin
      if (seed == '0) begin
        st.z[0] = 123456789; st.z[1] = 362436069;
        st.z[2] = 521288629; st.z[3] = 88675123;
      end
    end else begin
      if (st.z[0] < 2)   st.z[0] |= 2;
      if (st.z[1] < 8)   st.z[1] |= 8;
      if (st.z[2] < 16)  st.z[2] |= 16;
      if (kind == STRAT_LFSR113 && st.z[3] < 128) st.z[3] |= 128;
    end
    return st;
  endfunction

  // One step: advances st and returns the output word.
  function automatic int unsigned strat_step(ref strat_state_t st);
    int unsigned b, t;
    case (st.kind)
      STRAT_TAUS88: begin
        b = ((st.z[0] << 13) ^ st.z[0]) >> 19;
        st.z[0] = ((st.z[0] & 32'hFFFFFFFE) << 12) ^ b;
        b = ((st.z[1] << 2) ^ st.z[1]) >> 25;
        st.z[1] = ((st.z[1] & 32'hFFFFFFF8) << 4) ^ b;
        b = ((st.z[2] << 3) ^ st.z[2]) >> 11;
        st.z[2] = ((st.z[2] & 32'hFFFFFFF0) << 17) ^ b;
        return st.z[0] ^ st.z[1] ^ st.z[2];
      end
      STRAT_LFSR113: begin
        b = ((st.z[0] << 6) ^ st.z[0]) >> 13;
        st.z[0] = ((st.z[0] & 32'hFFFFFFFE) << 18) ^ b;
        b = ((st.z[1] << 2) ^ st.z[1]) >> 27;
        st.z[1] = ((st.z[1] & 32'hFFFFFFF8) << 2) ^ b;
        b = ((st.z[2] << 13) ^ st.z[2]) >> 21;
        st.z[2] = ((st.z[2] & 32'hFFFFFFF0) << 7) ^ b;
        b = ((st.z[3] << 3) ^ st.z[3]) >> 12;
        st.z[3] = ((st.z[3] & 32'hFFFFFF80) << 13) ^ b;
        return st.z[0] ^ st.z[1] ^ st.z[2] ^ st.z[3];
      end
      default: begin
        t = st.z[0] ^ (st.z[0] << 11);
        st.z[0] = st.z[1];
        st.z[1] = st.z[2];
        st.z[2] = st.z[3];
        st.z[3] = st.z[3] ^ (st.z[3] >> 19) ^ (t ^ (t >> 8));
        return st.z[3];
      end
    endcase
  endfunction

  function automatic byte unsigned ref_f(func_e func, byte unsigned x);
    return (func == FUNC_F1) ? byte'(F1_TABLE[x]) : byte'(~x);
  endfunction

  // Component-by-component chaotic iteration of one bloc
  function automatic byte unsigned ref_icg(func_e func, byte unsigned x, byte unsigned s);
    byte unsigned fx, r;
    fx = ref_f(func, x);
    r = 0;
    for (int i = 0; i < 8; i++) r[i] = s[i] ? fx[i] : x[i];
    return r;
  endfunction

  function automatic int unsigned ref_perm(int unsigned in32, int unsigned b);
    int unsigned w1, w2;
    w1 = (in32 >> ((in32 >> 28) + 4)) ^ in32;
    w2 = w1 * b;
    return (w2 >> 22) ^ w2;
  endfunction

  typedef struct {
    func_e        func;
    int unsigned  b;
    int unsigned  x;
    strat_state_t st;
  } gen_state_t;

  function automatic gen_state_t gen_seed(func_e func, strategy_e kind, int unsigned b,
                                          int unsigned seed_x, logic [127:0] seed_s);
    gen_state_t g;
    g.func = func;
    g.b    = b;
    g.x    = seed_x;
    g.st   = strat_seed(kind, seed_s);
    return g;
  endfunction

  // Next output word of the whole generator
  function automatic int unsigned gen_next(ref gen_state_t g);
    int unsigned s, xn;
    s = strat_step(g.st);
    xn = 0;
    for (int l = 0; l < 4; l++)
      xn[8*l +: 8] = ref_icg(g.func, g.x[8*l +: 8], s[8*l +: 8]);
    g.x = xn;
    return ref_perm(xn, g.b);
  endfunction

endpackage
