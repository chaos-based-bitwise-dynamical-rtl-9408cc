// prng_ref_pkg: reference model used by the testbenches of the chaotic PRNG.
//
// Written independently of the RTL, with wide integer arithmetic: the map
// x' = gamma * x * (1 - x) with x in Q0.32 and gamma in Q2.30, both products
// truncated; the partition LCG s' = 1664525 s + 1013904223 (mod 2^32) with
// k = 9 + floor(s[31:16] * 3 / 2^16); and a cycle-level model of the whole
// generator (gamma queue, partition counter, state).
package prng_ref_pkg;

  typedef logic [31:0] u32_t;

  function automatic u32_t map_ref(u32_t x, u32_t gamma);
    logic [127:0] one, t, xx, g;
    one = 128'd1 << 32;
    t   = 128'(x) * (one - 128'(x));   // Q0.64
    xx  = t >> 32;                     // Q0.32
    g   = 128'(gamma) * xx;            // Q2.62
    return u32_t'(g >> 30);
  endfunction

  function automatic real q32_to_real(u32_t v);
    return real'(v) / 4294967296.0;
  endfunction

  function automatic u32_t gamma_from_real(real g);
    return u32_t'(longint'(g * 1073741824.0));
  endfunction

  function automatic u32_t lcg_next(u32_t s);
    return u32_t'(64'(s) * 64'd1664525 + 64'd1013904223);
  endfunction

  function automatic int unsigned k_of(u32_t s, int unsigned kmin = 9, int unsigned kmax = 11);
    return kmin + ((int'(s[31:16]) * (kmax - kmin + 1)) >> 16);
  endfunction

  // Cycle-level model of the complete generator after start.
  class gen_model;
    u32_t        x, gamma;
    u32_t        q[$];
    u32_t        s;
    int unsigned kcnt;
    int unsigned kmin, kmax;
    bit          switched;   // last step changed gamma

    function new(int unsigned kmin_ = 9, int unsigned kmax_ = 11);
      kmin = kmin_;
      kmax = kmax_;
    endfunction

    // The PRIME cycle: first gamma, x0 and k_1.
    function void prime(u32_t gammas[$], u32_t x0, u32_t seed);
      q     = gammas;
      gamma = q.pop_front();
      x     = x0;
      s     = seed;
      kcnt  = k_of(s, kmin, kmax);
      s     = lcg_next(s);
    endfunction

    // One RUN cycle; returns the new output bit.
    function bit step();
      x = map_ref(x, gamma);
      switched = 0;
      if (kcnt <= 1) begin
        kcnt = k_of(s, kmin, kmax);
        s    = lcg_next(s);
        if (q.size() > 0) begin
          q.push_back(gamma);
          gamma    = q.pop_front();
          switched = 1;
        end
      end else begin
        kcnt--;
      end
      return x[0];
    endfunction
  endclass

endpackage
