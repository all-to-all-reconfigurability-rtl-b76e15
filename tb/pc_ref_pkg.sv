// pc_ref_pkg - behavioural reference model of the master-graph p-computer,
// written independently of the RTL for the testbenches.
//
// Holds the instance tables, per-replica weights, biases and states, and one
// xoshiro128** generator per p-bit (written here with ordinary multiplies).
// sweep() applies the colour phases 0..NC-1 in order; in each phase every
// p-bit of that colour computes its field from the state before the phase,
// looks up 1/(1+exp(-I')) on the 1/16 grid clipped to [-8,8), compares with
// its random number and advances its generator: the schedule the hardware
// must reproduce bit for bit. energy6() returns six times the binary energy
// from the stored weights (each pair counted twice, each triple three times).
package pc_ref_pkg;

  function automatic int unsigned rotl32(int unsigned x, int k);
    return (x << k) | (x >> (32 - k));
  endfunction

  function automatic int unsigned splitmix(int unsigned z0);
    int unsigned z;
    z = z0 + 32'h9E37_79B9;
    z = (z ^ (z >> 16)) * 32'h85EB_CA6B;
    z = (z ^ (z >> 13)) * 32'hC2B2_AE35;
    return z ^ (z >> 16);
  endfunction

  // P(s=1) as 32 bits for a field given in 2^-6 units
  function automatic longint unsigned ref_prob(int field);
    int q;
    real x, y;
    q = field >>> 2;
    if (q > 127) q = 127;
    if (q < -128) q = -128;
    x = q / 16.0;
    y = 1.0 / (1.0 + $exp(-x)) * 4294967296.0;
    if (y >= 4294967295.0) return 64'hFFFF_FFFF;
    return longint'(y);
  endfunction

  class xoshiro_ref;
    int unsigned s[4];
    function new(int unsigned a, int unsigned b, int unsigned c, int unsigned d);
      s[0] = a; s[1] = b; s[2] = c; s[3] = d;
    endfunction
    function int unsigned peek();
      return rotl32(s[1] * 5, 7) * 9;
    endfunction
    function void step();
      int unsigned t;
      t = s[1] << 9;
      s[2] ^= s[0];
      s[3] ^= s[1];
      s[1] ^= s[2];
      s[0] ^= s[3];
      s[2] ^= t;
      s[3] = rotl32(s[3], 11);
    endfunction
  endclass

  // Seed of global p-bit g: must match the documented hash of the design
  function automatic xoshiro_ref seed_ref(int unsigned base, int unsigned g);
    int unsigned k;
    xoshiro_ref x;
    k = base ^ (g * 32'h0100_0193);
    // state word order {s0,s1,s2,s3} = {mix(k), mix(k+1), mix(k+2), mix(k+3)|1}
    x = new(splitmix(k), splitmix(k + 1), splitmix(k + 2), splitmix(k + 3) | 1);
    return x;
  endfunction

  class pc_model;
    int N, R, NI, K2, K3, NC;
    int neigh[], pa[], pb[], color[];     // [inst][i][slot] / [inst][i]
    int j2[], j3[], h[];                  // [r][i][slot] / [r][i]
    bit s[];                              // [r][i]
    xoshiro_ref rng[];                    // [r][i]
    int flips;                            // number of state changes seen
    int j3_hits;                          // updates that saw an active 3-body term

    function new(int n, int r, int ni, int k2, int k3, int nc, int unsigned seed);
      N = n; R = r; NI = ni; K2 = k2; K3 = k3; NC = nc;
      neigh = new[NI*N*K2]; pa = new[NI*N*K3]; pb = new[NI*N*K3]; color = new[NI*N];
      j2 = new[R*N*K2]; j3 = new[R*N*K3]; h = new[R*N]; s = new[R*N]; rng = new[R*N];
      foreach (j2[x]) j2[x] = 0;
      foreach (j3[x]) j3[x] = 0;
      foreach (h[x]) h[x] = 0;
      foreach (s[x]) s[x] = 0;
      for (int g = 0; g < R*N; g++) rng[g] = seed_ref(seed, g);
      flips = 0; j3_hits = 0;
    endfunction

    function int field(int inst, int r, int i, output int f2, output int f3);
      f2 = 0; f3 = 0;
      for (int k = 0; k < K2; k++)
        if (s[r*N + neigh[(inst*N + i)*K2 + k]]) f2 += j2[(r*N + i)*K2 + k];
      for (int p = 0; p < K3; p++)
        if (s[r*N + pa[(inst*N + i)*K3 + p]] && s[r*N + pb[(inst*N + i)*K3 + p]]) begin
          f3 += j3[(r*N + i)*K3 + p];
          if (j3[(r*N + i)*K3 + p] != 0) j3_hits++;
        end
      return f2 + f3 + h[r*N + i];
    endfunction

    function void sweep(int inst);
      bit nxt[];
      int f2, f3, f;
      nxt = new[R*N];
      for (int c = 0; c < NC; c++) begin
        foreach (s[x]) nxt[x] = s[x];
        for (int r = 0; r < R; r++)
          for (int i = 0; i < N; i++)
            if (color[inst*N + i] == c) begin
              f = field(inst, r, i, f2, f3);
              nxt[r*N + i] = ref_prob(f) > longint'(rng[r*N + i].peek());
              rng[r*N + i].step();
              if (nxt[r*N + i] != s[r*N + i]) flips++;
            end
        foreach (s[x]) s[x] = nxt[x];
      end
    endfunction

    // 6 * E_b from explicit pair and triple lists (weights assumed symmetric):
    // each 2-body weight stored at both ends, each 3-body weight at all three.
    function longint energy6(int inst, int r);
      longint e;
      e = 0;
      for (int i = 0; i < N; i++) begin
        if (!s[r*N + i]) continue;
        e -= 6 * longint'(h[r*N + i]);
        for (int k = 0; k < K2; k++) begin
          int j;
          j = neigh[(inst*N + i)*K2 + k];
          if (s[r*N + j]) e -= 3 * longint'(j2[(r*N + i)*K2 + k]);
        end
        for (int p = 0; p < K3; p++) begin
          int a, b;
          a = pa[(inst*N + i)*K3 + p]; b = pb[(inst*N + i)*K3 + p];
          if (s[r*N + a] && s[r*N + b]) e -= 2 * longint'(j3[(r*N + i)*K3 + p]);
        end
      end
      return e;
    endfunction
  endclass

endpackage
