// xorsat_gen_pkg - test problem generator for the p-computer testbenches.
//
// Builds planted 3-regular 3-XORSAT instances (every variable in exactly three
// clauses of three distinct variables; the clause signs are taken from a
// random planted assignment, so the ground state satisfies every clause) and
// maps them onto a pc_model in either form:
//   cubic     one p-bit per variable, E = -sum_c J_c m_a m_b m_d, J_c = +-1;
//   quadratic one extra auxiliary p-bit per clause with the gadget
//             E_c = sum m_i m_j - 2P m_x sum m_i - P sum m_i + 2 m_x
//             (P = J_c), minimal exactly when the clause holds.
// Bipolar weights are converted to the binary form with m = 2s-1
// (J3' = 8 J3, J2' = 4 J2 - 4 sum_k J3, h' = 2 h - 2 sum J2 + 2 sum J3),
// multiplied by the replica's beta and rounded to s{6}{6}. Colours come from
// a greedy colouring of the interaction graph (2-body graph, or the clique
// graph of the clauses for the cubic form), retried in random orders until it
// needs at most NC colours. P-bits the instance does not use get colour 7
// (never updated) and zero weights.
package xorsat_gen_pkg;
  import pc_ref_pkg::*;

  class xorsat_inst;
    int V;                 // variables
    int cl[][3];           // clause variables
    int sign[];            // J_c = +-1
    bit planted[];         // planted binary assignment
    bit cubic;             // form
    int npb;               // p-bits used
    int nbr[][];           // 2-body neighbour list per p-bit (with repeats)
    real w2[][];           // bipolar 2-body weight per slot
    int pa[][], pb[][];    // 3-body pairs per p-bit
    real w3[][];
    real hb[];             // bipolar bias
    int color[];

    function new(int v, bit cub);
      int perm[];
      bit ok;
      V = v; cubic = cub;
      cl = new[V]; sign = new[V]; planted = new[V];
      perm = new[3*V];
      do begin
        foreach (perm[x]) perm[x] = x % V;
        perm.shuffle();
        ok = 1;
        for (int c = 0; c < V; c++) begin
          cl[c][0] = perm[3*c]; cl[c][1] = perm[3*c+1]; cl[c][2] = perm[3*c+2];
          if (cl[c][0] == cl[c][1] || cl[c][0] == cl[c][2] || cl[c][1] == cl[c][2]) ok = 0;
        end
      end while (!ok);
      foreach (planted[x]) planted[x] = 1'($urandom());
      for (int c = 0; c < V; c++) begin
        int p;
        p = 1;
        for (int q = 0; q < 3; q++) p *= planted[cl[c][q]] ? 1 : -1;
        sign[c] = p;
      end
      build();
    endfunction

    // Derive p-bit count, neighbour lists and bipolar weights from cl/sign
    function void build();
      npb = cubic ? V : 2 * V;
      nbr = new[npb]; w2 = new[npb]; pa = new[npb]; pb = new[npb]; w3 = new[npb];
      hb = new[npb]; color = new[npb];
      foreach (hb[x]) hb[x] = 0.0;
      for (int c = 0; c < V; c++) begin
        for (int q = 0; q < 3; q++) begin
          int i, a, b;
          i = cl[c][q]; a = cl[c][(q+1)%3]; b = cl[c][(q+2)%3];
          if (cubic) begin
            pa[i] = {pa[i], a}; pb[i] = {pb[i], b}; w3[i] = {w3[i], real'(sign[c])};
          end else begin
            int x;
            x = V + c;
            nbr[i] = {nbr[i], a, b, x};
            w2[i]  = {w2[i], -1.0, -1.0, 2.0 * sign[c]};
            hb[i] += real'(sign[c]);
            nbr[x] = {nbr[x], i};
            w2[x]  = {w2[x], 2.0 * sign[c]};
          end
        end
        if (!cubic) hb[V + c] = -2.0;
      end
    endfunction

    // adjacency used for colouring
    function bit adjacent(int i, int j);
      if (cubic) begin
        for (int p = 0; p < pa[i].size(); p++) if (pa[i][p] == j || pb[i][p] == j) return 1;
      end else begin
        foreach (nbr[i][k]) if (nbr[i][k] == j) return 1;
      end
      return 0;
    endfunction

    function bit colorize(int nc);
      int order[];
      order = new[npb];
      for (int tries = 0; tries < 200; tries++) begin
        bit ok;
        foreach (order[x]) order[x] = x;
        order.shuffle();
        foreach (color[x]) color[x] = -1;
        ok = 1;
        foreach (order[o]) begin
          int i, c;
          i = order[o];
          for (c = 0; c < nc; c++) begin
            bit used;
            used = 0;
            for (int j = 0; j < npb; j++) if (color[j] == c && adjacent(i, j)) used = 1;
            if (!used) break;
          end
          if (c == nc) begin ok = 0; break; end
          color[i] = c;
        end
        if (ok) return 1;
      end
      return 0;
    endfunction

    static function int fx(real w);
      int v;
      v = int'(w * 64.0);          // rounds to nearest
      if (v > 4095) v = 4095;
      if (v < -4096) v = -4096;
      return v;
    endfunction

    // Write tables of instance `inst` into the model
    function void load_tables(pc_model m, int inst);
      for (int i = 0; i < m.N; i++) begin
        for (int k = 0; k < m.K2; k++) m.neigh[(inst*m.N + i)*m.K2 + k] = 0;
        for (int p = 0; p < m.K3; p++) begin m.pa[(inst*m.N + i)*m.K3 + p] = 0; m.pb[(inst*m.N + i)*m.K3 + p] = 0; end
        m.color[inst*m.N + i] = (i < npb) ? color[i] : 7;
      end
      for (int i = 0; i < npb; i++) begin
        if (cubic) begin
          for (int p = 0; p < pa[i].size(); p++) begin
            m.pa[(inst*m.N + i)*m.K3 + p] = pa[i][p];
            m.pb[(inst*m.N + i)*m.K3 + p] = pb[i][p];
            m.neigh[(inst*m.N + i)*m.K2 + 2*p]     = pa[i][p];
            m.neigh[(inst*m.N + i)*m.K2 + 2*p + 1] = pb[i][p];
          end
        end else begin
          foreach (nbr[i][k]) m.neigh[(inst*m.N + i)*m.K2 + k] = nbr[i][k];
        end
      end
    endfunction

    // Write beta-scaled binary weights of replica r into the model
    function void load_weights(pc_model m, int r, real beta);
      for (int i = 0; i < m.N; i++) begin
        real hbin;
        for (int k = 0; k < m.K2; k++) m.j2[(r*m.N + i)*m.K2 + k] = 0;
        for (int p = 0; p < m.K3; p++) m.j3[(r*m.N + i)*m.K3 + p] = 0;
        m.h[r*m.N + i] = 0;
        if (i >= npb) continue;
        hbin = 2.0 * hb[i];
        if (cubic) begin
          for (int p = 0; p < pa[i].size(); p++) begin
            m.j3[(r*m.N + i)*m.K3 + p]         = fx(beta * 8.0 * w3[i][p]);
            m.j2[(r*m.N + i)*m.K2 + 2*p]       = fx(beta * -4.0 * w3[i][p]);
            m.j2[(r*m.N + i)*m.K2 + 2*p + 1]   = fx(beta * -4.0 * w3[i][p]);
            hbin += 2.0 * w3[i][p];
          end
        end else begin
          foreach (nbr[i][k]) begin
            m.j2[(r*m.N + i)*m.K2 + k] = fx(beta * 4.0 * w2[i][k]);
            hbin -= 2.0 * w2[i][k];
          end
        end
        m.h[r*m.N + i] = fx(beta * hbin);
      end
    endfunction

    // Does binary state vector st (p-bits 0..V-1 are the variables) satisfy all clauses?
    function bit satisfied(bit st[]);
      for (int c = 0; c < V; c++) begin
        int p;
        p = 1;
        for (int q = 0; q < 3; q++) p *= st[cl[c][q]] ? 1 : -1;
        if (p != sign[c]) return 0;
      end
      return 1;
    endfunction

    // 6*beta*E_b of the ground state of replica r in the model's units
    function longint ground6(pc_model m, int inst, int r);
      bit save[];
      longint e0, e1;
      save = new[m.s.size()];
      foreach (save[x]) save[x] = m.s[x];
      for (int i = 0; i < m.N; i++) m.s[r*m.N + i] = 0;
      for (int i = 0; i < V; i++) m.s[r*m.N + i] = planted[i];
      if (!cubic)
        for (int c = 0; c < V; c++) begin
          m.s[r*m.N + V + c] = 0; e0 = m.energy6(inst, r);
          m.s[r*m.N + V + c] = 1; e1 = m.energy6(inst, r);
          m.s[r*m.N + V + c] = (e1 < e0);
        end
      e0 = m.energy6(inst, r);
      foreach (save[x]) m.s[x] = save[x];
      return e0;
    endfunction
  endclass
endpackage
