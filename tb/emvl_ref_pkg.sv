// emvl_ref_pkg: reference model of the E-MVL machine for the testbenches.
//
// The class repeats, in plain procedural code, what the machine is specified to
// do: the same three xorshift32 streams (with the same seed salts), the same
// partial Fisher-Yates draws for the update order and for the extracted set,
// the linear sparsity schedule ps(t) = ps_init - floor(D t / (t_fin - 1)),
// n(t) = max(1, floor((1 - P_s) N)), the internal signal of Eq. (5) and the
// decision of Eq. (6), with in-place sequential spin updates. A correct
// machine therefore ends every run with exactly the spins this model predicts.
// It also counts the events the testbenches want to see happen and gives the
// Ising energy of a configuration and the cycle count of a run.
package emvl_ref_pkg;

  localparam int unsigned ONE = 65536;

  function automatic int unsigned xs32(input int unsigned x);
    int unsigned y;
    y = x ^ (x << 13);
    y = y ^ (y >> 17);
    y = y ^ (y << 5);
    return y;
  endfunction

  function automatic int unsigned seeded(input int unsigned seed, input int unsigned salt);
    int unsigned s;
    s = seed ^ salt;
    if (s == 0) s = 32'h2545_f491;
    return s;
  endfunction

  class emvl_model;
    int n_spins;
    int J[];          // row-major, J[i*N + k]
    int h[];
    bit spin[];
    int perm_ord[];
    int perm_ext[];
    int unsigned r_ord, r_ext, r_spin;
    // event counters
    longint n_self, n_tie, n_flip, n_uphill, n_clamp, n_full, n_carry;
    longint cycles;

    function new(int n);
      n_spins  = n;
      J        = new[n * n];
      h        = new[n];
      spin     = new[n];
      perm_ord = new[n];
      perm_ext = new[n];
      foreach (h[i]) h[i] = 0;
      foreach (J[i]) J[i] = 0;
      foreach (perm_ord[i]) begin
        perm_ord[i] = i;
        perm_ext[i] = i;
      end
      r_ord = 32'h2545_f491;
      r_ext = 32'h2545_f491 ^ 32'h9e37_79b9;
      r_spin = 32'h2545_f491 ^ 32'h7f4a_7c15;
      n_self = 0; n_tie = 0; n_flip = 0; n_uphill = 0;
      n_clamp = 0; n_full = 0; n_carry = 0; cycles = 0;
    endfunction

    function automatic longint jv(int i, int k);
      return longint'(J[i*n_spins + k]);
    endfunction

    function automatic longint hv(int i);
      return longint'(h[i]);
    endfunction

    // Local field of spin i over all its connections: h_i + sum J_ik s_k.
    function automatic longint field(int i);
      longint f;
      f = hv(i);
      for (int k = 0; k < n_spins; k++)
        if (k != i) f += spin[k] ? jv(i, k) : -jv(i, k);
      return f;
    endfunction

    // H = - sum_{i<j} J_ij s_i s_j - sum_i h_i s_i (each pair counted once).
    function automatic longint energy();
      longint e;
      e = 0;
      for (int i = 0; i < n_spins; i++) begin
        e -= spin[i] ? hv(i) : -hv(i);
        for (int k = i + 1; k < n_spins; k++)
          e -= (spin[i] == spin[k]) ? jv(i, k) : -jv(i, k);
      end
      return e;
    endfunction

    // Partial Fisher-Yates draw at position pos from the order table (sel 0)
    // or the extraction table (sel 1).
    function automatic int draw(input bit sel, input int pos);
      int unsigned r, span, slot;
      int a, b;
      r = sel ? r_ext : r_ord;
      span = n_spins - pos;
      slot = pos + int'(((longint'(r) >> 16) * longint'(span)) >> 16);
      if (sel) begin
        r_ext = xs32(r_ext);
        a = perm_ext[pos];
        b = perm_ext[slot];
        perm_ext[pos] = b;
        perm_ext[slot] = a;
      end else begin
        r_ord = xs32(r_ord);
        a = perm_ord[pos];
        b = perm_ord[slot];
        perm_ord[pos] = b;
        perm_ord[slot] = a;
      end
      return b;
    endfunction

    // One run. As in the machine, the shuffler tables restart from the
    // identity and the random streams restart from the seed.
    function automatic void run(int unsigned ps_init, int unsigned ps_fin,
                                int t_fin, int unsigned seed);
      int unsigned m, d, q, rem, err, ps;
      int n;
      foreach (perm_ord[i]) begin
        perm_ord[i] = i;
        perm_ext[i] = i;
      end
      r_ord  = seeded(seed, 32'h0);
      r_ext  = seeded(seed, 32'h9e37_79b9);
      r_spin = seeded(seed, 32'h7f4a_7c15);
      for (int i = 0; i < n_spins; i++) begin
        spin[i] = r_spin[31];
        r_spin  = xs32(r_spin);
      end
      m   = (t_fin > 1) ? t_fin - 1 : 0;
      d   = ps_init - ps_fin;
      q   = (m != 0) ? d / m : 0;
      rem = (m != 0) ? d % m : 0;
      err = 0;
      ps  = ps_init;
      cycles = 64'd2 + longint'(n_spins);
      for (int t = 0; t < t_fin; t++) begin
        // Check the incremental schedule against the closed form.
        if (m != 0 && ps != ps_init - int'((longint'(d) * longint'(t)) / longint'(m)))
          $display("model: schedule mismatch at t=%0d", t);
        n = int'(((longint'(ONE) - longint'(ps)) * longint'(n_spins)) >> 16);
        if (n == 0) begin
          n = 1;
          n_clamp++;
        end
        if (n == n_spins) n_full++;
        cycles += longint'(n_spins) * (longint'(n) + 64'd5) + 64'd1;
        for (int p = 0; p < n_spins; p++) begin
          int i;
          longint acc, full;
          bit nv;
          i = draw(1'b0, p);
          acc = 0;
          for (int k = 0; k < n; k++) begin
            int idx;
            idx = draw(1'b1, k);
            if (idx == i) begin
              acc += hv(i);
              n_self++;
            end else begin
              acc += spin[idx] ? jv(i, idx) : -jv(i, idx);
            end
          end
          if (acc > 0)      nv = 1'b1;
          else if (acc < 0) nv = 1'b0;
          else begin
            nv = r_spin[31];
            n_tie++;
          end
          r_spin = xs32(r_spin);
          if (nv != spin[i]) begin
            n_flip++;
            full = field(i);
            // A flip against the full local field raises the energy.
            if ((nv && full < 0) || (!nv && full > 0)) n_uphill++;
          end
          spin[i] = nv;
        end
        if (t != t_fin - 1) begin
          if (err + rem >= m) begin
            ps  = ps - q - 1;
            err = err + rem - m;
            n_carry++;
          end else begin
            ps  = ps - q;
            err = err + rem;
          end
        end
      end
    endfunction
  endclass

endpackage
