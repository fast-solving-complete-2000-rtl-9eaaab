// sc_sa_model_pkg: reference model of the SC-SA core, for the testbenches.
//
// The class sc_sa_model computes, with plain integers, what the core must
// produce cycle by cycle: for every spin i in 0..n-1 (in that order, one
// noise bit each) I_i = h_i + sum_j J_ij s_j + (lfsr bit 0 ? +n_rnd : -n_rnd),
// the saturated up-down step of Itanh_i with bounds [-I0, I0-1], and
// s_i = (Itanh_i >= 0), all from the states of the previous cycle. After
// each cycle I0 follows the schedule (every tau cycles I0 <- min(I0 * 1/beta,
// I0max), or I0min once I0 has reached I0max). It also evaluates the Ising
// energy and the MAX-CUT value of a spin vector.
package sc_sa_model_pkg;

  class sc_sa_model;
    int n;
    byte J[][];       // couplings J[i][j]
    int  h[];
    int  itanh[];
    bit  s[];
    bit [31:0] lfsr;
    longint i0q, i0_min, i0_max, inv_beta, tcnt, tau;
    int n_rnd;
    int wraps;

    function new(int n);
      this.n = n;
      J = new[n];
      foreach (J[i]) J[i] = new[n];
      h = new[n];
      itanh = new[n];
      s = new[n];
      foreach (J[i]) begin
        h[i] = 0;
        foreach (J[i][j]) J[i][j] = 0;
      end
    endfunction

    function void start(bit [31:0] seed, longint i0_min_fx, longint i0_max_fx,
                        longint inv_beta_q88, longint tau_cycles, int n_rnd);
      lfsr = (seed == 0) ? 32'd1 : seed;
      i0_min = i0_min_fx; i0_max = i0_max_fx; inv_beta = inv_beta_q88;
      tau = (tau_cycles == 0) ? 1 : tau_cycles;
      this.n_rnd = n_rnd;
      i0q = i0_min; tcnt = 0; wraps = 0;
      foreach (s[i]) begin s[i] = 1; itanh[i] = 0; end
    endfunction

    function int i0();
      return int'(i0q >> 8);
    endfunction

    function void cycle();
      bit ns[] = new[n];
      int t = i0();
      for (int i = 0; i < n; i++) begin
        int f = h[i], sum;
        for (int j = 0; j < n; j++) f += s[j] ? int'(J[i][j]) : -int'(J[i][j]);
        f += lfsr[0] ? n_rnd : -n_rnd;
        lfsr = (lfsr >> 1) ^ (lfsr[0] ? 32'h8020_0003 : 32'h0);
        sum = itanh[i] + f;
        if (sum >= t) itanh[i] = t - 1;
        else if (sum < -t) itanh[i] = -t;
        else itanh[i] = sum;
        ns[i] = (itanh[i] >= 0);
      end
      s = ns;
      if (tcnt + 1 >= tau) begin
        tcnt = 0;
        if (i0q >= i0_max) begin i0q = i0_min; wraps++; end
        else begin
          i0q = (i0q * inv_beta) >> 8;
          if (i0q > i0_max) i0q = i0_max;
        end
      end else tcnt++;
    endfunction

    // MAX-CUT value for weights w = -J (J was loaded as -w)
    function longint cut_of(bit v[]);
      longint c = 0;
      for (int i = 0; i < n; i++)
        for (int j = i + 1; j < n; j++)
          if (v[i] != v[j]) c += -longint'(J[i][j]);
      return c;
    endfunction

    // Ising energy H = -sum h_i s_i - 1/2 sum_{i != j} J_ij s_i s_j
    function longint energy_of(bit v[]);
      longint e = 0;
      for (int i = 0; i < n; i++) begin
        e -= v[i] ? h[i] : -h[i];
        for (int j = i + 1; j < n; j++)
          e -= (v[i] == v[j]) ? longint'(J[i][j]) : -longint'(J[i][j]);
      end
      return e;
    endfunction
  endclass

endpackage
