// ssqa_ref_pkg: bit-exact software reference of the SSQA annealer, used by
// the testbenches to predict the hardware's final spin states.
//
// It re-implements, with plain integers and independently of the RTL, the
// update of every spin i of every replica k in each annealing step:
//   acc  = sum_j (+/-)J_ij by sigma_j,k(t), wrapped to 8 bits
//   S    = acc + (+/-)Q(t) by sigma_i,k+1(t-1) + h_i + (+/-)n_rnd by r + Is_i,k(t)
//   Is'  = S >= I0 ? I0-1 : S < -I0 ? -I0 : S;   sigma' = (Is' >= 0)
// with sigma(0) = sigma(-1) = +1, Is(0) = 0, replica R-1 coupled to replica 0,
// Q(t) = qmin raised by beta every tau steps and capped at qmax, and r taken
// from bit k of a 64-bit xorshift (13, 7, 17) that advances once per clock
// cycle. The update of spin i in step s of anneal t happens on cycle
// ((t*M + s)*N + i + 1)*(N + 1) after start, which fixes the random bits.
package ssqa_ref_pkg;

  function automatic longint unsigned xs_next(input longint unsigned x);
    x = x ^ (x << 13);
    x = x ^ (x >> 7);
    x = x ^ (x << 17);
    return x;
  endfunction

  function automatic int wrap(input int v, input int bits);
    int m;
    m = 1 << bits;
    v = v & (m - 1);
    if (v >= (m >> 1)) v = v - m;
    return v;
  endfunction

  // J: N*N row-major, h: N. Result spins: (t*N + i)*R + k, 1 = +1.
  // sat_hi / sat_lo count saturations, for the testbenches' statistics.
  function automatic void run(input int N, input int R, input int T, input int M,
                              input int i0, input int qmin, input int qmax,
                              input int beta, input int tau, input int nrnd,
                              input longint unsigned seed,
                              ref int J[], ref int h[], ref bit res[],
                              ref int sat_hi, ref int sat_lo);
    int sig[], sig_prev[], is_v[], sig_new[], is_new[];
    longint unsigned rng;
    longint cyc, target;
    int q, tcnt, acc, s_sum, v;
    bit r;
    if (T == 0) T = 1;
    if (M == 0) M = 1;
    if (tau == 0) tau = 1;
    rng = (seed == 0) ? 64'h9E37_79B9_7F4A_7C15 : seed;
    cyc = 0;
    res = new[T * N * R];
    sig = new[R * N]; sig_prev = new[R * N]; is_v = new[R * N];
    sig_new = new[R * N]; is_new = new[R * N];
    sat_hi = 0; sat_lo = 0;
    for (int t = 0; t < T; t++) begin
      foreach (sig[x]) begin sig[x] = 1; sig_prev[x] = 1; is_v[x] = 0; end
      q = qmin; tcnt = 0;
      for (int s = 0; s < M; s++) begin
        for (int i = 0; i < N; i++) begin
          target = ((longint'(t) * M + s) * N + i + 1) * (N + 1);
          while (cyc < target) begin rng = xs_next(rng); cyc++; end
          for (int k = 0; k < R; k++) begin
            acc = 0;
            for (int j = 0; j < N; j++)
              acc = wrap(acc + (sig[k*N + j] ? J[i*N + j] : -J[i*N + j]), 8);
            r = rng[k];
            s_sum = acc + (sig_prev[((k + 1) % R)*N + i] ? q : -q) + h[i]
                    + (r ? nrnd : -nrnd) + is_v[k*N + i];
            if (s_sum >= i0) begin v = i0 - 1; sat_hi++; end
            else if (s_sum < -i0) begin v = -i0; sat_lo++; end
            else v = s_sum;
            is_new[k*N + i]  = v;
            sig_new[k*N + i] = (v >= 0);
          end
        end
        sig_prev = sig; sig = sig_new; is_v = is_new;
        sig_new = new[R * N];
        is_new  = new[R * N];
        if (s == M - 1) begin
          for (int i = 0; i < N; i++)
            for (int k = 0; k < R; k++) res[(t*N + i)*R + k] = bit'(sig[k*N + i]);
        end
        if (tcnt == tau - 1) begin
          tcnt = 0;
          q = (q + beta > qmax) ? qmax : q + beta;
        end else tcnt++;
      end
    end
  endfunction

endpackage
