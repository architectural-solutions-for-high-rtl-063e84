// tau_ref_pkg: software reference of the HPS tau trigger, used by the
// testbenches to compute expected results independently of the RTL.
// Written as plain sequential code (sorting, list building, loops), not as
// a copy of the hardware structure. Also holds an event generator that
// places clusters of particles around a few tau-like directions.
package tau_ref_pkg;
  import tau_pkg::*;

  typedef particle_t frame_t [N_PART];
  typedef particle_t plist_t [$];

  function automatic int iabs(int v); return v < 0 ? -v : v; endfunction

  function automatic int ref_wrap(int d);
    while (d >= 720) d -= 1440;
    while (d < -720) d += 1440;
    return d;
  endfunction

  function automatic int ref_dr2(int eta_a, int phi_a, int eta_b, int phi_b);
    int de, dp;
    de = eta_a - eta_b;
    dp = ref_wrap(phi_a - phi_b);
    return de*de + dp*dp;
  endfunction

  function automatic int pdr2(particle_t a, particle_t b);
    return ref_dr2(int'(a.eta), int'(a.phi), int'(b.eta), int'(b.phi));
  endfunction

  function automatic bit ref_charged(particle_t p);
    return p.valid && (p.pid == PID_CH_HAD || p.pid == PID_ELECTRON || p.pid == PID_MUON);
  endfunction

  // Stage 1: stable selection of the 16 highest-pt charged particles.
  function automatic void ref_seeds(input frame_t f, output particle_t seeds [N_SEED]);
    int idx [$];
    for (int i = 0; i < N_PART; i++) if (ref_charged(f[i])) idx.push_back(i);
    // insertion sort, descending pt, stable
    for (int a = 1; a < idx.size(); a++) begin
      int v = idx[a];
      int b = a - 1;
      while (b >= 0 && f[idx[b]].pt < f[v].pt) begin idx[b+1] = idx[b]; b--; end
      idx[b+1] = v;
    end
    for (int s = 0; s < N_SEED; s++) seeds[s] = (s < idx.size()) ? f[idx[s]] : '0;
  endfunction

  // Stage 2: list of block j for seed s, and its pt sum.
  function automatic void ref_filter(input frame_t f, input particle_t seed, input int j,
                                     output plist_t l, output int psum);
    l = {};
    psum = 0;
    if (!seed.valid) return;
    for (int t = 0; t < FILT_LEN; t++) begin
      particle_t p = f[j*FILT_LEN + t];
      if (p.valid && pdr2(p, seed) <= int'(R2_FILT)) begin
        l.push_back(p);
        psum += int'(p.pt);
      end
    end
  endfunction

  // Stage 3: items taken in order index 0 of lists 0..3, index 1 of lists
  // 0..3, ..., at most MAX_CAND.
  function automatic void ref_merge(input plist_t l [N_FILT], output plist_t out);
    out = {};
    for (int ix = 0; ix < FILT_LEN; ix++)
      for (int j = 0; j < N_FILT; j++)
        if (ix < l[j].size() && out.size() < MAX_CAND) out.push_back(l[j][ix]);
  endfunction

  function automatic bit ref_is_signal(particle_t p, particle_t seed, int total_pt);
    longint d, t;
    real r;
    if (!p.valid) return 0;
    if (!(p.pid == PID_CH_HAD || p.pid == PID_ELECTRON || p.pid == PID_PHOTON)) return 0;
    d = pdr2(p, seed);
    t = (total_pt > 65535) ? 65535 : total_pt;
    if (d <= 121) return 1;
    if (d > 529) return 0;
    return d * t * t <= 64'd7562500;
  endfunction

  // Stages 4-6 for one seed.
  function automatic tau_t ref_tau(particle_t seed, plist_t cands, int total_pt);
    longint spt, swe, swp;
    int nch, q;
    tau_t t;
    spt = 0; swe = 0; swp = 0; nch = 0; q = 0;
    foreach (cands[k]) if (ref_is_signal(cands[k], seed, total_pt)) begin
      spt += cands[k].pt;
      swe += longint'(cands[k].pt) * (int'(cands[k].eta) - int'(seed.eta));
      swp += longint'(cands[k].pt) * ref_wrap(int'(cands[k].phi) - int'(seed.phi));
      if (ref_charged(cands[k])) begin nch++; q += cands[k].charge ? -1 : 1; end
    end
    t = '0;
    t.pt      = (spt > 65535) ? 16'hffff : 16'(spt);
    t.eta     = 12'(int'(seed.eta) + ((spt == 0) ? 0 : int'(swe / spt)));
    t.phi     = 11'(ref_wrap(int'(seed.phi) + ((spt == 0) ? 0 : int'(swp / spt))));
    t.n_prong = 5'(nch);
    t.charge  = 6'(q);
    t.valid   = seed.valid && spt != 0 && nch >= 1 && nch <= 3;
    return t;
  endfunction

  // Stage 7: keep a candidate unless a nearby one has strictly higher pt.
  function automatic void ref_clean(input tau_t in [N_SEED], output tau_t out [N_TAU_OUT],
                                    output int ndrop);
    int k = 0;
    ndrop = 0;
    for (int o = 0; o < N_TAU_OUT; o++) out[o] = '0;
    for (int i = 0; i < N_SEED; i++) begin
      bit drop = 0;
      if (!in[i].valid) continue;
      for (int j = 0; j < N_SEED; j++)
        if (j != i && in[j].valid && in[i].pt < in[j].pt &&
            ref_dr2(int'(in[i].eta), int'(in[i].phi), int'(in[j].eta), int'(in[j].phi)) <= int'(R2_CLEAN))
          drop = 1;
      if (drop) ndrop++;
      else begin
        if (k < N_TAU_OUT) out[k] = in[i];
        k++;
      end
    end
  endfunction

  // Whole algorithm for one event; also reports mechanisms seen.
  function automatic void ref_event(input frame_t f, output tau_t out [N_TAU_OUT],
                                    output int ndrop, output tau_t taus16 [N_SEED],
                                    output int n_truncated);
    particle_t seeds [N_SEED];
    n_truncated = 0;
    ref_seeds(f, seeds);
    for (int s = 0; s < N_SEED; s++) begin
      plist_t l [N_FILT];
      plist_t m;
      int tot = 0;
      for (int j = 0; j < N_FILT; j++) begin
        int ps;
        ref_filter(f, seeds[s], j, l[j], ps);
        tot += ps;
      end
      ref_merge(l, m);
      if (l[0].size() + l[1].size() + l[2].size() + l[3].size() > MAX_CAND) n_truncated++;
      taus16[s] = ref_tau(seeds[s], m, tot);
    end
    ref_clean(taus16, out, ndrop);
  endfunction

  function automatic particle_t mk(int pt, int eta, int phi, pid_e pid, bit q);
    particle_t p = '0;
    p.valid = 1; p.pt = 16'(pt); p.eta = 12'(eta); p.phi = 11'(ref_wrap(phi));
    p.pid = pid; p.charge = q;
    return p;
  endfunction

  // Event with n_clusters tau-like clusters; 'dense' puts over 30 particles
  // into one cone. Particle positions in the frame are shuffled.
  function automatic void gen_event(output frame_t f, input int n_clusters, input bit dense);
    int n = 0;
    for (int i = 0; i < N_PART; i++) f[i] = '0;
    for (int c = 0; c < n_clusters && n < N_PART; c++) begin
      int ce = int'($urandom_range(0, 800)) - 400;
      int cp = int'($urandom_range(0, 1439)) - 720;
      int np = dense && c == 0 ? 40 : int'($urandom_range(2, 8));
      for (int k = 0; k < np && n < N_PART; k++) begin
        int r = (k < 3) ? 14 : 60;
        pid_e pid;
        case ($urandom_range(0, 4))
          0, 1: pid = PID_CH_HAD;
          2: pid = PID_PHOTON;
          3: pid = PID_NEU_HAD;
          default: pid = PID_ELECTRON;
        endcase
        if (k == 0) pid = PID_CH_HAD;
        f[n] = mk(int'($urandom_range(4, 400)) * ((k == 0) ? 4 : 1),
                  ce + int'($urandom_range(0, 2*r)) - r,
                  cp + int'($urandom_range(0, 2*r)) - r, pid, 1'($urandom_range(0, 1)));
        n++;
      end
    end
    while (n < N_PART - int'($urandom_range(0, 20))) begin
      f[n] = mk(int'($urandom_range(2, 60)), int'($urandom_range(0, 1000)) - 500,
                int'($urandom_range(0, 1439)) - 720, pid_e'($urandom_range(1, 5)),
                1'($urandom_range(0, 1)));
      n++;
    end
    // shuffle
    for (int i = N_PART - 1; i > 0; i--) begin
      int j = int'($urandom_range(0, i));
      particle_t tmp = f[i];
      f[i] = f[j]; f[j] = tmp;
    end
  endfunction
endpackage
