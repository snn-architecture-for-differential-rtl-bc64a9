// snn_ref_pkg: reference model of one layer, used by the testbenches.
//
// It states the layer's function without the hardware's mechanics: every
// input train is turned into absolute spike times, the earliest head time over
// all synapses is the next event, the heads at that time are consumed
// together, and each neuron applies decay, weight sum, thresholding with
// reset-by-subtraction and differential-time encoding with overflow words.
// The model processes events while every synapse still has a head, which is
// also exactly when the hardware can process one.
package snn_ref_pkg;

  typedef int unsigned word_q_t[$];

  typedef struct {
    int dt_w;
    int decay_shift;
    int th_high;
    bit use_low;
    int th_low;
    int p_w;
  } ref_cfg_t;

  // statistics of one reference run
  typedef struct {
    int events;
    int ovf_events;       // events made only of overflow heads
    int tie_events;       // events with more than one head
    int ovf_out;          // overflow words sent
    int zero_dt_out;      // spike words with dt == 0 (extra amplitude)
    int neg_out;          // negative spike words
    int pos_out;          // positive spike words
  } ref_stats_t;

  function automatic longint decay(longint p, longint sh, int p_w);
    longint m;
    m = (p < 0) ? -p : p;
    if (sh >= p_w) m = 0;
    else           m = m >> sh;
    return (p < 0) ? -m : m;
  endfunction

  // w[j*n_in + i] is the weight of synapse i of neuron j.
  function automatic void run_layer(input ref_cfg_t c, input int n_in, input int n_out,
                                    input int w[], input word_q_t in_tr[],
                                    output word_q_t out_tr[], output ref_stats_t st);
    longint ovf = (longint'(1) << c.dt_w) - 1;
    longint all1 = (longint'(1) << (c.dt_w + 1)) - 1;
    longint pmax = (longint'(1) << (c.p_w - 1)) - 1;
    longint pmin = -pmax - 1;
    longint t_abs[][$];
    bit     s_ovf[][$];
    bit     s_sgn[][$];
    longint p[], sl[], su[];
    longint prev, tmin, dt, acc, eff, x;
    bit     has_spike, done;
    int     ngroup;
    bit     grp[];

    st = '{default: 0};
    out_tr = new[n_out];
    t_abs = new[n_in]; s_ovf = new[n_in]; s_sgn = new[n_in];
    p = new[n_out]; sl = new[n_out]; su = new[n_out]; grp = new[n_in];
    foreach (p[j]) begin p[j] = 0; sl[j] = 0; su[j] = 0; end
    for (int i = 0; i < n_in; i++) begin
      longint t = 0;
      foreach (in_tr[i][k]) begin
        if (in_tr[i][k] == all1) begin
          t += ovf; t_abs[i].push_back(t); s_ovf[i].push_back(1); s_sgn[i].push_back(0);
        end else begin
          t += in_tr[i][k] & ovf;
          t_abs[i].push_back(t); s_ovf[i].push_back(0);
          s_sgn[i].push_back(((in_tr[i][k] >> c.dt_w) & 1) != 0);
        end
      end
    end
    prev = 0;
    forever begin
      done = 0;
      for (int i = 0; i < n_in; i++) if (t_abs[i].size() == 0) done = 1;
      if (done) break;
      tmin = t_abs[0][0];
      for (int i = 1; i < n_in; i++) if (t_abs[i][0] < tmin) tmin = t_abs[i][0];
      has_spike = 0; ngroup = 0;
      for (int i = 0; i < n_in; i++) begin
        grp[i] = (t_abs[i][0] == tmin);
        if (grp[i]) begin ngroup++; if (!s_ovf[i][0]) has_spike = 1; end
      end
      dt = tmin - prev;
      st.events++;
      if (!has_spike) st.ovf_events++;
      if (ngroup > 1) st.tie_events++;
      for (int j = 0; j < n_out; j++) begin
        acc = 0;
        for (int i = 0; i < n_in; i++)
          if (grp[i] && !s_ovf[i][0]) acc += s_sgn[i][0] ? -w[j*n_in+i] : w[j*n_in+i];
        sl[j] += dt;
        if (sl[j] >= ovf) begin
          out_tr[j].push_back(int'(all1)); sl[j] -= ovf; st.ovf_out++;
        end
        if (has_spike) begin
          eff = su[j] + dt;
          x = decay(p[j], eff * c.decay_shift, c.p_w) + acc;
          if (x > pmax) x = pmax;
          if (x < pmin) x = pmin;
          p[j] = x; su[j] = 0;
        end else begin
          su[j] += dt; if (su[j] > 65535) su[j] = 65535;
        end
        forever begin
          if (p[j] >= c.th_high) begin
            out_tr[j].push_back(int'(sl[j])); p[j] -= c.th_high;
            if (sl[j] == 0) st.zero_dt_out++;
            st.pos_out++; sl[j] = 0;
          end else if (c.use_low && p[j] <= c.th_low) begin
            out_tr[j].push_back(int'((longint'(1) << c.dt_w) | sl[j])); p[j] -= c.th_low;
            if (sl[j] == 0) st.zero_dt_out++;
            st.neg_out++; sl[j] = 0;
          end else break;
        end
      end
      for (int i = 0; i < n_in; i++)
        if (grp[i]) begin
          void'(t_abs[i].pop_front()); void'(s_ovf[i].pop_front()); void'(s_sgn[i].pop_front());
        end
      prev = tmin;
    end
  endfunction

endpackage
