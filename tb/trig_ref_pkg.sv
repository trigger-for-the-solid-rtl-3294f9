// trig_ref_pkg -- reference model and stimulus for the trigger testbenches.
//
// chan_model predicts, clock by clock, every output of one channel_trigger
// straight from the feature definitions: a peak is counted at sample X[t]
// when X[t] > theta, X[t-1] >= X[t-2] and X[t] < X[t-1]; a sample counts for
// Time-over-Threshold when X[t] > theta; each feature is the number of such
// samples among the last W accepted samples. It keeps the flags of the last
// W accepted samples in queues and re-sums the whole window after every
// sample, so it shares no structure with the running sum of the hardware.
//
// wave_gen makes a synthetic SiPM waveform in ADC counts, with 1 photon
// avalanche (PA) taken as 100 counts: uniform baseline noise of +-8
// counts, single dark-count peaks of about 1 PA, neutron captures as a burst
// of photon peaks spread over about 60 samples (~1.2 us), and positrons as
// one large pulse a few samples long.
package trig_ref_pkg;
  import solid_trig_pkg::*;

  localparam int PA = 100;   // ADC counts per photon avalanche (test scale)

  class chan_model;
    int W;
    int xs[$];               // accepted samples, two zeros in front
    bit npf[$], totf[$];     // flags of accepted samples
    int np, tot;             // expected feature values after the last edge
    int feat_value;
    bit n_trig, pos_trig;

    function new(int window);
      W = window;
      xs = '{0, 0};
      np = 0; tot = 0; feat_value = 0; n_trig = 0; pos_trig = 0;
    endfunction

    static function int window_sum(const ref bit f[$], input int w);
      int s = 0;
      for (int i = 0; i < w && i < f.size(); i++) s += f[f.size() - 1 - i];
      return s;
    endfunction

    // One rising clock edge with the inputs that were stable before it.
    function void step(bit valid, int sample, chan_cfg_t cfg);
      int sel_v, cut, x1, x2;
      // neutron decision works on the feature values held before the edge
      if (cfg.feat_sel == FEAT_TOT) begin sel_v = tot; cut = int'(cfg.cut_tot); end
      else                          begin sel_v = np;  cut = int'(cfg.cut_np);  end
      feat_value = sel_v;
      n_trig     = (sel_v > cut);
      pos_trig   = valid && (sample > int'(cfg.theta_pos));
      if (valid) begin
        x1 = xs[xs.size() - 1];
        x2 = xs[xs.size() - 2];
        npf.push_back((sample > int'(cfg.theta_np)) && (x1 >= x2) && (sample < x1));
        totf.push_back(sample > int'(cfg.theta_tot));
        xs.push_back(sample);
        if (xs.size() > 4) void'(xs.pop_front());
        np  = window_sum(npf, W);
        tot = window_sum(totf, W);
        if (npf.size()  > W) void'(npf.pop_front());
        if (totf.size() > W) void'(totf.pop_front());
      end
    endfunction

    function void reset();
      xs = '{0, 0};
      npf.delete(); totf.delete();
      np = 0; tot = 0; feat_value = 0; n_trig = 0; pos_trig = 0;
    endfunction
  endclass

  class wave_gen;
    int fut[64];             // pulses already scheduled for coming samples
    int n_neutron, n_positron, n_dark;

    function new();
      foreach (fut[i]) fut[i] = 0;
      n_neutron = 0; n_positron = 0; n_dark = 0;
    endfunction

    // Add a pulse of peak height a (counts) starting d samples ahead.
    function void add_pulse(int d, int a, int len);
      int v = a;
      for (int i = 0; i < len && d + i < 64; i++) begin
        fut[d + i] += v;
        v = v / 2;
      end
    endfunction

    function void start_neutron();
      int n = 15 + int'($urandom_range(0, 15));
      for (int k = 0; k < n; k++)
        add_pulse(int'($urandom_range(0, 59)), PA / 2 + int'($urandom_range(0, 3 * PA)), 3);
      n_neutron++;
    endfunction

    function void start_positron();
      add_pulse(0, 30 * PA + int'($urandom_range(0, 20 * PA)), 5);
      n_positron++;
    endfunction

    function void start_dark();
      add_pulse(0, PA / 2 + int'($urandom_range(0, PA)), 2);
      n_dark++;
    endfunction

    // Next sample; p_* are per-mille chances of starting an event here.
    function int next(int p_neutron, int p_positron, int p_dark);
      int s;
      if (int'($urandom_range(0, 999)) < p_neutron)  start_neutron();
      if (int'($urandom_range(0, 999)) < p_positron) start_positron();
      if (int'($urandom_range(0, 999)) < p_dark)     start_dark();
      s = fut[0] + int'($urandom_range(0, 16)) - 8;
      for (int i = 0; i < 63; i++) fut[i] = fut[i + 1];
      fut[63] = 0;
      if (s > 8191) s = 8191;
      if (s < -8192) s = -8192;
      return s;
    endfunction
  endclass

endpackage
