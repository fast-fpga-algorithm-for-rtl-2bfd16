// psd_tb_pkg -- stimulus and reference model shared by the PSD testbenches.
//
// gen_pulse appends a synthetic shaped scintillator pulse to a sample
// queue: a short rise followed by a fast and a slow exponential decay,
//     v(t) = A * ((1-fs) * exp(-t/tau_f) + fs * exp(-t/tau_s)),
// plus a little uniform noise, clipped to the 14-bit range. A larger slow
// fraction fs gives a neutron-like pulse, a small one a gamma-like pulse.
//
// ref_events is the reference for the discrimination. It does not follow
// the state machine; it states the result directly: after a trigger sample
// above V_T, the pulse peak is the first running maximum (a sample strictly
// above every sample since the trigger) that no sample exceeds during the
// Te samples after it (Te+1 when the window reaches Te). The result
// belongs to the last of those samples,
// Q is the sum of the samples T1' .. T2'-1 after the peak, one sample is
// then skipped, and the next one is tested against V_T again.
package psd_tb_pkg;

  typedef struct {
    int unsigned cycle;   // sample index at which the result state is shown
    longint      q;
    int          vpeak;
  } ref_evt_t;

  function automatic void gen_pulse(ref int samples[$], input int amp,
                                    input real fs, input int len,
                                    input int noise);
    real tau_f = 15.0, tau_s = 60.0, tau_r = 1.2;
    for (int t = 0; t < len; t++) begin
      real x;
      int  v;
      x = amp * (1.0 - $exp(-t / tau_r)) *
          ((1.0 - fs) * $exp(-t / tau_f) + fs * $exp(-t / tau_s));
      v = int'(x);
      if (noise > 0) v += int'($urandom_range(2 * noise)) - noise;
      if (v < 0) v = 0;
      if (v > 16383) v = 16383;
      samples.push_back(v);
    end
  endfunction

  function automatic void gen_flat(ref int samples[$], input int amp,
                                   input int len);
    for (int t = 0; t < len; t++) samples.push_back(amp);
  endfunction

  function automatic void gen_idle(ref int samples[$], input int len,
                                   input int noise);
    for (int t = 0; t < len; t++)
      samples.push_back(noise > 0 ? int'($urandom_range(noise)) : 0);
  endfunction

  function automatic void ref_events(const ref int s[$], input int vt,
                                     input int t1, input int t2, input int te,
                                     ref ref_evt_t evts[$]);
    int n = s.size();
    int pos = 0;
    // With T2' >= Te the window runs into the end sample: the machine
    // leaves the window to the counting state first and ends one sample
    // later.
    int te_eff = (t2 >= te) ? te + 1 : te;
    evts.delete();
    while (pos < n) begin
      int trig = -1;
      int peak = -1;
      int m = -1;
      for (int j = pos; j < n; j++) if (s[j] > vt) begin trig = j; break; end
      if (trig < 0) break;
      for (int j = trig; j < n; j++) begin
        if (s[j] > m) begin m = s[j]; peak = j; end
        if (j - peak == te_eff) break;
      end
      if (peak + te_eff + 1 >= n) break;
      begin
        ref_evt_t e;
        e.cycle = peak + te_eff;
        e.vpeak = s[peak];
        e.q = 0;
        for (int k = t1; k < t2; k++) e.q += longint'(s[peak + k]);
        evts.push_back(e);
      end
      pos = peak + te_eff + 2;
    end
  endfunction

  // PSD channel the divider must produce: floor((q << shift) / vpeak),
  // clamped to the top channel.
  function automatic int ref_psd(longint q, int vpeak, int shift, int psd_w);
    longint p;
    if (vpeak == 0) return (1 << psd_w) - 1;
    p = (q << shift) / longint'(vpeak);
    if (p > (1 << psd_w) - 1) p = (1 << psd_w) - 1;
    return int'(p);
  endfunction

endpackage
