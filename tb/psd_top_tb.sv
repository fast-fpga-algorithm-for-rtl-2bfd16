// psd_top_tb -- end-to-end test of the online PSD core at its default sizes.
//
// Phase 1, the discrimination run: isolated gamma-like (slow fraction 0.10)
// and neutron-like (slow fraction 0.30) pulses with random heights and
// noise, played with the window T1'=150, T2'=180, Te=250 clocks (600-720 ns
// after the peak, 1000 ns pulse length). Every event's PSD channel, peak
// and timing is checked against the reference, the PSD spectrum read back
// from the chip is checked channel by channel, and the mean PSD of the
// neutron-like pulses must lie above that of the gamma-like ones.
// Phase 2, the corner cases: pile-up (peak restart), a flat pulse whose
// PSD overflows the 1024 channels (clamp), a pulse that starts right after
// the previous pulse's result (dead time of one sample), and a spectrum
// clear while events arrive (dropped results). Each mechanism is counted
// and must occur at least once.
module psd_top_tb;
  import psd_pkg::*;
  import psd_tb_pkg::*;

  localparam int BINS = 2 ** PSD_W;
  localparam int LAT  = PSD_W + 1;   // pulse result state -> event

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  psd_cfg_t cfg;
  logic [ADC_W-1:0] adc_data;
  logic evt_valid, evt_sat;
  logic [PSD_W-1:0] evt_psd;
  logic [ADC_W-1:0] evt_vpeak;
  logic hist_clear, hist_busy, hist_dropped;
  logic [PSD_W-1:0] hist_rd_addr;
  logic [HIST_W-1:0] hist_rd_data;
  pcpr_state_t state;
  logic trig, repeak, pulse_end;

  psd_top dut (.*);

  always #2 clk = ~clk;

  int checks = 0;
  int failures = 0;
  int model [BINS];
  int n_trig = 0, n_repeak = 0, n_integ = 0, n_end = 0, n_sat = 0;
  int n_drop = 0, n_clear = 0, n_b2b = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // Play a sample stream and check each event against the reference.
  // psd_out returns the PSD of each event in order. When clear_at >= 0, a
  // spectrum clear is requested at that sample.
  task automatic play(const ref int s[$], ref int psd_out[$], input int clear_at);
    ref_evt_t exp_evts[$];
    int got = 0;
    int n = s.size();
    ref_events(s, int'(cfg.vt), int'(cfg.t1), int'(cfg.t2), int'(cfg.te), exp_evts);
    psd_out.delete();
    adc_data = ADC_W'(s[0]);
    for (int k = 0; k < n + LAT + 2; k++) begin
      hist_clear = (k == clear_at);
      if (hist_clear) n_clear++;
      @(posedge clk);
      @(negedge clk);
      if (state == S3_INTEG) n_integ++;
      if (evt_valid) begin
        if (got < exp_evts.size()) begin
          ref_evt_t e = exp_evts[got];
          int p = ref_psd(e.q, e.vpeak, PSD_SHIFT, PSD_W);
          check(k == int'(e.cycle) + LAT, $sformatf("event %0d at sample %0d, expected %0d", got, k, e.cycle + LAT));
          check(int'(evt_psd) == p, $sformatf("event %0d PSD=%0d expected %0d", got, evt_psd, p));
          check(int'(evt_vpeak) == e.vpeak, $sformatf("event %0d Vpeak=%0d expected %0d", got, evt_vpeak, e.vpeak));
          check(evt_sat == (((e.q << PSD_SHIFT) / longint'(e.vpeak)) >= longint'(BINS)), "clamp flag");
        end else begin
          check(0, $sformatf("unexpected event at sample %0d", k));
        end
        check(hist_dropped == hist_busy, "drop flag differs from clear state");
        if (hist_dropped) n_drop++;
        else model[evt_psd]++;
        if (evt_sat) n_sat++;
        psd_out.push_back(int'(evt_psd));
        got++;
      end
      adc_data = ADC_W'((k + 1 < n) ? s[k + 1] : 0);
      #1;
      if (trig) n_trig++;
      if (repeak) n_repeak++;
      if (pulse_end) n_end++;
    end
    hist_clear = 1'b0;
    check(got == exp_evts.size(), $sformatf("got %0d events, expected %0d", got, exp_evts.size()));
  endtask

  task automatic read_spectrum(string tag);
    int bad = 0;
    for (int b = 0; b < BINS; b++) begin
      @(negedge clk) hist_rd_addr = PSD_W'(b);
      @(negedge clk);
      if (int'(hist_rd_data) != model[b]) begin
        bad++;
        if (bad < 5) $display("%s: channel %0d reads %0d, expected %0d", tag, b, hist_rd_data, model[b]);
      end
    end
    check(bad == 0, $sformatf("%s: %0d spectrum channels wrong", tag, bad));
  endtask

  initial begin
    automatic int s[$];
    automatic int psd[$];
    automatic int kinds[$];
    automatic real sum_n = 0.0, sum_g = 0.0;
    automatic int cnt_n = 0, cnt_g = 0;

    cfg.vt = VT_DEFAULT; cfg.t1 = T1_DEFAULT; cfg.t2 = T2_DEFAULT; cfg.te = TE_DEFAULT;
    adc_data = '0; hist_clear = 1'b0; hist_rd_addr = '0;
    foreach (model[b]) model[b] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    while (hist_busy) @(negedge clk);

    // Phase 1: discrimination run
    gen_idle(s, 50, 20);
    for (int p = 0; p < 200; p++) begin
      automatic int neutron = int'($urandom_range(2) == 0);
      gen_pulse(s, 2000 + $urandom_range(10000), (neutron != 0) ? 0.30 : 0.10, 330, 4);
      gen_idle(s, 20 + $urandom_range(40), 20);
      kinds.push_back(neutron);
    end
    play(s, psd, -1);
    check(psd.size() == kinds.size(), "one event per isolated pulse");
    for (int p = 0; p < psd.size() && p < kinds.size(); p++) begin
      if (kinds[p] != 0) begin sum_n += psd[p]; cnt_n++; end
      else          begin sum_g += psd[p]; cnt_g++; end
    end
    if (cnt_n > 0 && cnt_g > 0) begin
      $display("mean PSD: neutron-like %0.1f (%0d pulses), gamma-like %0.1f (%0d pulses)",
               sum_n / cnt_n, cnt_n, sum_g / cnt_g, cnt_g);
      check(sum_n / cnt_n > 1.5 * (sum_g / cnt_g), "neutron and gamma PSD not separated");
    end else check(0, "no pulses of one kind");
    read_spectrum("phase 1");

    // Phase 2: corner cases, spectrum cleared while events arrive
    s.delete();
    gen_idle(s, 20, 20);
    for (int r = 0; r < 4; r++) begin
      automatic int q0, p0;
      // pile-up: a larger pulse in the tail of a smaller one
      gen_pulse(s, 3000, 0.3, 60 + 10 * r, 4);
      gen_pulse(s, 8000, 0.1, 330, 4);
      gen_idle(s, 30, 20);
      // flat pulse: PSD above the top channel
      gen_flat(s, 3000 + 100 * r, 300);
      gen_idle(s, 30, 20);
      // back-to-back: next pulse right after the result sample is skipped
      q0 = s.size();
      gen_pulse(s, 6000, 0.2, 200, 0);
      p0 = q0;
      for (int j = q0; j < s.size(); j++) if (s[j] > s[p0]) p0 = j;
      while (s.size() < p0 + int'(cfg.te) + 2) s.push_back(50);
      while (s.size() > p0 + int'(cfg.te) + 2) void'(s.pop_back());
      gen_pulse(s, 7000, 0.2, 330, 0);
      n_b2b++;
      gen_idle(s, 30, 20);
    end
    play(s, psd, 300);
    while (hist_busy) @(negedge clk);
    foreach (model[b]) model[b] = 0;
    // events after the clear walk ended were counted again
    begin

      automatic ref_evt_t ev[$];
      ref_events(s, int'(cfg.vt), int'(cfg.t1), int'(cfg.t2), int'(cfg.te), ev);
      foreach (ev[i]) if (int'(ev[i].cycle) + LAT > 300 + BINS + 1) model[psd[i]]++;
    end
    read_spectrum("phase 2");

    check(n_trig > 0, "no trigger");
    check(n_repeak > 0, "no peak restart");
    check(n_integ > 0, "no window integration");
    check(n_end > 0, "no pulse end");
    check(n_sat > 0, "no clamped PSD");
    check(n_drop > 0, "no result dropped during clear");
    check(n_clear > 0, "no spectrum clear");
    check(n_b2b > 0, "no back-to-back pulse");
    $display("mechanisms: trigger=%0d peak_restart=%0d integ_clocks=%0d pulse_end=%0d clamp=%0d clear=%0d dropped=%0d back_to_back=%0d",
             n_trig, n_repeak, n_integ, n_end, n_sat, n_clear, n_drop, n_b2b);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
