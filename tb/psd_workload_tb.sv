// psd_workload_tb -- the window and threshold scans run through the whole core.
//
// Runs the full core (default sizes) once per configuration:
//   * the nine integration windows T1' in {100, 150, 200} clocks, window
//     width T2'-T1' in {10, 30, 50} clocks, at a fixed threshold;
//   * three thresholds with the 600-720 ns window. The thresholds are given
//     as energies for the real detector; here they are ADC codes 3000, 4000
//     and 4800 (an assumed 10 codes per keV for the synthetic pulses).
// For every configuration a mix of neutron-like and gamma-like pulses is
// played; every event is checked against the reference, each integer PSD
// channel is compared with the real-valued ratio 128 * Q / Vpeak (it must
// be its floor), and a figure of merit is estimated from the two PSD
// distributions, FOM = |mean_n - mean_g| / (2.355 * (sigma_n + sigma_g)),
// once from the integer channels and once from the real-valued ratios. The
// two must agree within 5 %, and the neutron-like mean must exceed the
// gamma-like mean for every configuration.
module psd_workload_tb;
  import psd_pkg::*;
  import psd_tb_pkg::*;

  localparam int LAT = PSD_W + 1;
  localparam int NOISE = 40;  // uniform noise amplitude, ADC codes

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

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  function automatic real fom(const ref real v[$], const ref int kind[$]);
    real sn = 0, sg = 0, qn = 0, qg = 0, mn, mg, dn, dg;
    int nn = 0, ng = 0;
    foreach (v[k]) begin
      if (kind[k] != 0) begin sn += v[k]; qn += v[k] * v[k]; nn++; end
      else              begin sg += v[k]; qg += v[k] * v[k]; ng++; end
    end
    if (nn < 2 || ng < 2) return 0.0;
    mn = sn / nn; mg = sg / ng;
    dn = $sqrt(qn / nn - mn * mn); dg = $sqrt(qg / ng - mg * mg);
    if (dn + dg == 0.0) return 0.0;
    return (mn - mg) / (2.355 * (dn + dg));
  endfunction

  task automatic run_config(int vt, int t1, int dt, int npulses);
    automatic int s[$];
    automatic int kinds[$];     // kind of each pulse above threshold
    automatic int peaks[$];
    automatic ref_evt_t exp_evts[$];
    automatic real v_int[$], v_real[$];
    automatic int got = 0;
    automatic real f_int, f_real;
    cfg.vt = ADC_W'(vt); cfg.t1 = CNT_W'(t1); cfg.t2 = CNT_W'(t1 + dt); cfg.te = TE_DEFAULT;
    gen_idle(s, 30, 20);
    for (int p = 0; p < npulses; p++) begin
      automatic int neutron = int'($urandom_range(2) == 0);
      automatic int amp = 2000 + $urandom_range(10000);
      automatic int q0 = s.size();
      automatic int m = 0;
      gen_pulse(s, amp, (neutron != 0) ? 0.30 : 0.10, 330, NOISE);
      for (int j = q0; j < s.size(); j++) if (s[j] > m) m = s[j];
      if (m > vt) kinds.push_back(neutron);
      gen_idle(s, 20 + $urandom_range(40), 20);
    end
    ref_events(s, vt, t1, t1 + dt, int'(TE_DEFAULT), exp_evts);
    check(exp_evts.size() == kinds.size(), "reference: one event per pulse above threshold");

    adc_data = ADC_W'(s[0]);
    for (int k = 0; k < s.size() + LAT + 2; k++) begin
      @(posedge clk);
      @(negedge clk);
      if (evt_valid) begin
        if (got < exp_evts.size()) begin
          automatic ref_evt_t e = exp_evts[got];
          automatic real r = 128.0 * real'(e.q) / real'(e.vpeak);
          check(k == int'(e.cycle) + LAT, "event timing");
          check(int'(evt_psd) == ref_psd(e.q, e.vpeak, PSD_SHIFT, PSD_W), "event PSD");
          check(evt_sat || (real'(evt_psd) <= r && r < real'(evt_psd) + 1.0),
                $sformatf("PSD %0d is not the floor of %f", evt_psd, r));
          v_int.push_back(real'(evt_psd));
          v_real.push_back(r);
        end else check(0, "unexpected event");
        got++;
      end
      adc_data = ADC_W'((k + 1 < s.size()) ? s[k + 1] : 0);
    end
    check(got == exp_evts.size(), $sformatf("got %0d events, expected %0d", got, exp_evts.size()));
    if (got == kinds.size()) begin
      f_int = fom(v_int, kinds);
      f_real = fom(v_real, kinds);
      $display("V_T=%0d T1'=%0d dT=%0d: events=%0d FOM integer=%0.3f real=%0.3f",
               vt, t1, dt, got, f_int, f_real);
      check(f_int > 0.0, "neutron-like PSD not above gamma-like PSD");
      check((f_int - f_real) * (f_int - f_real) < 0.0025 * f_real * f_real, "integer and real-valued FOM differ by 5% or more");
    end
  endtask

  initial begin
    cfg = '0; adc_data = '0; hist_clear = 1'b0; hist_rd_addr = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    while (hist_busy) @(negedge clk);
    for (int a = 0; a < 3; a++)
      for (int b = 0; b < 3; b++)
        run_config(int'(VT_DEFAULT), 100 + 50 * a, 10 + 20 * b, 120);
    run_config(3000, 150, 30, 120);
    run_config(4000, 150, 30, 120);
    run_config(4800, 150, 30, 120);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
