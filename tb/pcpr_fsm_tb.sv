// pcpr_fsm_tb -- self-checking test of the discrimination state machine.
//
// Builds sample streams of neutron-like and gamma-like pulses with noise,
// pile-up (a larger pulse in the tail of a smaller one, which must restart
// the peak search), a pulse that never reaches the threshold and a plateau
// (equal samples after the peak). Each stream is played one sample per
// clock, and every result (pulse_valid with Q and Vpeak) is compared with
// the reference of psd_tb_pkg, including the clock on which it appears.
// Runs the paper's window (T1'=150, T2'=180, Te=250) and a short window.

module pcpr_fsm_tb;
  import psd_pkg::*;
  import psd_tb_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic [ADC_W-1:0] vt, vi;
  logic [CNT_W-1:0] t1, t2, te;
  logic pulse_valid, trig_o, repeak_o, end_o;
  logic [Q_W-1:0] pulse_q;
  logic [ADC_W-1:0] pulse_vpeak;
  pcpr_state_t state;

  int checks = 0;
  int failures = 0;
  int n_trig = 0, n_repeak = 0, n_end = 0, n_integ = 0;

  always #2 clk = ~clk;

  pcpr_fsm dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic run_case(int vt_v, int t1_v, int t2_v, int te_v, int npulses);
    int s[$];
    ref_evt_t exp_evts[$];
    ref_evt_t got;
    int ngot = 0;
    vt = ADC_W'(vt_v); t1 = CNT_W'(t1_v); t2 = CNT_W'(t2_v); te = CNT_W'(te_v);
    gen_idle(s, 20, 20);
    for (int p = 0; p < npulses; p++) begin
      int kind = $urandom_range(5);
      int amp  = 1500 + $urandom_range(9000);
      case (kind)
        0, 1: gen_pulse(s, amp, 0.10, te_v + 40 + $urandom_range(60), 4);  // gamma
        2, 3: gen_pulse(s, amp, 0.30, te_v + 40 + $urandom_range(60), 4);  // neutron
        4: begin                                                           // pile-up
          gen_pulse(s, amp / 2, 0.3, 10 + $urandom_range(te_v / 2), 4);
          gen_pulse(s, amp, 0.1, te_v + 60, 4);
        end
        default: begin                                                     // plateau, sub-threshold
          gen_flat(s, amp, 5);
          gen_pulse(s, amp, 0.2, te_v + 40, 0);
          gen_pulse(s, vt_v / 2, 0.1, 30, 0);
        end
      endcase
      gen_idle(s, $urandom_range(30), 20);
    end
    gen_idle(s, 20, 0);
    ref_events(s, vt_v, t1_v, t2_v, te_v, exp_evts);

    @(negedge clk);
    rst_n = 1'b0; vi = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    vi = ADC_W'(s[0]);
    for (int k = 0; k < s.size(); k++) begin
      @(posedge clk);
      @(negedge clk);
      if (state == S3_INTEG) n_integ++;
      if (pulse_valid) begin
        if (ngot < exp_evts.size()) begin
          got = exp_evts[ngot];
          check(k == int'(got.cycle), $sformatf("event %0d at sample %0d, expected %0d", ngot, k, got.cycle));
          check(longint'(pulse_q) == got.q, $sformatf("event %0d Q=%0d expected %0d", ngot, pulse_q, got.q));
          check(int'(pulse_vpeak) == got.vpeak, $sformatf("event %0d Vpeak=%0d expected %0d", ngot, pulse_vpeak, got.vpeak));
        end else begin
          check(0, $sformatf("unexpected event at sample %0d", k));
        end
        ngot++;
      end
      // The strobes decode the transition the next sample causes.
      if (k + 1 < s.size()) begin
        vi = ADC_W'(s[k + 1]);
        #1;
        if (trig_o) n_trig++;
        if (repeak_o) n_repeak++;
        if (end_o) n_end++;
      end
    end
    check(ngot == exp_evts.size(), $sformatf("got %0d events, expected %0d", ngot, exp_evts.size()));
  endtask

  initial begin
    vi = '0; vt = '0; t1 = '0; t2 = '0; te = '0;
    run_case(200, 150, 180, 250, 40);   // the paper's window
    run_case(200, 20, 30, 40, 60);      // short window
    run_case(500, 4, 9, 12, 60);        // very short window, noise matters
    check(n_trig > 0, "no trigger seen");
    check(n_repeak > 0, "no peak restart seen");
    check(n_end > 0, "no pulse end seen");
    check(n_integ > 0, "no integration seen");
    $display("mechanisms: trigger=%0d peak_restart=%0d pulse_end=%0d integ_clocks=%0d",
             n_trig, n_repeak, n_end, n_integ);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
