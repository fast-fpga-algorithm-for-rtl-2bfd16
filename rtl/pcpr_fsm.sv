// pcpr_fsm -- partial charge-to-peak ratio state machine.
//
// What it does: watches the ADC sample stream, one sample per clock, and for
// every pulse that crosses the trigger threshold V_T it finds the pulse peak
// Vpeak and sums the samples that lie between T1' and T2' clocks after the
// peak into the partial integral Q. When the pulse has lasted Te clocks after
// its peak, it presents (Q, Vpeak) for one clock so that PSD = Q / Vpeak can
// be computed. The whole waveform is never stored: three registers (peak,
// time since peak i, integral Q) do all the work while the pulse arrives.
//
// How it works: five states, as in the algorithm description.
//   S0 idle     Vpeak=0, i=0, Q=0.   Vi > V_T          -> S1
//   S1 peak     Vpeak=Vi, i=0, Q=0.  Vi > Vpeak        -> S1, else -> S2
//   S2 count    i=i+1.               Vi > Vpeak        -> S1
//                                    d in [T1', T2')   -> S3
//                                    d >= Te           -> S4, else S2
//   S3 integ    i=i+1, Q=Q+Vi.       Vi > Vpeak        -> S1
//                                    d in [T1', T2')   -> S3, else -> S2
//   S4 calc     result valid.                          -> S0
// Here d = i+1 is the distance, in clocks, of the incoming sample from the
// peak sample. The state register names the state the latest sample was
// assigned to, and each state's register action is applied with that sample
// (a Moore machine, like the state diagram). A rising sample anywhere after
// the trigger restarts the peak search: i and Q are cleared and the peak
// becomes the new sample.
//
// Interface: clk, active-low synchronous reset rst_n, cfg (V_T, T1', T2', Te,
// held constant while a pulse is processed), vi (unsigned ADC sample, the
// baseline already at zero). Outputs: pulse_valid for one clock in S4 with
// pulse.q / pulse.vpeak, the current state, and single-clock strobes for
// trigger, peak restart and end of pulse.
//
// Timing: the sample Te clocks after the peak moves the machine to S4, so
// pulse_valid rises on the clock edge that takes that sample, Te clocks
// after the edge that took the peak. The sample that arrives while the
// machine sits in S4 is the only one not looked at; the sample after it is
// already tested against V_T again. When the window reaches the end
// (T2' = Te), the sample at distance Te leaves the window to S2 first, as
// the diagram has no S3 -> S4 arrow, and the pulse ends one sample later.
//
// Following the paper: the states S0-S4, their register actions and
// transition conditions, and the three-register scheme. This design's own
// choices: the half-open window [T1', T2') so that exactly T2'-T1' samples
// are summed; equality Vi == Vpeak counts as "not above the peak"; the end
// test d >= Te (the state diagram says i == Te, the text "exceeds"); a
// rising sample takes priority over the window and end tests; the counter i
// saturates at its maximum value.
module pcpr_fsm
  import psd_pkg::*;
#(
  parameter int unsigned ADC_W_P = ADC_W,
  parameter int unsigned CNT_W_P = CNT_W,
  parameter int unsigned Q_W_P   = ADC_W_P + CNT_W_P
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [ADC_W_P-1:0]   vt,
  input  logic [CNT_W_P-1:0]   t1,
  input  logic [CNT_W_P-1:0]   t2,
  input  logic [CNT_W_P-1:0]   te,
  input  logic [ADC_W_P-1:0]   vi,
  output logic                 pulse_valid,
  output logic [Q_W_P-1:0]     pulse_q,
  output logic [ADC_W_P-1:0]   pulse_vpeak,
  output pcpr_state_t          state,
  output logic                 trig_o,     // S0 -> S1
  output logic                 repeak_o,   // S2/S3 -> S1
  output logic                 end_o       // S2 -> S4
);

  pcpr_state_t          state_q, state_d;
  logic [ADC_W_P-1:0]   vpeak_q;
  logic [CNT_W_P-1:0]   i_q;
  logic [Q_W_P-1:0]     q_q;

  logic [CNT_W_P-1:0]   d;        // distance of the incoming sample from the peak
  logic                 above_peak;
  logic                 in_win;
  logic                 at_end;

  always_comb begin
    d          = (i_q == '1) ? i_q : i_q + 1'b1;
    above_peak = vi > vpeak_q;
    in_win     = (d >= t1) && (d < t2);
    at_end     = d >= te;
  end

  always_comb begin
    state_d = state_q;
    unique case (state_q)
      S0_IDLE:  state_d = (vi > vt) ? S1_PEAK : S0_IDLE;
      S1_PEAK:  state_d = above_peak ? S1_PEAK : S2_COUNT;
      S2_COUNT: begin
        if (above_peak)  state_d = S1_PEAK;
        else if (in_win) state_d = S3_INTEG;
        else if (at_end) state_d = S4_CALC;
        else             state_d = S2_COUNT;
      end
      S3_INTEG: begin
        if (above_peak)  state_d = S1_PEAK;
        else if (in_win) state_d = S3_INTEG;
        else             state_d = S2_COUNT;
      end
      S4_CALC:  state_d = S0_IDLE;
      default:  state_d = S0_IDLE;
    endcase
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state_q <= S0_IDLE;
      vpeak_q <= '0;
      i_q     <= '0;
      q_q     <= '0;
    end else begin
      state_q <= state_d;
      unique case (state_d)
        S0_IDLE: begin
          vpeak_q <= '0;
          i_q     <= '0;
          q_q     <= '0;
        end
        S1_PEAK: begin
          vpeak_q <= vi;
          i_q     <= '0;
          q_q     <= '0;
        end
        S2_COUNT: i_q <= d;
        S3_INTEG: begin
          i_q <= d;
          q_q <= q_q + Q_W_P'(vi);
        end
        default: ;  // S4: hold Q and Vpeak for the result
      endcase
    end
  end

  assign state       = state_q;
  assign pulse_valid = (state_q == S4_CALC);
  assign pulse_q     = q_q;
  assign pulse_vpeak = vpeak_q;
  assign trig_o      = (state_q == S0_IDLE) && (state_d == S1_PEAK);
  assign repeak_o    = ((state_q == S2_COUNT) || (state_q == S3_INTEG)) && (state_d == S1_PEAK);
  assign end_o       = (state_q == S2_COUNT) && (state_d == S4_CALC);

  // A finished pulse always has a peak above the threshold, so the divisor
  // of the PSD division is never zero.
  a_peak_nonzero: assert property (@(posedge clk) disable iff (!rst_n)
    pulse_valid |-> (pulse_vpeak > vt));
  // The result is presented for exactly one clock.
  a_one_clock: assert property (@(posedge clk) disable iff (!rst_n)
    pulse_valid |=> !pulse_valid);

endmodule
