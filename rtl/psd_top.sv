// psd_top -- online neutron/gamma pulse-shape discrimination core.
//
// What it does: takes the 250 MSPS, 14-bit ADC sample stream of a shaped
// scintillator pulse and, for every pulse above the trigger threshold,
// produces the partial charge-to-peak ratio
//     PSD = (sum of samples T1' .. T2'-1 clocks after the peak) / Vpeak,
// a number that separates neutrons (slow light component, large PSD) from
// gamma rays (small PSD). Each result is sent out as an event and counted
// in a 1024-channel PSD spectrum held on chip.
//
// How it works: three blocks in a row.
//   pcpr_fsm      finds the peak and integrates the window while the pulse
//                 arrives (no waveform buffer), ends the pulse at Te.
//   psd_divider   pipelined (Q << 7) / Vpeak, 1024 channels, clamped.
//   psd_histogram one counter per PSD channel, host read and clear port.
//
// Interface: clk (the ADC sample clock, 4 ns), rst_n (synchronous, active
// low), cfg (threshold V_T and window T1', T2', Te, in clocks), adc_data
// (unsigned, baseline at zero). Event output: evt_valid, evt_psd,
// evt_vpeak (pulse height, for an energy cut downstream), evt_sat. Spectrum
// port: hist_clear, hist_busy, hist_rd_addr, hist_rd_data (one clock read
// latency), hist_dropped. Status: state and single-clock strobes of the
// state machine.
//
// Timing: one sample per clock, no stall. An event leaves PSD_W + 1 = 11
// clocks after the clock in which the state machine shows its result
// state. The state machine misses one sample per pulse (the clock of its
// result state) and is ready for the next trigger right after.
//
// The partition into a discrimination state machine and a division, the
// 1024 channels and the sample format follow the paper; the pipelined
// divider, the spectrum memory's organisation and the port set are this
// design's own.
module psd_top
  import psd_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  psd_cfg_t           cfg,
  input  logic [ADC_W-1:0]   adc_data,
  // per-event results
  output logic               evt_valid,
  output logic [PSD_W-1:0]   evt_psd,
  output logic [ADC_W-1:0]   evt_vpeak,
  output logic               evt_sat,
  // spectrum port
  input  logic               hist_clear,
  output logic               hist_busy,
  output logic               hist_dropped,
  input  logic [PSD_W-1:0]   hist_rd_addr,
  output logic [HIST_W-1:0]  hist_rd_data,
  // status
  output pcpr_state_t        state,
  output logic               trig,
  output logic               repeak,
  output logic               pulse_end
);

  pulse_t pulse;
  logic   pulse_valid;

  pcpr_fsm u_fsm (
    .clk         (clk),
    .rst_n       (rst_n),
    .vt          (cfg.vt),
    .t1          (cfg.t1),
    .t2          (cfg.t2),
    .te          (cfg.te),
    .vi          (adc_data),
    .pulse_valid (pulse_valid),
    .pulse_q     (pulse.q),
    .pulse_vpeak (pulse.vpeak),
    .state       (state),
    .trig_o      (trig),
    .repeak_o    (repeak),
    .end_o       (pulse_end)
  );

  psd_divider u_div (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (pulse_valid),
    .in_q      (pulse.q),
    .in_vpeak  (pulse.vpeak),
    .out_valid (evt_valid),
    .out_psd   (evt_psd),
    .out_vpeak (evt_vpeak),
    .out_sat   (evt_sat)
  );

  psd_histogram u_hist (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (evt_valid),
    .in_bin   (evt_psd),
    .clear    (hist_clear),
    .busy     (hist_busy),
    .dropped  (hist_dropped),
    .rd_addr  (hist_rd_addr),
    .rd_data  (hist_rd_data)
  );

endmodule
