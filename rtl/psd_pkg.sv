// psd_pkg -- shared types and constants of the online neutron/gamma
// pulse-shape discrimination (PSD) core.
//
// The core computes, for every detector pulse, the partial charge-to-peak
// ratio PSD = (sum of the samples from T1' to T2' after the peak) / Vpeak.
// The ADC width (14 bit), the 250 MHz sample clock, the 1024-channel PSD
// resolution and the window T1'=150, T2'=180 clocks follow the paper's main
// configuration. The counter width, the integral width, the left shift
// applied before the division, the pulse length Te=250 and the default
// trigger threshold are this design's own choices.
package psd_pkg;

  // ADC sample width (250 MSPS, 14 bit ADC).
  localparam int unsigned ADC_W = 14;
  // Width of the time-since-peak counter i; holds Te up to 511 clocks.
  localparam int unsigned CNT_W = 9;
  // Width of the partial integral Q: at most 2**CNT_W samples of ADC_W bits.
  localparam int unsigned Q_W   = ADC_W + CNT_W;
  // PSD channel number width: 1024 channels.
  localparam int unsigned PSD_W = 10;
  // Left shift applied to Q before the division (integer "precision").
  localparam int unsigned PSD_SHIFT = 7;
  // Spectrum channel count width.
  localparam int unsigned HIST_W = 32;

  // Default run-time settings (clock counts at 4 ns per clock).
  localparam logic [ADC_W-1:0] VT_DEFAULT = ADC_W'(200);
  localparam logic [CNT_W-1:0] T1_DEFAULT = CNT_W'(150);  // 600 ns
  localparam logic [CNT_W-1:0] T2_DEFAULT = CNT_W'(180);  // 720 ns
  localparam logic [CNT_W-1:0] TE_DEFAULT = CNT_W'(250);  // ~1000 ns tail

  // States of the discrimination state machine (S0..S4 of the algorithm).
  typedef enum logic [2:0] {
    S0_IDLE  = 3'd0,  // below threshold: Vpeak = 0, i = 0, Q = 0
    S1_PEAK  = 3'd1,  // new peak: Vpeak = Vi, i = 0, Q = 0
    S2_COUNT = 3'd2,  // after the peak, outside the window: i = i + 1
    S3_INTEG = 3'd3,  // inside the window: i = i + 1, Q = Q + Vi
    S4_CALC  = 3'd4   // pulse over: PSD = Q / Vpeak
  } pcpr_state_t;

  // Run-time configuration of the discrimination.
  typedef struct packed {
    logic [ADC_W-1:0] vt;  // trigger threshold V_T
    logic [CNT_W-1:0] t1;  // first integrated clock after the peak, T1'
    logic [CNT_W-1:0] t2;  // first clock after the window, T2'
    logic [CNT_W-1:0] te;  // pulse length after the peak, Te
  } psd_cfg_t;

  // One finished pulse, handed from the state machine to the divider.
  typedef struct packed {
    logic [Q_W-1:0]   q;      // partial integral
    logic [ADC_W-1:0] vpeak;  // pulse peak
  } pulse_t;

endpackage
