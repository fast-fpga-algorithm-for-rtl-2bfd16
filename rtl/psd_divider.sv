// psd_divider -- fixed-point PSD division, PSD = (Q << SHIFT) / Vpeak.
//
// What it does: turns the partial integral Q and the pulse peak Vpeak of one
// pulse into a PSD channel number between 0 and 2**PSD_W - 1 (1024 channels
// by default). The integral is shifted left before the division so that the
// small ratio Q / Vpeak spreads over the channel range; a quotient that would
// not fit (or a zero peak) is clamped to the top channel and flagged.
//
// How it works: a fully pipelined restoring divider. The input stage forms
// the dividend Q << SHIFT and tests for overflow (dividend >= Vpeak <<
// PSD_W). Then one stage per quotient bit, most significant first, compares
// the partial remainder with Vpeak << k and subtracts when it fits. A new
// division can start on every clock, so the divider never adds dead time.
//
// Interface: in_valid / in_q / in_vpeak; out_valid / out_psd / out_vpeak
// (the peak travels along with the result) / out_sat (clamped). No
// back-pressure: every accepted input comes out.
//
// Timing: latency PSD_W + 1 clocks (11 by default), throughput one result
// per clock.
//
// Following the paper: PSD is the integral divided by the peak, the integral
// is shifted left before the division, and there are 1024 channels. This
// design's own choices: the shift amount (7), the clamping of overflows and
// the pipelined restoring algorithm.
module psd_divider #(
  parameter int unsigned Q_W   = psd_pkg::Q_W,
  parameter int unsigned ADC_W = psd_pkg::ADC_W,
  parameter int unsigned PSD_W = psd_pkg::PSD_W,
  parameter int unsigned SHIFT = psd_pkg::PSD_SHIFT
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  input  logic [Q_W-1:0]     in_q,
  input  logic [ADC_W-1:0]   in_vpeak,
  output logic               out_valid,
  output logic [PSD_W-1:0]   out_psd,
  output logic [ADC_W-1:0]   out_vpeak,
  output logic               out_sat
);

  // Wide enough for the shifted dividend and for Vpeak << PSD_W.
  localparam int unsigned DVD_W = Q_W + SHIFT;
  localparam int unsigned R_W   = ((DVD_W > ADC_W + PSD_W) ? DVD_W : ADC_W + PSD_W) + 1;

  // Pipeline registers; index 0 is the input stage, index PSD_W the output.
  logic             vld [PSD_W+1];
  logic             sat [PSD_W+1];
  logic [R_W-1:0]   rem [PSD_W+1];
  logic [ADC_W-1:0] dvs [PSD_W+1];
  logic [PSD_W-1:0] quo [PSD_W+1];

  logic [R_W-1:0] dividend;
  logic [R_W-1:0] limit;
  always_comb begin
    dividend = R_W'(in_q) << SHIFT;
    limit    = R_W'(in_vpeak) << PSD_W;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      vld[0] <= 1'b0;
    end else begin
      vld[0] <= in_valid;
    end
    sat[0] <= (in_vpeak == '0) || (dividend >= limit);
    rem[0] <= dividend;
    dvs[0] <= in_vpeak;
    quo[0] <= '0;
  end

  for (genvar s = 1; s <= PSD_W; s++) begin : g_stage
    localparam int unsigned K = PSD_W - s;  // quotient bit decided here
    logic [R_W-1:0] trial;
    logic           fits;
    always_comb begin
      trial = R_W'(dvs[s-1]) << K;
      fits  = rem[s-1] >= trial;
    end
    always_ff @(posedge clk) begin
      if (!rst_n) vld[s] <= 1'b0;
      else        vld[s] <= vld[s-1];
      sat[s] <= sat[s-1];
      dvs[s] <= dvs[s-1];
      rem[s] <= fits ? rem[s-1] - trial : rem[s-1];
      quo[s] <= quo[s-1] | (fits ? PSD_W'(1) << K : '0);
    end
  end

  assign out_valid = vld[PSD_W];
  assign out_sat   = sat[PSD_W];
  assign out_psd   = sat[PSD_W] ? '1 : quo[PSD_W];
  assign out_vpeak = dvs[PSD_W];

endmodule
