// psd_histogram -- on-chip PSD spectrum, one counter per PSD channel.
//
// What it does: accumulates the distribution of the PSD parameter, the
// spectrum in which neutrons and gammas form two separate peaks. Every PSD
// result increments the counter of its channel. A host reads the counters
// through a simple read port and can clear the whole spectrum.
//
// How it works: a memory of 2**PSD_W words of HIST_W bits, updated by a
// read-modify-write in one clock. Counters saturate instead of wrapping.
// Clearing walks through the memory writing zeros, one channel per clock;
// it starts by itself after reset and on a clear request. Results that
// arrive while the clear walk runs are not counted and are reported by
// the drop strobe.
//
// Interface: in_valid / in_bin (one PSD result); clear (pulse, starts a
// clear walk), busy (clear walk running); rd_addr -> rd_data one clock
// later; dropped (strobe, a result arrived during a clear).
//
// Timing: one result per clock accepted; a clear takes 2**PSD_W clocks.
//
// Following the paper: 1024 channels for the PSD parameter and a spectrum
// built online in the FPGA. This design's own choices: counter width,
// saturation, the clear walk and the host read port.
module psd_histogram #(
  parameter int unsigned PSD_W  = psd_pkg::PSD_W,
  parameter int unsigned HIST_W = psd_pkg::HIST_W
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  logic [PSD_W-1:0]  in_bin,
  input  logic              clear,
  output logic              busy,
  output logic              dropped,
  input  logic [PSD_W-1:0]  rd_addr,
  output logic [HIST_W-1:0] rd_data
);

  logic [HIST_W-1:0] mem [2**PSD_W];
  logic [PSD_W-1:0]  clr_addr;
  logic              clr_busy;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      clr_busy <= 1'b1;
      clr_addr <= '0;
    end else if (clr_busy) begin
      clr_addr <= clr_addr + 1'b1;
      if (clr_addr == '1) clr_busy <= 1'b0;
    end else if (clear) begin
      clr_busy <= 1'b1;
      clr_addr <= '0;
    end
  end

  always_ff @(posedge clk) begin
    if (rst_n && clr_busy) begin
      mem[clr_addr] <= '0;
    end else if (rst_n && in_valid && (mem[in_bin] != '1)) begin
      mem[in_bin] <= mem[in_bin] + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    rd_data <= mem[rd_addr];
  end

  assign busy    = clr_busy;
  assign dropped = in_valid && clr_busy;

endmodule
