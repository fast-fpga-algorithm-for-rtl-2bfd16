// psd_histogram_tb -- self-checking test of the PSD spectrum memory.
//
// Waits for the clear walk that follows reset, then sends bursts of random
// PSD channels (back to back, with repeats of the same channel and of the
// first and last channel) while
// keeping its own count per channel, reads all 1024 channels back through
// the read port and compares. Then requests a clear, checks that results
// arriving during the walk are reported as dropped and not counted, that
// the walk takes 1024 clocks, and that every channel reads zero afterwards.
// A second, small instance (16 channels of 3 bits) checks saturation.
module psd_histogram_tb;
  import psd_pkg::*;

  localparam int BINS = 2 ** PSD_W;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic in_valid, clear, busy, dropped;
  logic [PSD_W-1:0] in_bin, rd_addr;
  logic [HIST_W-1:0] rd_data;

  logic s_valid, s_clear, s_busy, s_dropped;
  logic [3:0] s_bin, s_addr;
  logic [2:0] s_data;

  int model [BINS];
  int checks = 0;
  int failures = 0;

  always #2 clk = ~clk;

  psd_histogram dut (.*);

  psd_histogram #(.PSD_W(4), .HIST_W(3)) u_small (
    .clk, .rst_n, .in_valid(s_valid), .in_bin(s_bin), .clear(s_clear),
    .busy(s_busy), .dropped(s_dropped), .rd_addr(s_addr), .rd_data(s_data));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic read_all(string tag);
    for (int b = 0; b < BINS; b++) begin
      @(negedge clk) rd_addr = PSD_W'(b);
      @(negedge clk);
      check(int'(rd_data) == model[b],
            $sformatf("%s: channel %0d reads %0d, expected %0d", tag, b, rd_data, model[b]));
    end
  endtask

  initial begin
    int walk;
    int ndrop;
    in_valid = 0; in_bin = '0; clear = 0; rd_addr = '0;
    s_valid = 0; s_bin = '0; s_clear = 0; s_addr = '0;
    foreach (model[b]) model[b] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    walk = 0;
    while (busy) begin @(negedge clk); walk++; end
    check(walk == BINS - 1 || walk == BINS, $sformatf("reset clear walk took %0d clocks", walk));
    read_all("after reset");

    for (int n = 0; n < 5000; n++) begin
      @(negedge clk);
      in_valid = ($urandom_range(3) != 0);
      case ($urandom_range(3))
        0:       in_bin = PSD_W'($urandom_range(20, 10));  // repeats
        1:       in_bin = (n % 2 == 0) ? '1 : '0;          // the two end channels
        default: in_bin = PSD_W'($urandom);
      endcase
      if (in_valid) model[in_bin]++;
    end
    @(negedge clk) in_valid = 0;
    read_all("after counting");

    // clear with results arriving during the walk
    @(negedge clk) clear = 1;
    @(negedge clk) clear = 0;
    check(busy, "clear did not start");
    ndrop = 0;
    walk = 0;
    while (busy) begin
      in_valid = ($urandom_range(1) == 0);
      in_bin = PSD_W'($urandom);
      #1;
      if (in_valid) begin check(dropped, "result during clear not flagged"); ndrop++; end
      @(negedge clk);
      walk++;
    end
    in_valid = 0;
    check(walk == BINS, $sformatf("clear walk took %0d clocks", walk));
    check(ndrop > 0, "no result arrived during clear");
    foreach (model[b]) model[b] = 0;
    read_all("after clear");

    // saturation on the small instance
    while (s_busy) @(negedge clk);
    for (int n = 0; n < 12; n++) begin
      @(negedge clk) s_valid = 1; s_bin = 4'd5;
    end
    @(negedge clk) s_valid = 1; s_bin = 4'd6;
    @(negedge clk) s_valid = 0; s_addr = 4'd5;
    @(negedge clk);
    check(s_data == 3'd7, $sformatf("saturated channel reads %0d", s_data));
    s_addr = 4'd6;
    @(negedge clk);
    check(s_data == 3'd1, $sformatf("neighbour channel reads %0d", s_data));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
