// psd_divider_tb -- self-checking test of the pipelined PSD divider.
//
// Feeds random (Q, Vpeak) pairs, one per clock with random gaps, including
// small peaks that force clamping, a zero peak and operands whose quotient
// is exact (remainder zero, the boundary of every quotient bit), and compares every
// output with floor((Q << 7) / Vpeak) clamped to 1023, computed here in
// 64-bit integer arithmetic. Also checks the latency of PSD_W + 1 = 11
// clocks and that results come out in order, one per clock.
module psd_divider_tb;
  import psd_pkg::*;
  import psd_tb_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic in_valid;
  logic [Q_W-1:0] in_q;
  logic [ADC_W-1:0] in_vpeak;
  logic out_valid, out_sat;
  logic [PSD_W-1:0] out_psd;
  logic [ADC_W-1:0] out_vpeak;

  typedef struct { longint q; int vpeak; int cycle; } req_t;
  req_t pending[$];

  int checks = 0;
  int failures = 0;
  int cycle = 0;
  int n_sat = 0, n_out = 0;

  always #2 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  psd_divider dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // Output checker, sampled after each clock edge.
  always @(negedge clk) if (rst_n && out_valid) begin
    req_t r;
    int exp_psd;
    if (pending.size() == 0) begin
      check(0, "output with no input");
    end else begin
      r = pending.pop_front();
      exp_psd = ref_psd(r.q, r.vpeak, PSD_SHIFT, PSD_W);
      check(int'(out_psd) == exp_psd,
            $sformatf("q=%0d vpeak=%0d psd=%0d expected %0d", r.q, r.vpeak, out_psd, exp_psd));
      check(int'(out_vpeak) == r.vpeak, "vpeak not carried");
      check(out_sat == ((r.vpeak == 0) || (((r.q << PSD_SHIFT) / (r.vpeak == 0 ? 1 : r.vpeak)) > 1023)),
            "saturation flag");
      check(cycle - r.cycle == PSD_W + 1,
            $sformatf("latency %0d, expected %0d", cycle - r.cycle, PSD_W + 1));
      if (out_sat) n_sat++;
      n_out++;
    end
  end

  initial begin
    in_valid = 1'b0; in_q = '0; in_vpeak = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      in_valid = ($urandom_range(3) != 0);
      if (in_valid) begin
        req_t r;
        case ($urandom_range(4))
          0: begin r.vpeak = $urandom_range(16383, 1); r.q = longint'($urandom_range(30 * r.vpeak)); end
          1: begin r.vpeak = $urandom_range(16383, 200); r.q = longint'($urandom_range(8 * r.vpeak)); end
          4: begin  // exact quotient: Vpeak = 128*m, Q = psd*m
            int m = $urandom_range(127, 1);
            r.vpeak = 128 * m;
            r.q = longint'($urandom_range(1023)) * m;
          end
          2: begin r.vpeak = $urandom_range(40, 1); r.q = longint'($urandom_range(8388607)); end
          default: begin r.vpeak = (n % 97 == 0) ? 0 : $urandom_range(16383); r.q = longint'($urandom_range(8388607)); end
        endcase
        in_q = Q_W'(r.q);
        in_vpeak = ADC_W'(r.vpeak);
        r.cycle = cycle;  // count before the edge that takes this input
        pending.push_back(r);
      end
    end
    @(negedge clk) in_valid = 1'b0;
    repeat (20) @(negedge clk);
    check(pending.size() == 0, "results missing");
    check(n_sat > 0 && n_out > n_sat, "no mix of clamped and exact results");
    $display("results=%0d clamped=%0d", n_out, n_sat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
