// tb_workload_loopback: minimum-pulse-width sweep of the connector with the
// 001 loop-back pattern.
//
// In loop-back mode tx_out carries 001 with one slot per clock cycle, so the
// width of its pulses is one clock period. Sweeping the clock period from
// 3 to 7 ns sweeps the pulse width. tx_out goes back to pulse_in through a
// connector model that passes a pulse of at least 5 ns and drops a narrower
// one. The 5 ns limit is the result reported for the real connector; the
// model stands in for it. A passed pulse arrives 2.5 clock periods after its
// rising edge. That puts it half a cycle away from the clock edges, so it
// never lands on a bit boundary.
// With 120-cycle windows and a 30,000-cycle report interval, every window
// holds exactly 40 pulses. Every full interval must then report
// 250 bits and exactly 10,000 photons at 5, 6 and 7 ns, and 0 photons at
// 3 and 4 ns.
// Delays in this file count tenths of a nanosecond.
// Mechanisms counted: sweep points where pulses passed, points where they
// were dropped.
module tb_workload_loopback;
  import sipm_pkg::*;
  localparam int RC = 30000, CPB = 8, BD = 120;
  localparam int MIN_W = 50;             // connector limit, 5 ns

  logic clk = 0, rst_n = 0;
  logic pulse_in = 0;
  tx_mode_e mode = MODE_LOOPBACK;
  logic [15:0] bit_div = 16'(BD), phase = 16'd3;
  logic [2:0]  delay_sel = 0;
  logic [3:0]  n_t = 4'd0;
  logic tx_out, uart_txd, rx_bit, rx_bit_valid, rx_bank, report_busy;
  logic bit_tick, report_snap;
  report_t report;
  int checks = 0, failures = 0;
  int half = 25;                         // half clock period
  int n_pass = 0, n_drop = 0;
  longint cycles = 0;

  always #(half) clk = ~clk;
  always @(posedge clk) cycles++;

  sipm_rx_top #(.REPORT_CYCLES(RC), .CLKS_PER_BAUD(CPB)) dut (
    .clk, .rst_n, .pulse_in, .mode, .bit_div, .phase, .delay_sel, .n_t,
    .tx_out, .uart_txd, .rx_bit, .rx_bit_valid, .rx_bank, .bit_tick, .report, .report_snap,
    .report_busy);

  // connector model
  time t_rise;
  always @(posedge tx_out) t_rise = $time;
  always @(negedge tx_out) begin
    automatic time w = $time - t_rise;
    automatic time start = t_rise + time'(5 * half);
    if (rst_n && w >= time'(MIN_W))
      fork begin #(start - $time) pulse_in = 1; #(w) pulse_in = 0; end join_none
  end

  initial begin : watchdog
    wait (cycles == 1_000_000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures);
    $finish;
  end

  initial begin
    for (int p = 3; p <= 7; p++) begin
      int exp_phot;
      rst_n = 0;
      half = p * 5;
      repeat (4) @(negedge clk);
      rst_n = 1;
      exp_phot = (p * 10 >= MIN_W) ? RC / 3 : 0;
      // the report read at snap k holds interval k-1; skip the first,
      // partial one
      repeat (2) @(posedge report_snap);
      for (int k = 0; k < 2; k++) begin
        @(posedge report_snap);
        checks++;
        if (int'(report.photons) != exp_phot || int'(report.bits) != RC / BD) begin
          failures++;
          $display("%0d ns pulses: photons %0d bits %0d, expected %0d and %0d",
                   p, report.photons, report.bits, exp_phot, RC / BD);
        end
      end
      $display("%0d ns pulses: %0d photons per %0d-cycle report", p, report.photons, RC);
      if (report.photons != 0) n_pass++; else n_drop++;
    end
    checks++;
    if (n_pass == 0 || n_drop == 0) begin
      failures++;
      $display("sweep did not cover both sides of the limit");
    end
    $display("points passed %0d, dropped %0d", n_pass, n_drop);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
