// tb_sipm_rx_top: end-to-end test of the receiver at reduced sizes (40-cycle
// bits, 20,000-cycle report interval, 8 cycles per UART bit).
//
// Phase 1, PRBS mode: a channel model in the testbench turns each
// transmitted bit into detector pulses. A 1 gives a pulse in each of 18
// slots with probability 0.35 (about 6.3 per bit); a 0 gives dark counts
// with probability 0.04 per slot (about 0.7 per bit). The pulses reach
// pulse_in 3 cycles late and 'phase' is set to 3 to match. With n_t = 2 both
// kinds of bit error occur. Every recovered bit is checked against
// count > n_t, and every UART frame against the bits, errors and photons the
// testbench expects in that interval.
// Phase 2, loop-back mode: tx_out is wired back to pulse_in through a 2 ns
// delay; the pulses must come 3 cycles apart and the photon reports must
// hold one third of the interval's cycles.
// Mechanisms counted: both counter banks used, missed 1s, false 1s, phase
// offset, UART frames, mode switch to loop-back.
module tb_sipm_rx_top;
  import sipm_pkg::*;
  localparam int RC = 20000, CPB = 8, BD = 40, LAT = 3, NT = 2;
  localparam int DEPTH = 8;

  logic clk = 0, rst_n = 0;
  logic pulse_model = 0, lb, pulse_in;
  tx_mode_e mode = MODE_PRBS;
  logic [15:0] bit_div = 16'(BD), phase = 16'(LAT);
  logic [2:0]  delay_sel = 0;
  logic [3:0]  n_t = 4'(NT);
  logic tx_out, uart_txd, rx_bit, rx_bit_valid, rx_bank, report_busy;
  logic bit_tick, report_snap;
  report_t report;
  int checks = 0, failures = 0;
  always #4 clk = ~clk;

  sipm_rx_top #(.REPORT_CYCLES(RC), .CLKS_PER_BAUD(CPB)) dut (
    .clk, .rst_n, .pulse_in, .mode, .bit_div, .phase, .delay_sel, .n_t,
    .tx_out, .uart_txd, .rx_bit, .rx_bit_valid, .rx_bank, .bit_tick, .report, .report_snap,
    .report_busy);

  assign #2 lb = tx_out;
  assign pulse_in = (mode == MODE_LOOPBACK) ? lb : pulse_model;

  // ---------------- channel model (PRBS mode) ----------------
  int cyc = 0;                 // cycle index, advanced at each negedge
  int c_in_bit = 0;
  bit sched [int];             // absolute cycle -> pulse rising edge
  int cur_n;                   // pulses generated for the current line bit
  logic cur_b;
  typedef struct { logic b; int n; } win_t;
  win_t win_q [$];             // per counting window, in order
  int n_ones_missed = 0, n_false_ones = 0, bank_flips = 0;
  logic bank_q = 0;

  always @(negedge clk) begin
    cyc++;
    if (rst_n && mode == MODE_PRBS) begin
      if (bit_tick) begin
        if (c_in_bit != 0) win_q.push_back('{b: cur_b, n: cur_n});
        c_in_bit = 0;
      end else begin
        c_in_bit++;
        if (c_in_bit == 1) begin cur_b = tx_out; cur_n = 0; end
        if (c_in_bit >= 2 && c_in_bit <= BD - 3 && c_in_bit % 2 == 0) begin
          if ((cur_b && $urandom_range(0, 99) < 35) || (!cur_b && $urandom_range(0, 99) < 4)) begin
            sched[cyc + LAT] = 1;
            cur_n++;
          end
        end
      end
    end
    if (sched.exists(cyc)) begin
      sched.delete(cyc);
      fork begin pulse_model = 1; #6 pulse_model = 0; end join_none
    end
    if (rst_n && rx_bank != bank_q) bank_flips++;
    bank_q = rx_bank;
  end

  // ---------------- receiver monitor ----------------
  // expected totals per report, built from the testbench's own windows
  longint exp_bits, exp_errs, exp_phot, pend_bits, pend_errs;
  int rxv_count = 0;
  report_t exp_q [$];
  int snaps = 0, frames = 0;

  // Per-cycle bookkeeping, in the order the counters see the events: a
  // bit's photon count is added the cycle before rx_bit_valid, its error
  // flag the cycle after; a report includes the events of its own cycle.
  bit snap_prev = 0;
  always @(negedge clk) begin
    if (rst_n && mode == MODE_PRBS) begin
      exp_bits += pend_bits; exp_errs += pend_errs;   // err_valid of this cycle
      pend_bits = 0; pend_errs = 0;
      if (rx_bit_valid) begin
        win_t w;
        logic e;
        if (win_q.size() == 0) begin
          failures++; $display("recovered bit without a window");
          w = '{b: 1'b0, n: 0};
        end else w = win_q.pop_front();
        if (snap_prev) exp_q[exp_q.size()-1].photons += 32'(w.n);
        else exp_phot += w.n;
        e = (w.n > NT);
        checks++;
        if (rx_bit != e) begin failures++; $display("window %0d: n=%0d rx=%0b", rxv_count, w.n, rx_bit); end
        if (w.b && !e) n_ones_missed++;
        if (!w.b && e) n_false_ones++;
        if (rxv_count >= DEPTH + 1) begin
          pend_bits = 1; pend_errs = longint'(w.b != e);
        end
        rxv_count++;
      end
      if (report_snap) begin
        report_t r;
        r.bits = 32'(exp_bits); r.errors = 32'(exp_errs); r.photons = 32'(exp_phot);
        exp_q.push_back(r);
        snaps++;
        exp_bits = 0; exp_errs = 0; exp_phot = 0;
      end
    end
    snap_prev = report_snap;
  end

  // ---------------- UART frame decoder ----------------
  logic [7:0] fb [FRAME_BYTES];
  initial begin
    forever begin
      for (int i = 0; i < FRAME_BYTES; i++) begin
        @(negedge uart_txd);
        repeat (CPB / 2) @(posedge clk);
        for (int k = 0; k < 8; k++) begin repeat (CPB) @(posedge clk); fb[i][k] = uart_txd; end
        repeat (CPB) @(posedge clk);
      end
      frames++;
      if (mode == MODE_PRBS) begin
        report_t e;
        e = exp_q.pop_front();
        checks++;
        if (fb[0] != FRAME_HDR ||
            {fb[1], fb[2], fb[3], fb[4]} != e.bits || {fb[5], fb[6], fb[7], fb[8]} != e.errors ||
            {fb[9], fb[10], fb[11], fb[12]} != e.photons) begin
          failures++;
          $display("frame %0d: got %0d/%0d/%0d expected %0d/%0d/%0d", frames,
                   {fb[1], fb[2], fb[3], fb[4]}, {fb[5], fb[6], fb[7], fb[8]}, {fb[9], fb[10], fb[11], fb[12]},
                   e.bits, e.errors, e.photons);
        end
        checks++; if (report != e) failures++;
      end
    end
  end

  // ---------------- loop-back monitor ----------------
  int lb_edges = 0, lb_last = -1, lb_bad = 0, lb_reports = 0;
  always @(posedge lb) begin
    if (mode == MODE_LOOPBACK && rst_n) begin
      if (lb_last >= 0 && cyc - lb_last != 3) lb_bad++;
      lb_last = cyc; lb_edges++;
    end
  end

  initial begin
    exp_bits = 0; exp_errs = 0; exp_phot = 0; pend_bits = 0; pend_errs = 0;
    repeat (4) @(posedge clk);
    @(negedge clk) rst_n = 1;
    // phase 1: PRBS, six report intervals
    repeat (6 * RC + 1500) @(posedge clk);
    checks++; if (frames < 6) begin failures++; $display("only %0d frames", frames); end
    // phase 2: loop-back
    @(negedge clk) rst_n = 0; mode = MODE_LOOPBACK;
    repeat (4) @(posedge clk);
    @(negedge clk) rst_n = 1;
    repeat (3) begin
      @(posedge report_snap);
      @(negedge report_busy);
      lb_reports++;
      checks++;
      if (lb_reports > 1 && (int'(report.photons) < RC / 3 - BD || int'(report.photons) > RC / 3 + BD)) begin
        failures++; $display("loop-back photons %0d, expected about %0d", report.photons, RC / 3);
      end
    end
    checks++; if (lb_bad != 0) begin failures++; $display("%0d loop-back pulses off the 001 pattern", lb_bad); end
    // mechanisms
    $display("bank flips %0d, missed ones %0d, false ones %0d, frames %0d, loop-back pulses %0d",
             bank_flips, n_ones_missed, n_false_ones, frames, lb_edges);
    checks++; if (bank_flips < 100) begin failures++; $display("banks did not alternate"); end
    checks++; if (n_ones_missed == 0) begin failures++; $display("no missed 1 occurred"); end
    checks++; if (n_false_ones == 0) begin failures++; $display("no false 1 occurred"); end
    checks++; if (lb_edges < 1000) begin failures++; $display("loop-back mode not exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (12 * RC) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
