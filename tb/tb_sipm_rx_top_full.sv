// tb_sipm_rx_top_full: the receiver at its default sizes (125 MHz clock,
// 1 s report interval, 115,200 baud) through one complete measurement at
// 1 Mbps (bit_div = 125).
//
// The channel model puts pulses into 61 slots of each bit: with probability
// 0.13 per slot for a 1 (about 7.9 detected photons per bit, the operating
// point reported for 1 Mbps) and 0.00057 per slot for a 0 (about 0.035 dark
// counts per bit, i.e. 35 kcps). The digital threshold is n_t = 1. Every
// recovered bit is checked against count > n_t, and the first UART frame,
// sent after the first second, must carry exactly the bits, errors and
// photons the testbench expects. The measured error ratio is printed.
module tb_sipm_rx_top_full;
  import sipm_pkg::*;
  localparam int BD = 125, LAT = 3, NT = 1, DEPTH = 8, CPB = 125_000_000 / 115_200;

  logic clk = 0, rst_n = 0;
  logic pulse_in = 0;
  tx_mode_e mode = MODE_PRBS;
  logic [15:0] bit_div = 16'(BD), phase = 16'(LAT);
  logic [2:0]  delay_sel = 0;
  logic [3:0]  n_t = 4'(NT);
  logic tx_out, uart_txd, rx_bit, rx_bit_valid, rx_bank, report_busy;
  logic bit_tick, report_snap;
  report_t report;
  int checks = 0, failures = 0;
  always #4 clk = ~clk;

  sipm_rx_top dut (
    .clk, .rst_n, .pulse_in, .mode, .bit_div, .phase, .delay_sel, .n_t,
    .tx_out, .uart_txd, .rx_bit, .rx_bit_valid, .rx_bank, .bit_tick, .report, .report_snap,
    .report_busy);

  int cyc = 0, c_in_bit = 0, cur_n;
  logic cur_b;
  bit sched [int];
  typedef struct { logic b; int n; } win_t;
  win_t win_q [$];
  longint exp_bits = 0, exp_errs = 0, exp_phot = 0, pend_bits = 0, pend_errs = 0;
  report_t exp_q [$];
  int rxv_count = 0, bank_flips = 0, snaps = 0;
  bit snap_prev = 0;
  logic bank_q = 0;

  always @(negedge clk) begin
    cyc++;
    if (rst_n) begin
      if (bit_tick) begin
        if (c_in_bit != 0) win_q.push_back('{b: cur_b, n: cur_n});
        c_in_bit = 0;
      end else begin
        c_in_bit++;
        if (c_in_bit == 1) begin cur_b = tx_out; cur_n = 0; end
        if (c_in_bit >= 2 && c_in_bit <= BD - 3 && c_in_bit % 2 == 0) begin
          if ((cur_b && $urandom_range(0, 99) < 13) || (!cur_b && $urandom_range(0, 99999) < 57)) begin
            sched[cyc + LAT] = 1;
            cur_n++;
          end
        end
      end
    end
    if (sched.exists(cyc)) begin
      sched.delete(cyc);
      fork begin pulse_in = 1; #6 pulse_in = 0; end join_none
    end
    if (rst_n && rx_bank != bank_q) bank_flips++;
    bank_q = rx_bank;

    if (rst_n) begin
      exp_bits += pend_bits; exp_errs += pend_errs;
      pend_bits = 0; pend_errs = 0;
      if (rx_bit_valid) begin
        win_t w;
        logic e;
        if (win_q.size() == 0) begin
          failures++; w = '{b: 1'b0, n: 0};
        end else w = win_q.pop_front();
        if (snap_prev) exp_q[exp_q.size()-1].photons += 32'(w.n);
        else exp_phot += w.n;
        e = (w.n > NT);
        checks++;
        if (rx_bit != e) begin
          failures++;
          if (failures < 10) $display("window %0d: n=%0d rx=%0b", rxv_count, w.n, rx_bit);
        end
        if (rxv_count >= DEPTH + 1) begin pend_bits = 1; pend_errs = longint'(w.b != e); end
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

  logic [7:0] fb [FRAME_BYTES];
  initial begin
    report_t e;
    exp_q = {};
    repeat (4) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int i = 0; i < FRAME_BYTES; i++) begin
      @(negedge uart_txd);
      repeat (CPB / 2) @(posedge clk);
      for (int k = 0; k < 8; k++) begin repeat (CPB) @(posedge clk); fb[i][k] = uart_txd; end
      repeat (CPB) @(posedge clk);
    end
    e = exp_q.pop_front();
    $display("report: %0d bits, %0d errors, %0d photons; expected %0d / %0d / %0d",
             {fb[1], fb[2], fb[3], fb[4]}, {fb[5], fb[6], fb[7], fb[8]}, {fb[9], fb[10], fb[11], fb[12]},
             e.bits, e.errors, e.photons);
    $display("error ratio %f, photons per bit %f, bank flips %0d",
             real'(e.errors) / real'(e.bits), real'(e.photons) / real'(e.bits), bank_flips);
    checks++; if (fb[0] != FRAME_HDR) failures++;
    checks++;
    if ({fb[1], fb[2], fb[3], fb[4]} != e.bits || {fb[5], fb[6], fb[7], fb[8]} != e.errors ||
        {fb[9], fb[10], fb[11], fb[12]} != e.photons) failures++;
    checks++; if (report != e) failures++;
    // one second at 1 Mbps: 1,000,000 bits minus the first ones after reset
    checks++; if (e.bits < 999_980 || e.bits > 1_000_000) failures++;
    checks++; if (e.errors == 0) failures++;
    checks++; if (bank_flips < 999_000) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (130_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
