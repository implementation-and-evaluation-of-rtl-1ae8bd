// tb_workload_rates: the measurements of the receiver's evaluation, at a
// shortened report interval of 2,500,000 cycles (20 ms at 125 MHz).
//
//  1. Data rates 10 kbps, 100 kbps and 1 Mbps (bit_div 12500, 1250, 125).
//     Detected signal photons per 1 bit: 19, 11 and 7.9. The 7.9 is the
//     figure reported for 1 Mbps; the other two come from the optical powers
//     quoted for 10 and 100 kbps, 0.85 pW and 4.98 pW, taken as averages
//     over equal 0s and 1s, with 626 nm photons and a 3.6 % detection
//     efficiency. Dark counts are 35 kcps, i.e. 3.5, 0.35 and 0.035 per bit.
//  2. A sweep of the digital threshold n_t = 0..15 at 100 kbps, which must
//     give the bathtub shape of a photon-counting receiver: about 0.15 at
//     n_t = 0 (a 0 fails on any dark count) and a minimum well below it.
// Every recovered bit is checked against count > n_t. The first report of
// each run (one interval less the first DEPTH + 1 bits after reset) must
// carry exactly the bits, errors and photons the testbench expects. The
// error ratios are printed.
module tb_workload_rates;
  import sipm_pkg::*;
  localparam int RC = 2_500_000, CPB = 8, LAT = 3, DEPTH = 8;

  logic clk = 0, rst_n = 0;
  logic pulse_in = 0;
  tx_mode_e mode = MODE_PRBS;
  logic [15:0] bit_div = 16'd1250, phase = 16'(LAT);
  logic [2:0]  delay_sel = 0;
  logic [3:0]  n_t = 4'd2;
  logic tx_out, uart_txd, rx_bit, rx_bit_valid, rx_bank, report_busy;
  logic bit_tick, report_snap;
  report_t report;
  int checks = 0, failures = 0;
  int p1_ppm = 0, p0_ppm = 0;    // pulse probability per slot, parts per million
  always #4 clk = ~clk;

  sipm_rx_top #(.REPORT_CYCLES(RC), .CLKS_PER_BAUD(CPB)) dut (
    .clk, .rst_n, .pulse_in, .mode, .bit_div, .phase, .delay_sel, .n_t,
    .tx_out, .uart_txd, .rx_bit, .rx_bit_valid, .rx_bank, .bit_tick, .report, .report_snap,
    .report_busy);

  int cyc = 0, c_in_bit = 0, cur_n;
  logic cur_b;
  bit sched [int];
  typedef struct { logic b; int n; } win_t;
  win_t win_q [$];
  longint exp_bits, exp_errs, exp_phot, pend_bits, pend_errs;
  report_t exp_q [$];
  int rxv_count;
  bit snap_prev = 0;

  always @(negedge clk) begin
    cyc++;
    if (rst_n) begin
      if (bit_tick) begin
        if (c_in_bit != 0) win_q.push_back('{b: cur_b, n: cur_n});
        c_in_bit = 0;
      end else begin
        c_in_bit++;
        if (c_in_bit == 1) begin cur_b = tx_out; cur_n = 0; end
        if (c_in_bit >= 2 && c_in_bit <= int'(bit_div) - 3 && c_in_bit % 2 == 0) begin
          if ($urandom_range(0, 999_999) < (cur_b ? p1_ppm + p0_ppm : p0_ppm)) begin
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
    if (rst_n) begin
      exp_bits += pend_bits; exp_errs += pend_errs;
      pend_bits = 0; pend_errs = 0;
      if (rx_bit_valid) begin
        win_t w;
        logic e;
        if (win_q.size() == 0) begin failures++; w = '{b: 1'b0, n: 0}; end
        else w = win_q.pop_front();
        if (snap_prev) exp_q[exp_q.size()-1].photons += 32'(w.n);
        else exp_phot += w.n;
        e = (w.n > int'(n_t));
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
        exp_bits = 0; exp_errs = 0; exp_phot = 0;
      end
    end
    snap_prev = report_snap;
  end

  // receive one UART frame
  task automatic get_frame(output report_t r);
    logic [7:0] fb [FRAME_BYTES];
    for (int i = 0; i < FRAME_BYTES; i++) begin
      @(negedge uart_txd);
      repeat (CPB / 2) @(posedge clk);
      for (int k = 0; k < 8; k++) begin repeat (CPB) @(posedge clk); fb[i][k] = uart_txd; end
      repeat (CPB) @(posedge clk);
    end
    checks++; if (fb[0] != FRAME_HDR) failures++;
    r.bits    = {fb[1], fb[2], fb[3], fb[4]};
    r.errors  = {fb[5], fb[6], fb[7], fb[8]};
    r.photons = {fb[9], fb[10], fb[11], fb[12]};
  endtask

  // one measurement: reset, configure, take the first report
  task automatic run(input int bd, input int nt, input real lam_s, input real lam_b, output real ber);
    report_t got, e1;
    int slots;
    @(negedge clk) rst_n = 0;
    repeat (4) @(posedge clk);
    slots = (bd - 4) / 2;
    bit_div = 16'(bd); n_t = 4'(nt);
    p1_ppm = int'(lam_s / slots * 1e6); p0_ppm = int'(lam_b / slots * 1e6);
    win_q = {}; exp_q = {}; sched.delete();
    exp_bits = 0; exp_errs = 0; exp_phot = 0; pend_bits = 0; pend_errs = 0;
    rxv_count = 0; c_in_bit = 0;
    @(negedge clk) rst_n = 1;
    get_frame(got);
    e1 = exp_q.pop_front();
    checks++;
    if (got != e1) begin
      failures++;
      $display("  frame %0d/%0d/%0d expected %0d/%0d/%0d", got.bits, got.errors, got.photons,
               e1.bits, e1.errors, e1.photons);
    end
    ber = real'(got.errors) / real'(got.bits);
    $display("rate %0d bit/s  n_t %2d  bits %0d  errors %0d  BER %f  photons/bit %f",
             125_000_000 / bd, nt, got.bits, got.errors, ber, real'(got.photons) / real'(got.bits));
  endtask

  initial begin
    real ber, ber0, best;
    repeat (4) @(posedge clk);
    // 1. data rates
    run(12500, 9, 19.0, 3.5,   ber);
    run(1250,  4, 11.0, 0.35,  ber);
    run(125,   1, 7.9,  0.035, ber);
    // 2. threshold sweep at 100 kbps
    best = 1.0;
    for (int nt = 0; nt < 16; nt++) begin
      run(1250, nt, 11.0, 0.35, ber);
      if (nt == 0) ber0 = ber;
      if (ber < best) best = ber;
    end
    checks++; if (ber0 < 0.10 || ber0 > 0.20) begin failures++; $display("BER at n_t=0: %f", ber0); end
    checks++; if (best > ber0 / 10.0) begin failures++; $display("no bathtub minimum"); end
    checks++; if (ber < best * 2.0) begin failures++; $display("BER does not rise at n_t=15"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (70_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
