// sipm_rx_top: real-time bit-error-rate transmitter and photon-counting
// receiver for a silicon photomultiplier (SiPM) optical link.
//
// Transmit side: rate_divider turns the system clock into one tx_tick per
// bit; on each tick the PRBS generator steps and tx_out, which drives the
// LED through the line driver, takes the new bit. In loop-back mode tx_out
// instead carries the 001 pattern with one slot per clock cycle, to be wired
// back to pulse_in; the counters then measure how many of its pulses survive
// the connector (the error totals carry no meaning in that mode).
// Receive side: the comparator's digital pulses (pulse_in) clock two
// interleaved counters directly; phase_shift derives the receive bit
// boundary rx_tick from tx_tick plus 'phase' cycles, and at each boundary
// the counters swap, giving one photon count per bit without dead time.
// The count is compared with the digital threshold n_t to recover the bit,
// which is XORed with the transmitted bit delayed by delay_sel + 1 bits to
// count errors. Bits, errors and photons are totalled over 1 s and sent to
// the host over the UART; the last report is also on 'report'.
// The block structure follows the paper's FPGA diagram; the widths,
// polynomial, frame format and the strobe-based clocking are this design's.
//
// Interface: configuration inputs (mode, bit_div, phase, delay_sel, n_t) are
// meant to be static during a measurement. rx_bit/rx_bit_valid expose each
// recovered bit and rx_bank the counter now counting; bit_tick marks the
// start of each transmitted bit (tx_out changes one cycle later) and
// report_snap the end of each interval. The first DEPTH + 1
// compared bits after reset are not counted, since the reference delay line
// is not yet filled.
// Timing: a bit is decided SETTLE + 2 cycles after its window closes and
// compared one cycle later; bit_div must exceed phase + SETTLE + 4.
module sipm_rx_top
  import sipm_pkg::*;
#(
  parameter int SYS_CLK_HZ    = 125_000_000,
  parameter int CNT_W         = 16,
  parameter int NT_W          = 4,
  parameter int DIV_W         = 16,
  parameter int DEPTH         = 8,
  parameter int REPORT_CYCLES = SYS_CLK_HZ,          // 1 s
  parameter int CLKS_PER_BAUD = SYS_CLK_HZ / 115_200,
  localparam int SEL_W        = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             pulse_in,
  input  tx_mode_e         mode,
  input  logic [DIV_W-1:0] bit_div,
  input  logic [DIV_W-1:0] phase,
  input  logic [SEL_W-1:0] delay_sel,
  input  logic [NT_W-1:0]  n_t,
  output logic             tx_out,
  output logic             uart_txd,
  output logic             rx_bit,
  output logic             rx_bit_valid,
  output logic             rx_bank,
  output logic             bit_tick,
  output report_t          report,
  output logic             report_snap,
  output logic             report_busy
);

  logic tx_tick, rx_tick, tx_step;
  logic prbs_bit, pat_bit, tx_bit;
  logic ref_bit;
  logic [CNT_W-1:0] bit_count;
  logic count_valid;
  logic err, err_valid, err_valid_q;
  logic snap;
  logic [ACC_W-1:0] bits_total, errs_total, photons_total;
  logic [$clog2(DEPTH+2)-1:0] warm;

  always_comb bit_tick    = tx_tick;
  always_comb report_snap = snap;

  rate_divider #(.DIV_W(DIV_W)) u_div (
    .clk(clk), .rst_n(rst_n), .bit_div(bit_div), .tx_tick(tx_tick));

  phase_shift #(.DIV_W(DIV_W)) u_phase (
    .clk(clk), .rst_n(rst_n), .tx_tick(tx_tick), .phase(phase), .rx_tick(rx_tick));

  prbs_gen u_prbs (
    .clk(clk), .rst_n(rst_n), .step(tx_tick && mode == MODE_PRBS), .bit_out(prbs_bit));

  // In loop-back mode the pattern runs at the full clock rate (one slot per
  // cycle), while the counting windows keep their bit_div length.
  pattern_001 u_pat (
    .clk(clk), .rst_n(rst_n), .step(mode == MODE_LOOPBACK), .bit_out(pat_bit));

  always_comb tx_bit  = (mode == MODE_PRBS) ? prbs_bit : pat_bit;
  always_comb tx_step = (mode == MODE_PRBS) ? tx_tick : 1'b1;

  // tx_out is the registered line bit; in PRBS mode it changes one cycle
  // after tx_tick.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       tx_out <= 1'b0;
    else if (tx_step) tx_out <= tx_bit;
  end

  // The bit on the line (tx_out) enters the history at the end of its period.
  tx_delay_line #(.DEPTH(DEPTH)) u_delay (
    .clk(clk), .rst_n(rst_n), .step(tx_tick), .bit_in(tx_out),
    .delay_sel(delay_sel), .bit_out(ref_bit));

  interleaved_counter #(.CNT_W(CNT_W)) u_cnt (
    .clk(clk), .rst_n(rst_n), .pulse(pulse_in), .rx_tick(rx_tick),
    .bit_count(bit_count), .count_valid(count_valid), .bank(rx_bank));

  bit_decision #(.CNT_W(CNT_W), .NT_W(NT_W)) u_dec (
    .clk(clk), .rst_n(rst_n), .count(bit_count), .count_valid(count_valid),
    .n_t(n_t), .bit_out(rx_bit), .bit_valid(rx_bit_valid));

  bit_compare u_cmp (
    .clk(clk), .rst_n(rst_n), .strobe(rx_bit_valid), .ref_bit(ref_bit),
    .rx_bit(rx_bit), .err(err), .err_valid(err_valid));

  // Skip the comparisons made before the reference history is filled.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) warm <= '0;
    else if (err_valid && warm != ($bits(warm))'(DEPTH + 1)) warm <= warm + 1'b1;
  end
  always_comb err_valid_q = err_valid && (warm == ($bits(warm))'(DEPTH + 1));

  error_counter u_err (
    .clk(clk), .rst_n(rst_n), .err(err), .err_valid(err_valid_q), .snap(snap),
    .bits_total(bits_total), .errs_total(errs_total));

  full_photon_counter #(.CNT_W(CNT_W)) u_full (
    .clk(clk), .rst_n(rst_n), .count(bit_count), .count_valid(count_valid),
    .snap(snap), .photons_total(photons_total));

  uart_reporter #(.REPORT_CYCLES(REPORT_CYCLES), .CLKS_PER_BAUD(CLKS_PER_BAUD)) u_rep (
    .clk(clk), .rst_n(rst_n), .bits_total(bits_total), .errs_total(errs_total),
    .photons_total(photons_total), .snap(snap), .txd(uart_txd),
    .busy(report_busy), .report(report));

endmodule
