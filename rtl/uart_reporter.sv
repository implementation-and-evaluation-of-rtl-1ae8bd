// uart_reporter: periodic report of the counters to the host.
//
// A free-running interval counter raises 'snap' for one cycle every
// REPORT_CYCLES system clock cycles (1 s at 125 MHz, the report period of
// the paper). 'snap' tells the error and photon counters to hand over their
// totals and restart; the cycle after, this block latches the totals and
// sends them as one 13-byte frame through uart_tx: header 0xA5, then the
// bit, error and photon totals, each 32 bits, most significant byte first.
// The frame layout is this design's choice. If a frame is still in flight
// at the next 'snap' that report is dropped, which cannot happen at the
// default settings (a frame takes about 1.1 ms at 115,200 baud).
//
// Timing: the header byte is offered to the UART two cycles after 'snap'.
module uart_reporter
  import sipm_pkg::*;
#(
  parameter int REPORT_CYCLES = 125_000_000,
  parameter int CLKS_PER_BAUD = 1085
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [ACC_W-1:0] bits_total,
  input  logic [ACC_W-1:0] errs_total,
  input  logic [ACC_W-1:0] photons_total,
  output logic             snap,
  output logic             txd,
  output logic             busy,
  output report_t          report
);

  localparam int IW = (REPORT_CYCLES > 1) ? $clog2(REPORT_CYCLES) : 1;

  logic [IW-1:0] ivl;
  logic          latch;        // one cycle after snap: totals are valid
  logic [3:0]    idx;          // byte being offered
  logic [7:0]    byte_q;
  logic          valid, ready;
  logic [8*FRAME_BYTES-1:0] frame;

  always_comb frame = {FRAME_HDR, report.bits, report.errors, report.photons};
  always_comb byte_q = frame[8*(FRAME_BYTES-1-int'(idx)) +: 8];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ivl    <= '0;
      snap   <= 1'b0;
      latch  <= 1'b0;
      busy   <= 1'b0;
      valid  <= 1'b0;
      idx    <= '0;
      report <= '0;
    end else begin
      snap  <= 1'b0;
      latch <= snap;
      if (ivl == IW'(REPORT_CYCLES - 1)) begin
        ivl  <= '0;
        snap <= 1'b1;
      end else begin
        ivl <= ivl + IW'(1);
      end
      if (latch && !busy) begin
        report <= '{bits: bits_total, errors: errs_total, photons: photons_total};
        busy   <= 1'b1;
        valid  <= 1'b1;
        idx    <= '0;
      end else if (busy && valid && ready) begin
        if (int'(idx) == FRAME_BYTES - 1) begin
          valid <= 1'b0;
        end else begin
          idx <= idx + 4'd1;
        end
      end else if (busy && !valid && ready) begin
        busy <= 1'b0;          // last byte has left the UART
      end
    end
  end

  uart_tx #(.CLKS_PER_BAUD(CLKS_PER_BAUD)) u_tx (
    .clk   (clk),
    .rst_n (rst_n),
    .data  (byte_q),
    .valid (valid),
    .ready (ready),
    .txd   (txd)
  );

endmodule
