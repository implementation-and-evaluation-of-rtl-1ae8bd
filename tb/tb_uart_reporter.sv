// tb_uart_reporter: with a 600-cycle interval and 4 cycles per baud, checks
// the spacing of 'snap', decodes every frame from the line and compares it
// with the totals that were presented after each 'snap' and with 'report'.
module tb_uart_reporter;
  import sipm_pkg::*;
  localparam int RC = 600, CPB = 4;
  logic clk = 0, rst_n = 0;
  logic [31:0] bits_total = 0, errs_total = 0, photons_total = 0;
  logic snap, txd, busy;
  report_t report;
  int checks = 0, failures = 0, frames = 0;
  report_t expect_q [$];
  int cycle = 0, last_snap = -1;
  always #4 clk = ~clk;

  uart_reporter #(.REPORT_CYCLES(RC), .CLKS_PER_BAUD(CPB)) dut (
    .clk, .rst_n, .bits_total, .errs_total, .photons_total, .snap, .txd, .busy, .report);

  // totals change right after each snap, as the real counters do
  always @(posedge clk) begin
    cycle++;
    if (snap && rst_n) begin
      report_t r;
      checks++;
      if (last_snap >= 0 && cycle - last_snap != RC) begin failures++; $display("interval %0d", cycle - last_snap); end
      last_snap = cycle;
      r.bits = $urandom; r.errors = $urandom; r.photons = $urandom;
      bits_total <= r.bits; errs_total <= r.errors; photons_total <= r.photons;
      expect_q.push_back(r);
    end
  end

  initial begin
    forever begin
      logic [7:0] fb [FRAME_BYTES];
      report_t e;
      for (int i = 0; i < FRAME_BYTES; i++) begin
        @(negedge txd);
        repeat (CPB / 2) @(posedge clk);
        for (int k = 0; k < 8; k++) begin repeat (CPB) @(posedge clk); fb[i][k] = txd; end
        repeat (CPB) @(posedge clk);
      end
      e = expect_q.pop_front();
      checks++;
      if (fb[0] != FRAME_HDR) begin failures++; $display("header %02x", fb[0]); end
      checks++;
      if ({fb[1], fb[2], fb[3], fb[4]} != e.bits || {fb[5], fb[6], fb[7], fb[8]} != e.errors ||
          {fb[9], fb[10], fb[11], fb[12]} != e.photons) begin
        failures++; $display("frame payload mismatch");
      end
      checks++; if (report != e) failures++;
      frames++;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (RC * 8 + 10) @(posedge clk);
    checks++; if (frames < 7) begin failures++; $display("only %0d frames", frames); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
