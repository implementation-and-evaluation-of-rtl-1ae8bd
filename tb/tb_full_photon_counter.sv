// tb_full_photon_counter: random per-bit counts and report strobes
// (including a strobe together with a count); each report must be the sum
// of the counts since the previous one. Saturation is checked with an
// 8-bit accumulator.
module tb_full_photon_counter;
  logic clk = 0, rst_n = 0, count_valid = 0, snap = 0, snap8 = 0;
  logic [15:0] count = 0;
  logic [31:0] photons_total;
  logic [7:0]  p8;
  int checks = 0, failures = 0;
  always #4 clk = ~clk;

  full_photon_counter #(.CNT_W(16), .ACC_W(32)) dut (.clk, .rst_n, .count, .count_valid, .snap, .photons_total);
  full_photon_counter #(.CNT_W(16), .ACC_W(8))  dut8 (.clk, .rst_n, .count, .count_valid, .snap(snap8), .photons_total(p8));

  initial begin
    longint sum = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < 2000; c++) begin
      @(negedge clk);
      count_valid = 1'($urandom_range(0, 1));
      count = 16'($urandom_range(0, 30));
      if (c % 50 == 0) count = 16'($urandom_range(1000, 60000));
      snap = (c % 89 == 88);
      snap8 = (c == 1999);
      if (count_valid) sum += count;
      if (snap || snap8) begin
        @(negedge clk);
        count_valid = 0;
        if (snap) begin
          checks++;
          if (longint'(photons_total) != sum) begin failures++; $display("report %0d expected %0d", photons_total, sum); end
        end
        snap = 0; snap8 = 0;
        sum = 0;
      end
    end
    checks++; if (p8 != 8'hFF) begin failures++; $display("8-bit total %0d not saturated", p8); end
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
