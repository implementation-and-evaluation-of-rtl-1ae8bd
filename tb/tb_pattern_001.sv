// tb_pattern_001: checks that the output reads 0,0,1 repeatedly, one value
// per step, and holds between steps.
module tb_pattern_001;
  logic clk = 0, rst_n = 0, step = 0;
  logic bit_out;
  int checks = 0, failures = 0;
  always #4 clk = ~clk;

  pattern_001 dut (.clk, .rst_n, .step, .bit_out);

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 60; n++) begin
      @(negedge clk);
      checks++;
      if (bit_out != (n % 3 == 2)) begin failures++; $display("slot %0d: %0b", n, bit_out); end
      // random idle cycles between steps must not change the output
      repeat ($urandom_range(0, 3)) begin
        logic b;
        b = bit_out;
        @(negedge clk);
        checks++; if (bit_out != b) failures++;
      end
      step = 1; @(negedge clk); step = 0;
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
