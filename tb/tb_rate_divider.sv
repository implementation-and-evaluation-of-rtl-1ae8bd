// tb_rate_divider: checks the spacing of tx_tick for several divider values
// (2, 5, 125 and the clamp of 0 and 1 to 2) and that each tick lasts one cycle.
module tb_rate_divider;
  logic clk = 0, rst_n = 0;
  logic [15:0] bit_div;
  logic tx_tick;
  int checks = 0, failures = 0;
  always #4 clk = ~clk;

  rate_divider dut (.clk, .rst_n, .bit_div, .tx_tick);

  task automatic measure(input int div, input int expect_gap);
    int last, n, cyc;
    bit_div = 16'(div);
    // let the new value take effect
    repeat (300) @(posedge clk);
    last = -1; n = 0; cyc = 0;
    while (n < 6) begin
      @(posedge clk); cyc++;
      if (tx_tick) begin
        if (last >= 0) begin
          checks++;
          if (cyc - last != expect_gap) begin
            failures++; $display("div %0d: gap %0d expected %0d", div, cyc - last, expect_gap);
          end
        end
        last = cyc; n++;
        @(posedge clk); cyc++;
        checks++; if (tx_tick && expect_gap > 1) begin failures++; $display("tick longer than one cycle"); end
      end
    end
  endtask

  initial begin
    bit_div = 16'd5;
    repeat (3) @(posedge clk);
    rst_n = 1;
    measure(5, 5);
    measure(2, 2);
    measure(125, 125);
    measure(0, 2);
    measure(1, 2);
    measure(7, 7);
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
