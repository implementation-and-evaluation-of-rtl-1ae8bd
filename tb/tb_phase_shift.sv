// tb_phase_shift: drives single tx_tick pulses and checks that rx_tick
// follows exactly phase + 1 cycles later, once, for several phase values.
module tb_phase_shift;
  logic clk = 0, rst_n = 0;
  logic tx_tick = 0;
  logic [15:0] phase;
  logic rx_tick;
  int checks = 0, failures = 0;
  always #4 clk = ~clk;

  phase_shift dut (.clk, .rst_n, .tx_tick, .phase, .rx_tick);

  task automatic one(input int ph);
    int seen, at;
    phase = 16'(ph);
    @(negedge clk) tx_tick = 1;
    @(negedge clk) tx_tick = 0;
    seen = 0; at = -1;
    // tx_tick was high in cycle 0; this negedge lies in cycle 1
    for (int c = 1; c < ph + 10; c++) begin
      if (rx_tick) begin seen++; at = c; end
      @(negedge clk);
    end
    checks++;
    if (seen != 1 || at != ph + 1) begin
      failures++; $display("phase %0d: seen %0d at %0d", ph, seen, at);
    end
  endtask

  initial begin
    phase = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    one(0); one(1); one(2); one(5); one(17); one(3);
    for (int i = 0; i < 10; i++) one(int'($urandom_range(0, 40)));
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
