// tb_uart_tx: sends random bytes back to back with CLKS_PER_BAUD = 8 and
// decodes the line in the testbench (start bit, 8 data bits LSB first, stop
// bit, sampled mid-bit); checks the data, the bit time and the idle level.
module tb_uart_tx;
  localparam int CPB = 8;
  logic clk = 0, rst_n = 0;
  logic [7:0] data = 0;
  logic valid = 0, ready, txd;
  int checks = 0, failures = 0;
  byte unsigned sent [$];
  always #4 clk = ~clk;

  uart_tx #(.CLKS_PER_BAUD(CPB)) dut (.clk, .rst_n, .data, .valid, .ready, .txd);

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (5) @(posedge clk);
    checks++; if (txd !== 1'b1) failures++;
    for (int i = 0; i < 40; i++) begin
      @(negedge clk);
      data = 8'($urandom); valid = 1;
      sent.push_back(data);
      do @(posedge clk); while (!ready);
      @(negedge clk) valid = 0; data = 8'($urandom);
      if (i % 4 == 3) repeat ($urandom_range(1, 50)) @(posedge clk);
    end
    wait (sent.size() == 0);
    repeat (2 * CPB) @(posedge clk);
    checks++; if (txd !== 1'b1) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // line decoder
  initial begin
    forever begin
      logic [7:0] b;
      int t0;
      @(negedge txd);
      repeat (CPB / 2) @(posedge clk);
      checks++; if (txd != 0) begin failures++; $display("bad start bit"); end
      for (int k = 0; k < 8; k++) begin
        repeat (CPB) @(posedge clk);
        b[k] = txd;
      end
      repeat (CPB) @(posedge clk);
      checks++; if (txd != 1) begin failures++; $display("bad stop bit"); end
      checks++;
      if (sent.size() == 0 || b != sent[0]) begin failures++; $display("got %02x", b); end
      if (sent.size() != 0) void'(sent.pop_front());
      t0 = 0;
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
