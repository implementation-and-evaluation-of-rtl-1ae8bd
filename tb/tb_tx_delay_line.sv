// tb_tx_delay_line: shifts random bits in and checks every tap against a
// reference history kept by the testbench.
module tb_tx_delay_line;
  logic clk = 0, rst_n = 0, step = 0, bit_in = 0;
  logic [2:0] delay_sel = 0;
  logic bit_out;
  int checks = 0, failures = 0;
  bit hist [$];
  always #4 clk = ~clk;

  tx_delay_line #(.DEPTH(8)) dut (.clk, .rst_n, .step, .bit_in, .delay_sel, .bit_out);

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 200; n++) begin
      @(negedge clk);
      bit_in = 1'($urandom);
      step = 1'($urandom_range(0, 2) != 0);
      @(posedge clk);
      if (step) hist.push_front(bit_in);
      @(negedge clk);
      step = 0;
      if (hist.size() >= 8) begin
        for (int d = 0; d < 8; d++) begin
          delay_sel = 3'(d);
          #1;
          checks++;
          if (bit_out != hist[d]) begin failures++; $display("n %0d tap %0d", n, d); end
        end
      end
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
