// tb_bit_compare: all four input pairs and random sequences; err must be
// ref xor rx of the strobed pair, one cycle later, and hold between strobes.
module tb_bit_compare;
  logic clk = 0, rst_n = 0, strobe = 0, ref_bit = 0, rx_bit = 0;
  logic err, err_valid;
  int checks = 0, failures = 0;
  always #4 clk = ~clk;

  bit_compare dut (.clk, .rst_n, .strobe, .ref_bit, .rx_bit, .err, .err_valid);

  task automatic one(input logic a, input logic b);
    @(negedge clk);
    ref_bit = a; rx_bit = b; strobe = 1;
    @(negedge clk);
    strobe = 0;
    checks++;
    if (!err_valid || err != (a ^ b)) begin failures++; $display("%0b %0b -> %0b", a, b, err); end
    ref_bit = ~a;
    @(negedge clk);
    checks++;
    if (err_valid || err != (a ^ b)) failures++;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    one(0, 0); one(0, 1); one(1, 0); one(1, 1);
    repeat (200) one(1'($urandom), 1'($urandom));
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
