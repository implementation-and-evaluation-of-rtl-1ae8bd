// tb_bit_decision: random counts and thresholds; the bit must be 1 exactly
// when the count exceeds n_t, be registered one cycle after count_valid and
// hold when no count is offered. Includes the edge cases count = n_t and
// count = n_t + 1, n_t = 0 and n_t = 15.
module tb_bit_decision;
  logic clk = 0, rst_n = 0;
  logic [15:0] count = 0;
  logic count_valid = 0;
  logic [3:0] n_t = 0;
  logic bit_out, bit_valid;
  int checks = 0, failures = 0;
  always #4 clk = ~clk;

  bit_decision #(.CNT_W(16), .NT_W(4)) dut (.clk, .rst_n, .count, .count_valid, .n_t, .bit_out, .bit_valid);

  task automatic one(input int c, input int t);
    logic expect_bit;
    @(negedge clk);
    count = 16'(c); n_t = 4'(t); count_valid = 1;
    expect_bit = (c > t);
    @(negedge clk);
    count_valid = 0;
    checks++;
    if (!bit_valid || bit_out != expect_bit) begin
      failures++; $display("count %0d n_t %0d -> %0b valid %0b", c, t, bit_out, bit_valid);
    end
    // hold
    count = 16'(c ^ 5);
    @(negedge clk);
    checks++;
    if (bit_valid || bit_out != expect_bit) failures++;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 16; t++) begin one(t, t); one(t + 1, t); if (t > 0) one(t - 1, t); end
    one(0, 0); one(1, 0); one(65535, 15); one(16, 15);
    repeat (300) one(int'($urandom_range(0, 40)), int'($urandom_range(0, 15)));
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
