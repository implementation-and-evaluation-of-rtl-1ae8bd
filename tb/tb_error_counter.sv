// tb_error_counter: random error events and report strobes, including a
// strobe in the same cycle as an event; each report must hold exactly the
// events since the previous strobe. Also checks saturation with 4 bits.
module tb_error_counter;
  logic clk = 0, rst_n = 0, err = 0, err_valid = 0, snap = 0, snap4 = 0;
  logic [31:0] bits_total, errs_total;
  logic [3:0]  b4, e4;
  int checks = 0, failures = 0;
  always #4 clk = ~clk;

  error_counter #(.ACC_W(32)) dut  (.clk, .rst_n, .err, .err_valid, .snap, .bits_total, .errs_total);
  error_counter #(.ACC_W(4))  dut4 (.clk, .rst_n, .err, .err_valid, .snap(snap4), .bits_total(b4), .errs_total(e4));

  initial begin
    int nb = 0, ne = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < 3000; c++) begin
      @(negedge clk);
      err_valid = 1'($urandom_range(0, 2) == 0);
      err = 1'($urandom);
      snap = (c % 97 == 96);
      if (err_valid) begin nb++; if (err) ne++; end
      if (snap) begin
        @(negedge clk);
        snap = 0; err_valid = 0;
        checks++;
        if (int'(bits_total) != nb || int'(errs_total) != ne) begin
          failures++; $display("report %0d/%0d expected %0d/%0d", bits_total, errs_total, nb, ne);
        end
        nb = 0; ne = 0;
      end
    end
    // the 4-bit copy is read once, after far more than 15 events
    @(negedge clk) snap4 = 1;
    @(negedge clk) snap4 = 0;
    checks++; if (b4 != 4'hF || e4 != 4'hF) begin failures++; $display("4-bit %0d/%0d", b4, e4); end
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
