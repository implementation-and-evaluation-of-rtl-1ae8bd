// tb_prbs_gen: checks the PRBS-7 output stream against the recurrence of
// x^7 + x^6 + 1 (o[n] = o[n-7] xor o[n-6]), its period of 127, its balance
// (64 ones per period), the first bits after the all-ones seed, and that the
// generator holds while 'step' is low.
module tb_prbs_gen;
  logic clk = 0, rst_n = 0, step = 0;
  logic bit_out;
  int checks = 0, failures = 0;
  bit seq [400];
  always #4 clk = ~clk;

  prbs_gen dut (.clk, .rst_n, .step, .bit_out);

  initial begin
    int ones;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      seq[n] = bit_out;
      step = 1;
      @(negedge clk);
      step = 0;
      @(negedge clk);
    end
    // first seven bits after the all-ones seed are ones
    for (int n = 0; n < 7; n++) begin checks++; if (!seq[n]) failures++; end
    for (int n = 7; n < 400; n++) begin
      checks++;
      if (seq[n] != (seq[n-7] ^ seq[n-6])) begin failures++; $display("recurrence fails at %0d", n); end
    end
    for (int n = 0; n < 400 - 127; n++) begin
      checks++; if (seq[n] != seq[n+127]) failures++;
    end
    ones = 0;
    for (int n = 0; n < 127; n++) ones += int'(seq[n]);
    checks++; if (ones != 64) begin failures++; $display("ones per period %0d", ones); end
    // shorter periods must not exist
    for (int p = 1; p < 127; p++) begin
      bit same;
      same = 1;
      for (int n = 0; n < 127; n++) if (seq[n] != seq[n+p]) same = 0;
      checks++; if (same) begin failures++; $display("period %0d", p); end
    end
    // hold: with step low for many cycles the output stays
    begin
      logic b;
      int changed;
      b = bit_out;
      changed = 0;
      repeat (20) begin @(negedge clk); if (bit_out != b) changed++; end
      checks++; if (changed != 0) failures++;
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
