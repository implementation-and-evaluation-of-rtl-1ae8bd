// tb_pulse_counter: counts bursts of 8 ns pulses with the enable on and off,
// clears asynchronously, and checks saturation with a 4-bit counter.
module tb_pulse_counter;
  logic pulse = 0, en = 0, clr = 0;
  logic [15:0] count;
  logic [3:0]  count4;
  logic        en4 = 1;
  int checks = 0, failures = 0;

  pulse_counter #(.CNT_W(16)) dut  (.pulse, .en, .clr, .count);
  pulse_counter #(.CNT_W(4))  dut4 (.pulse, .en(en4), .clr, .count(count4));

  task automatic pulses(input int n);
    repeat (n) begin #8 pulse = 1; #8 pulse = 0; #($urandom_range(5, 40)); end
  endtask

  initial begin
    int expect_cnt;
    #5 clr = 1;
    #20 clr = 0;
    #10;
    checks++; if (count != 0) failures++;
    expect_cnt = 0;
    for (int r = 0; r < 20; r++) begin
      int n;
      n = int'($urandom_range(0, 30));
      en = 1'($urandom);
      #5;
      pulses(n);
      if (en) expect_cnt += n;
      #5;
      checks++;
      if (int'(count) != expect_cnt) begin failures++; $display("round %0d: %0d vs %0d", r, count, expect_cnt); end
      if (r % 7 == 6) begin
        #3 clr = 1; #3;
        checks++; if (count != 0) failures++;
        pulses(3);                       // ignored while clear is held
        checks++; if (count != 0) failures++;
        clr = 0; expect_cnt = 0;
      end
    end
    // saturation of the 4-bit counter
    #3 clr = 1; #3 clr = 0; en = 0;
    pulses(40);
    checks++; if (count4 != 4'hF) begin failures++; $display("no saturation: %0d", count4); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
