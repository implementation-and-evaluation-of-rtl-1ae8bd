// tb_interleaved_counter: drives bit windows of 40 cycles (8 ns clock) with
// a random number of 8 ns pulses each, including pulses placed just after
// and just before a boundary, and checks that every window's count comes
// out exactly once, in order, that both banks are used alternately and
// that count_valid follows rx_tick by SETTLE + 1 cycles.
module tb_interleaved_counter;
  localparam int PERIOD = 40;
  logic clk = 0, rst_n = 0, pulse = 0, rx_tick = 0;
  logic [15:0] bit_count;
  logic count_valid, bank;
  int checks = 0, failures = 0;
  int expect_q [$];
  int banks_seen [2];
  int tick_cycle, cycle = 0;
  always #4 clk = ~clk;

  interleaved_counter #(.CNT_W(16), .SETTLE(2)) dut (.clk, .rst_n, .pulse, .rx_tick,
                                                     .bit_count, .count_valid, .bank);

  // window generator: rx_tick for one cycle every PERIOD cycles; pulses in
  // between at random 8 ns-aligned slots (rising edge mid-cycle)
  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    for (int w = 0; w < 300; w++) begin
      int n;
      n = 0;
      @(negedge clk) rx_tick = 1;
      @(negedge clk) rx_tick = 0;
      // the boundary took effect at the posedge inside the last cycle;
      // slots start 4 ns after that edge; a pulse every 3rd cycle at most
      for (int c = 0; c < PERIOD - 2; c += 2) begin
        if ($urandom_range(0, 2) == 0 || (w % 5 == 0 && (c == 0 || c == PERIOD - 4))) begin
          fork begin pulse = 1; #8 pulse = 0; end join_none
          n++;
        end
        @(negedge clk); @(negedge clk);
      end
      expect_q.push_back(n);
    end
    @(negedge clk) rx_tick = 1;
    @(negedge clk) rx_tick = 0;
    repeat (10) @(posedge clk);
    checks++; if (expect_q.size() != 0) begin failures++; $display("%0d windows not reported", expect_q.size()); end
    checks++; if (banks_seen[0] < 100 || banks_seen[1] < 100) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // the first rx_tick closes an empty window started at reset
  bit first = 1;
  int last_read = -1;
  always @(posedge clk) begin
    cycle++;
    if (rx_tick) tick_cycle = cycle;
    if (count_valid) begin
      checks++;
      if (cycle - tick_cycle != 3) begin failures++; $display("latency %0d", cycle - tick_cycle); end
      if (first) begin
        first = 0;
        checks++; if (bit_count != 0) failures++;
      end else begin
        int e;
        e = expect_q.pop_front();
        checks++;
        if (int'(bit_count) != e) begin failures++; $display("count %0d expected %0d", bit_count, e); end
      end
      banks_seen[~bank]++;
      checks++;
      if (int'(~bank) == last_read) begin failures++; $display("bank read twice in a row"); end
      last_read = int'(~bank);
    end
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
