// interleaved_counter: two pulse counters in ping-pong, one count per bit.
//
// The paper's receiver counts photons with two counters used in turn: during
// a bit window only one of them receives pulses, while the other one hands
// its result on and is reset, so that no pulse is lost at a bit boundary
// (no dead time). Here 'bank' says which pulse_counter counts. On every
// rx_tick the bank flips. SETTLE cycles later, when any pulse edge that saw
// the old 'bank' has finished, the now idle counter is read into bit_count
// (count_valid for one cycle), and on the next cycle it is cleared. It then
// waits, cleared, until the following rx_tick makes it the active bank.
//
// Interface: pulse is the comparator output; rx_tick is the bit boundary in
// the clk domain. bit_count is the number of pulses of the window that ended
// at the last rx_tick.
// After reset both counters get one clear pulse, a rising edge of 'clr',
// since the clear acts on its edge and on its level alike.
// Timing: count_valid comes SETTLE + 1 cycles after rx_tick. The bit period
// must exceed SETTLE + 3 cycles. A pulse edge within a few ns of the bank
// switch lands in either window; this is inherent to an enable that is
// asynchronous to the pulse clock and is not resolved further.
module interleaved_counter #(
  parameter int CNT_W  = 16,
  parameter int SETTLE = 2
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             pulse,
  input  logic             rx_tick,
  output logic [CNT_W-1:0] bit_count,
  output logic             count_valid,
  output logic             bank
);

  logic [CNT_W-1:0] cnt [2];
  logic [1:0]       clr;
  logic [$clog2(SETTLE+2)-1:0] wait_cnt;
  logic             reading;   // idle bank not yet read
  logic             clearing;  // idle bank being cleared
  logic             init;      // first cycle after reset: clear both banks

  for (genvar b = 0; b < 2; b++) begin : g_bank
    pulse_counter #(.CNT_W(CNT_W)) u_cnt (
      .pulse (pulse),
      .en    (bank == 1'(b)),
      .clr   (clr[b]),
      .count (cnt[b])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bank        <= 1'b0;
      clr         <= 2'b00;
      init        <= 1'b1;
      wait_cnt    <= '0;
      reading     <= 1'b0;
      clearing    <= 1'b0;
      bit_count   <= '0;
      count_valid <= 1'b0;
    end else begin
      count_valid <= 1'b0;
      init        <= 1'b0;
      if (init) begin
        clr <= 2'b11;            // rising edge on both clears after reset
      end else if (clearing) begin
        clr[~bank] <= 1'b1;
        clearing   <= 1'b0;
      end else begin
        clr <= 2'b00;
      end
      if (rx_tick) begin
        bank     <= ~bank;
        reading  <= 1'b1;
        wait_cnt <= '0;
        clr      <= 2'b00;
        clearing <= 1'b0;
      end else if (reading) begin
        if (wait_cnt == ($bits(wait_cnt))'(SETTLE - 1)) begin
          bit_count   <= cnt[~bank];
          count_valid <= 1'b1;
          reading     <= 1'b0;
          clearing    <= 1'b1;
        end else begin
          wait_cnt <= wait_cnt + 1'b1;
        end
      end
    end
  end

  // A new boundary must not arrive before the idle counter has been read.
  a_period: assert property (@(posedge clk) disable iff (!rst_n)
                             rx_tick |-> !reading);

endmodule
