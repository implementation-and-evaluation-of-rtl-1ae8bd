// rate_divider: bit-rate strobe generator (the "MUL/DIV" stage of the clock
// path).
//
// Counts system clock cycles and raises tx_tick for one cycle every bit_div
// cycles; tx_tick marks the start of a transmitted bit. With a 125 MHz clock,
// bit_div = 125 gives 1 Mbps, 1250 gives 100 kbps and 12500 gives 10 kbps,
// the three rates the receiver was measured at. The paper only names this
// stage; it is built here as a counter that yields a clock-enable strobe
// rather than a second clock. bit_div values below 2 are treated as 2.
//
// Timing: the first tx_tick comes bit_div cycles after reset is released;
// a change of bit_div takes effect at the next wrap of the counter.
module rate_divider #(
  parameter int DIV_W = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [DIV_W-1:0] bit_div,
  output logic             tx_tick
);

  logic [DIV_W-1:0] cnt;
  logic [DIV_W-1:0] last;

  always_comb last = (bit_div < DIV_W'(2)) ? DIV_W'(1) : bit_div - DIV_W'(1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt     <= '0;
      tx_tick <= 1'b0;
    end else begin
      if (cnt >= last) begin
        cnt     <= '0;
        tx_tick <= 1'b1;
      end else begin
        cnt     <= cnt + DIV_W'(1);
        tx_tick <= 1'b0;
      end
    end
  end

endmodule
