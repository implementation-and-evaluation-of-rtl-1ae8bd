// uart_tx: 8N1 serial transmitter towards the host computer.
//
// Takes a byte when valid && ready, then drives a start bit (0), the eight
// data bits least significant first and a stop bit (1), each CLKS_PER_BAUD
// system clock cycles long; the line idles high. The default of 1085 cycles
// gives 115,200 baud from a 125 MHz clock. The paper states only that the
// counts go to the PC over a UART; framing and rate are this design's.
//
// Timing: ready is low from the cycle after the byte is taken until the
// end of the stop bit; a frame lasts 10 * CLKS_PER_BAUD cycles.
module uart_tx #(
  parameter int CLKS_PER_BAUD = 1085
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic [7:0] data,
  input  logic       valid,
  output logic       ready,
  output logic       txd
);

  localparam int BW = (CLKS_PER_BAUD > 1) ? $clog2(CLKS_PER_BAUD) : 1;

  logic [9:0]    shreg;      // stop, data[7:0], start; shifted out LSB first
  logic [3:0]    nbits;      // bits left to send
  logic [BW-1:0] baud;

  always_comb ready = (nbits == 4'd0);
  always_comb txd   = ready ? 1'b1 : shreg[0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      shreg <= '1;
      nbits <= 4'd0;
      baud  <= '0;
    end else if (ready) begin
      if (valid) begin
        shreg <= {1'b1, data, 1'b0};
        nbits <= 4'd10;
        baud  <= '0;
      end
    end else if (baud == BW'(CLKS_PER_BAUD - 1)) begin
      baud  <= '0;
      shreg <= {1'b1, shreg[9:1]};
      nbits <= nbits - 4'd1;
    end else begin
      baud <= baud + BW'(1);
    end
  end

  // Handshake rule: a byte offered while busy is held, unchanged, until taken.
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
                           valid && !ready |=> valid && $stable(data));

endmodule
