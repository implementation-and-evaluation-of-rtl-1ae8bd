// phase_shift: receive-window alignment (the "Phase" stage).
//
// Re-emits every tx_tick as rx_tick, delayed by 'phase' further system clock
// cycles (phase = 0 gives a one-cycle delay). rx_tick opens and closes the
// photon counting windows, so 'phase' lets the windows be slid to match the
// delay of the LED driver, the optics and the analog chain. The paper shows
// a Phase block in the clock path without describing it; a down-counter is
// this design's way of doing it. 'phase' must stay below bit_div - 1, since
// one counter serves one pending tick; a tick arriving while one is pending
// restarts the count.
//
// Timing: rx_tick is high for one cycle, phase + 1 cycles after tx_tick.
module phase_shift #(
  parameter int DIV_W = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             tx_tick,
  input  logic [DIV_W-1:0] phase,
  output logic             rx_tick
);

  logic [DIV_W-1:0] remain;
  logic             pending;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      remain  <= '0;
      pending <= 1'b0;
      rx_tick <= 1'b0;
    end else begin
      rx_tick <= 1'b0;
      if (tx_tick) begin
        if (phase == '0) begin
          rx_tick <= 1'b1;
          pending <= 1'b0;
        end else begin
          remain  <= phase - DIV_W'(1);
          pending <= 1'b1;
        end
      end else if (pending) begin
        if (remain == '0) begin
          rx_tick <= 1'b1;
          pending <= 1'b0;
        end else begin
          remain <= remain - DIV_W'(1);
        end
      end
    end
  end

endmodule
