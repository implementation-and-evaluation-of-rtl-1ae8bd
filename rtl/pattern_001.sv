// pattern_001: fixed 001001... pattern for the connector loop-back test.
//
// The paper measures the narrowest pulse the board connector passes by
// looping a repeating 001 pattern back into the pulse counter and checking
// for missed pulses. This block steps a modulo-3 slot counter on every
// 'step' strobe and outputs 1 in the third slot, so one pulse is sent every
// three slots and its width is one slot. After reset the output reads 0, 0,
// 1, 0, 0, 1, ... one value per step.
module pattern_001 (
  input  logic clk,
  input  logic rst_n,
  input  logic step,
  output logic bit_out
);

  logic [1:0] slot;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    slot <= 2'd0;
    else if (step) slot <= (slot == 2'd2) ? 2'd0 : slot + 2'd1;
  end

  always_comb bit_out = (slot == 2'd2);

endmodule
