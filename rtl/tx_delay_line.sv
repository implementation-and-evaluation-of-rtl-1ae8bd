// tx_delay_line: delayed copy of the transmitted bits (the "Delay" stage).
//
// A DEPTH-bit shift register loaded with bit_in on every 'step' (the
// transmit bit boundary, before bit_in changes). bit_out is the bit sent
// delay_sel + 1 bits before the one now on the line. It is the reference the
// recovered bit is compared against. The receiver decides a bit only after
// its counting window has closed, one bit later, so delay_sel = 0 is the
// working setting; larger values absorb extra link latency. The paper names
// this stage but does not describe it; the depth of 8 is this design's
// choice.
module tx_delay_line #(
  parameter int DEPTH = 8,
  localparam int SEL_W = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             step,
  input  logic             bit_in,
  input  logic [SEL_W-1:0] delay_sel,
  output logic             bit_out
);

  logic [DEPTH-1:0] hist;   // hist[0] = most recent finished bit

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    hist <= '0;
    else if (step) hist <= {hist[DEPTH-2:0], bit_in};
  end

  always_comb bit_out = hist[delay_sel];

endmodule
