// prbs_gen: pseudo-random bit stream for the transmitter.
//
// A Fibonacci linear feedback shift register of LFSR_W bits with feedback
// from taps TAP_A and TAP_B (1-based). It advances one step on each 'step'
// strobe (one per transmitted bit) and bit_out is its most significant bit.
// The paper says only that the PRBS comes from an LFSR; the default here is
// PRBS-7 (x^7 + x^6 + 1, period 127). The register is loaded with all ones at
// reset, so it never starts in the all-zero lock-up state.
module prbs_gen #(
  parameter int LFSR_W = 7,
  parameter int TAP_A  = 7,
  parameter int TAP_B  = 6
) (
  input  logic clk,
  input  logic rst_n,
  input  logic step,
  output logic bit_out
);

  logic [LFSR_W-1:0] sr;
  logic              fb;

  always_comb fb = sr[TAP_A-1] ^ sr[TAP_B-1];
  always_comb bit_out = sr[LFSR_W-1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    sr <= '1;
    else if (step) sr <= {sr[LFSR_W-2:0], fb};
  end

endmodule
