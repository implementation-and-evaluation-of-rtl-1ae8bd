// bit_compare: the pair of flip-flops and the XOR gate that mark bit errors.
//
// On 'strobe' the reference bit (the delayed transmitted bit) and the
// recovered bit are loaded side by side into two flip-flops; err is their
// exclusive OR, and err_valid is high for one cycle per compared bit. The
// paper draws the two flip-flops clocked from the phase-shifted bit clock;
// here they are enabled flip-flops on the system clock, loaded by the
// recovered bit's strobe, which itself follows the phase-shifted boundary.
//
// Timing: err and err_valid appear one cycle after strobe.
module bit_compare (
  input  logic clk,
  input  logic rst_n,
  input  logic strobe,
  input  logic ref_bit,
  input  logic rx_bit,
  output logic err,
  output logic err_valid
);

  logic q_ref, q_rx;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q_ref     <= 1'b0;
      q_rx      <= 1'b0;
      err_valid <= 1'b0;
    end else begin
      err_valid <= strobe;
      if (strobe) begin
        q_ref <= ref_bit;
        q_rx  <= rx_bit;
      end
    end
  end

  always_comb err = q_ref ^ q_rx;

endmodule
