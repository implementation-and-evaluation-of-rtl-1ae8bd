// bit_decision: recovers the transmitted bit from a window's photon count
// (the "PRBS Recovery" stage).
//
// On-off keying with photon counting: a 1 lights the LED for the bit, a 0
// leaves only dark counts. The received bit is 1 when the count of the
// window is strictly above the digital threshold n_t, and 0 otherwise. The
// paper sweeps n_t from 0 to 15 and keeps the best; the strict comparison
// is this design's reading of the paper's error formula and of its measured
// error rate at n_t = 0 (a 0 is lost as soon as one dark count arrives).
//
// Timing: bit_out and bit_valid are registered, one cycle after
// count_valid.
module bit_decision #(
  parameter int CNT_W = 16,
  parameter int NT_W  = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [CNT_W-1:0] count,
  input  logic             count_valid,
  input  logic [NT_W-1:0]  n_t,
  output logic             bit_out,
  output logic             bit_valid
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bit_out   <= 1'b0;
      bit_valid <= 1'b0;
    end else begin
      bit_valid <= count_valid;
      if (count_valid) bit_out <= (count > CNT_W'(n_t));
    end
  end

endmodule
