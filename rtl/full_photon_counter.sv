// full_photon_counter: total of the detected pulses over a reporting
// interval.
//
// Each per-bit count handed over by the interleaved counters (count_valid)
// is added to a running sum; on 'snap' the sum, with an addition of the same
// cycle, is copied to photons_total and the sum restarts at zero. With the
// default 1 s interval photons_total is the detected count rate in counts
// per second. The sum saturates at all ones. In the paper this is the
// counter that accumulates the whole bit counting information; the
// accumulator width is this design's choice.
//
// Timing: photons_total is valid from the cycle after 'snap'.
module full_photon_counter #(
  parameter int CNT_W = 16,
  parameter int ACC_W = 32
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [CNT_W-1:0] count,
  input  logic             count_valid,
  input  logic             snap,
  output logic [ACC_W-1:0] photons_total
);

  logic [ACC_W-1:0] sum, sum_nxt;
  logic [ACC_W:0]   wide;

  always_comb begin
    wide    = {1'b0, sum} + (ACC_W+1)'(count);
    sum_nxt = sum;
    if (count_valid) sum_nxt = wide[ACC_W] ? '1 : wide[ACC_W-1:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sum           <= '0;
      photons_total <= '0;
    end else if (snap) begin
      photons_total <= sum_nxt;
      sum           <= '0;
    end else begin
      sum <= sum_nxt;
    end
  end

endmodule
