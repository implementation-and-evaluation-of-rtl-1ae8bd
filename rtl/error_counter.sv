// error_counter: bit and bit-error totals over one reporting interval.
//
// Adds one to bits_run for each err_valid and one to errs_run when err is
// also high. On 'snap' (the end of a reporting interval) the running totals,
// including an event of the same cycle, are copied to bits_total/errs_total
// and the running counts restart from zero, so each report covers exactly
// one interval. Counting the compared bits too is this design's choice, so
// that the host can form the error ratio without knowing the bit rate. The
// counts saturate at all ones.
//
// Timing: bits_total/errs_total are valid from the cycle after 'snap'.
module error_counter #(
  parameter int ACC_W = 32
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             err,
  input  logic             err_valid,
  input  logic             snap,
  output logic [ACC_W-1:0] bits_total,
  output logic [ACC_W-1:0] errs_total
);

  logic [ACC_W-1:0] bits_run, errs_run, bits_nxt, errs_nxt;

  always_comb begin
    bits_nxt = bits_run;
    errs_nxt = errs_run;
    if (err_valid && bits_run != '1)        bits_nxt = bits_run + ACC_W'(1);
    if (err_valid && err && errs_run != '1) errs_nxt = errs_run + ACC_W'(1);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bits_run   <= '0;
      errs_run   <= '0;
      bits_total <= '0;
      errs_total <= '0;
    end else if (snap) begin
      bits_total <= bits_nxt;
      errs_total <= errs_nxt;
      bits_run   <= '0;
      errs_run   <= '0;
    end else begin
      bits_run <= bits_nxt;
      errs_run <= errs_nxt;
    end
  end

endmodule
