// pulse_counter: photon counter clocked by the detector pulses themselves.
//
// The rising edge of each digital pulse from the comparator is the clock of
// this counter, so no fast sampling clock is needed, as in the paper's
// asynchronous counter. While 'en' is high each edge adds one; the count
// saturates at its maximum instead of wrapping. 'clr' (from the system clock
// domain) clears the count asynchronously and holds it at zero while high.
//
// Timing: 'en' must be stable around a pulse edge for the count to be
// deterministic; the interleaved controller changes it only at bit
// boundaries and reads 'count' only while 'en' is low, when it cannot
// change. The width of 16 bits is this design's choice: a 100 us bit at
// 10 kbps holds at most about 12,500 pulses of 8 ns.
module pulse_counter #(
  parameter int CNT_W = 16
) (
  input  logic             pulse,
  input  logic             en,
  input  logic             clr,
  output logic [CNT_W-1:0] count
);

  always_ff @(posedge pulse or posedge clr) begin
    if (clr)                   count <= '0;
    else if (en && count != '1) count <= count + CNT_W'(1);
  end

endmodule
