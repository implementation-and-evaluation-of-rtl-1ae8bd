// sipm_pkg: types and constants shared by the SiPM photon-counting receiver.
//
// tx_mode_e selects what the transmitter drives onto the LED line: the PRBS
// of the bit-error-rate test, or the fixed 001 pattern of the connector
// loop-back test. report_t is one report of the counters over one
// reporting interval (1 s by default), the record sent to the host.
// The 32-bit widths and the frame header are choices of this design.
package sipm_pkg;

  localparam int ACC_W = 32;            // width of the per-interval totals
  localparam logic [7:0] FRAME_HDR = 8'hA5;
  localparam int FRAME_BYTES = 13;      // header + 3 x 4 bytes

  typedef enum logic {
    MODE_PRBS     = 1'b0,               // pseudo-random data for the BER test
    MODE_LOOPBACK = 1'b1                // repeating 001 pattern
  } tx_mode_e;

  typedef struct packed {
    logic [ACC_W-1:0] bits;             // bits compared in the interval
    logic [ACC_W-1:0] errors;           // of which wrong
    logic [ACC_W-1:0] photons;          // detected pulses in the interval
  } report_t;

endpackage
