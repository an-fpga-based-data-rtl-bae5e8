// seu_pkg: constants and types shared by the SEU test logic.
//
// The test system has two FPGAs joined by a flat cable: the device under test
// (the PP3-FPGA module, which holds a long shift register used as an upset
// sensor) and a control board that writes a known pattern into that register,
// waits, reads it back and counts every bit that came back wrong. This package
// holds the defaults both sides agree on and the control board's phase type.
//
// Values from the paper: the 3000-bit register length, the 1 kHz shift clock,
// the 1 s hold time and the 0.8 s watchdog window. Everything else (the 100 MHz
// system clocks, the 115200 Bd host link, the PRBS-7 test pattern and the
// five-byte report format) is this design's own choice.
package seu_pkg;

  // Paper values.
  localparam int unsigned SR_LEN_DEFAULT   = 3000;  // shift register length [bit]
  localparam int unsigned SCK_HZ_DEFAULT   = 1000;  // shift clock rate [Hz]
  localparam int unsigned HOLD_MS_DEFAULT  = 1000;  // hold time between write and read [ms]
  localparam int unsigned WDT_TIMEOUT_MS   = 800;   // external watchdog window [ms]

  // Own choices.
  localparam int unsigned CLK_HZ_DEFAULT   = 100_000_000;  // both boards' system clock [Hz]
  localparam int unsigned BAUD_DEFAULT     = 115_200;      // host link [Bd]
  localparam int unsigned HB_HALF_MS_DEFAULT = 200;        // heartbeat toggle interval [ms]

  // Control-board sequencing.
  typedef enum logic [1:0] {
    PH_IDLE  = 2'd0,   // waiting for run
    PH_WRITE = 2'd1,   // shifting the pattern in
    PH_HOLD  = 2'd2,   // shift clock stopped, register exposed to the beam
    PH_READ  = 2'd3    // shifting the register out and comparing
  } phase_e;

  // Report sent to the host for every detected mismatch (big-endian):
  //   byte 0 REPORT_SYNC, bytes 1-2 failure count [15:0], bytes 3-4 bit index.
  localparam logic [7:0]  REPORT_SYNC  = 8'hA5;
  localparam int unsigned REPORT_BYTES = 5;

  // Test pattern: PRBS-7, x^7 + x^6 + 1, restarted from PRBS_SEED for every
  // write and every read so that the expected bits can be regenerated.
  localparam logic [6:0] PRBS_SEED = 7'h7F;

  function automatic logic [6:0] prbs7_next(input logic [6:0] s);
    return {s[5:0], s[6] ^ s[5]};
  endfunction

endpackage
