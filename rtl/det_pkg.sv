// det_pkg: constants and helpers shared by the vernier event timer.
//
// The timer measures the interval between a start and a stop pulse with a
// bank of parallel delay chains of 10, 9, ..., 1 stages (a vernier).  Each
// stage is a double-inverter delay buffer followed by a latch; a stage costs
// 11.4 ps of buffer delay plus 5.7 ps of interconnect, 17.1 ps in all.  The
// chains that the start edge has fully traversed when the stop pulse
// arrives form a thermometer code, which a look-up table turns into a
// result.
//
// Values taken from the paper: 10 chains, the 11.4 ps / 5.7 ps stage delay,
// the 6-bit result and 4-bit selector, and the table contents 5, 10, ..., 50.
// The table step of 5 is the unit of the authors' own simulation, where a
// 10 ps interval reads as 10; it is kept as a parameter so that a different
// stage delay can be matched.
package det_pkg;
  timeunit 1ps;
  timeprecision 100fs;

  // Number of parallel delay chains (the longest has NUM_CHAINS stages).
  localparam int unsigned NUM_CHAINS = 10;
  // Selector width: "Selector pin (2^4)".
  localparam int unsigned SEL_W      = 4;
  // Result width: "Result (2^6)".
  localparam int unsigned RESULT_W   = 6;
  // Look-up table step: entries read 000101, 001010, ..., 110010.
  localparam int unsigned LUT_STEP   = 5;

  // Delay of one inverter (an LCELL buffer is two of them, 11.4 ps) and of
  // the interconnect to the next cell (taken equal to one inverter).
  localparam realtime INV_DELAY  = 5.7ps;
  localparam realtime WIRE_DELAY = 5.7ps;

endpackage
