// event_timer: asynchronous vernier digital event timer, top level.
//
// Measures the time from a start pulse to a stop pulse.  comp2 runs the
// start edge through NUM_CHAINS parallel delay chains of decreasing length
// and freezes them when stop arrives; the chains that completed form a
// thermometer code tw, and andout signals that the measurement is done.
// cal converts the thermometer code through a look-up table into result,
// latched by andout.  A coarse counter counts reference-clock cycles
// between the same two pulses, for intervals longer than the vernier span.
//
// Wiring comp2 -> cal (andout, rst and the ten chain outputs) follows the
// paper's top-level netlist.  The coarse counter and the clk input are
// added from the paper's description of combining the vernier with a clock
// counter; how the two readings are combined is left to the user.
// A new measurement needs a reset pulse first, held for at least one stage
// delay.  andout lies on comp2's intended latch feedback loop (a chain's
// output locks its own latches), which lint tools report as a
// combinational loop.
//
// Ports: clk, rst, start, stop (inputs); result, andout, tw, sel, coarse,
// coarse_done (outputs).  Timing: result is valid while andout is high and
// held after; resolution one stage delay (17.1 ps by default), span
// NUM_CHAINS stages.
module event_timer #(
  parameter int unsigned NUM_CHAINS = det_pkg::NUM_CHAINS,
  parameter int unsigned SEL_W      = det_pkg::SEL_W,
  parameter int unsigned RESULT_W   = det_pkg::RESULT_W,
  parameter int unsigned LUT_STEP   = det_pkg::LUT_STEP,
  parameter realtime     INV_DELAY  = det_pkg::INV_DELAY,
  parameter realtime     WIRE_DELAY = det_pkg::WIRE_DELAY,
  parameter int unsigned COUNT_W    = 10
) (
  input  logic                  clk,
  input  logic                  rst,
  input  logic                  start,
  input  logic                  stop,
  output logic [RESULT_W-1:0]   result,
  output logic                  andout,
  output logic [NUM_CHAINS-1:0] tw,
  output logic [SEL_W-1:0]      sel,
  output logic [COUNT_W-1:0]    coarse,
  output logic                  coarse_done
);
  timeunit 1ps;
  timeprecision 100fs;

  comp2 #(
    .NUM_CHAINS(NUM_CHAINS),
    .INV_DELAY (INV_DELAY),
    .WIRE_DELAY(WIRE_DELAY)
  ) c (
    .rst   (rst),
    .start (start),
    .stop  (stop),
    .andout(andout),
    .tw    (tw)
  );

  cal #(
    .NUM_CHAINS(NUM_CHAINS),
    .SEL_W     (SEL_W),
    .RESULT_W  (RESULT_W),
    .LUT_STEP  (LUT_STEP)
  ) cal2 (
    .rst   (rst),
    .andout(andout),
    .tw    (tw),
    .sel   (sel),
    .result(result)
  );

  coarse_counter #(.COUNT_W(COUNT_W)) u_coarse (
    .clk  (clk),
    .rst  (rst),
    .start(start),
    .stop (stop),
    .count(coarse),
    .done (coarse_done)
  );
endmodule
