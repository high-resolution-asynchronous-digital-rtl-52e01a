// cal: event delay calculation module of the vernier event timer.
//
// Turns the thermometer code latched by comp2 into a number.  A selector
// counts the chains that hold a 1 (how many chains the start edge
// completed); the selector picks an entry of a look-up table through a
// multiplexer; six result latches capture the multiplexer output while
// andout is high and hold it after andout falls, so the reading survives
// the end of the stop pulse.  rst clears the result.
//
// The table has one entry per selector value: entry k is k * LUT_STEP, with
// entry 0 (no chain completed) reading 0.  With the default step the
// entries are 5, 10, ..., 50, the table printed for this module, and the
// result is the interval in the units of a 5 ps-per-stage simulation.
// Selector 4 bits and result 6 bits follow the paper, as do the table
// values and the latched result.  Counting ones to form the selector, the
// entry for 0, and the result latch being transparent while andout is high
// are this design's choices.
//
// Ports: rst, andout, tw[NUM_CHAINS] (tw[k-1] = chain of k stages), sel
// (selector, for observation), result.  Timing: combinational from tw to
// the latch input; result follows while andout is high.
module cal #(
  parameter int unsigned NUM_CHAINS = det_pkg::NUM_CHAINS,
  parameter int unsigned SEL_W      = det_pkg::SEL_W,
  parameter int unsigned RESULT_W   = det_pkg::RESULT_W,
  parameter int unsigned LUT_STEP   = det_pkg::LUT_STEP
) (
  input  logic                  rst,
  input  logic                  andout,
  input  logic [NUM_CHAINS-1:0] tw,
  output logic [SEL_W-1:0]      sel,
  output logic [RESULT_W-1:0]   result
);
  timeunit 1ps;
  timeprecision 100fs;

  typedef logic [RESULT_W-1:0] entry_t;

  // Look-up table: entry k = k * LUT_STEP, k = 0 .. 2**SEL_W-1, saturating
  // at NUM_CHAINS * LUT_STEP for selector values no thermometer can give.
  function automatic entry_t lut_value(input int unsigned k);
    int unsigned kk;
    kk = (k > NUM_CHAINS) ? NUM_CHAINS : k;
    return entry_t'(kk * LUT_STEP);
  endfunction

  entry_t lut [2**SEL_W];
  for (genvar k = 0; k < 2**SEL_W; k++) begin : g_lut
    assign lut[k] = lut_value(k);
  end

  // Selector: number of completed chains.
  always_comb begin
    sel = '0;
    for (int i = 0; i < NUM_CHAINS; i++) sel = sel + SEL_W'(tw[i]);
  end

  entry_t mux_out;
  assign mux_out = lut[sel];

  // Result latches.
  always_latch begin
    if (rst)         result = '0;
    else if (andout) result = mux_out;
  end

  initial begin
    assert (2**SEL_W > NUM_CHAINS)
      else $error("cal: SEL_W=%0d cannot count %0d chains", SEL_W, NUM_CHAINS);
    assert (NUM_CHAINS * LUT_STEP < 2**RESULT_W)
      else $error("cal: RESULT_W=%0d too narrow for %0d x %0d", RESULT_W, NUM_CHAINS, LUT_STEP);
  end
endmodule
