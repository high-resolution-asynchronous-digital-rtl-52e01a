// det_latch: the storage half of an LCELL in a delay chain.
//
// A level-sensitive D latch with an active-low enable (the enable pin
// carries an inversion bubble, and the timer is described as negative
// enabled) and an asynchronous clear.  While en_n is low the latch is
// transparent and q follows d; while en_n is high q holds.  While rst is
// high q is 0, so a reset empties every chain.
//
// The active-low enable follows the paper.  Reset polarity (active high)
// and giving reset priority over the enable are this design's choices.
//
// Inside a chain this latch sits on an intended loop (its chain output
// feeds back to its own enable, see comp2); lint tools report that loop,
// and some fail to recognise the always_latch as a latch when it is seen
// through it.  Synthesis maps it to one latch cell.
//
// Ports: rst (in, async clear), en_n (in), d (in), q (out).  Zero delay.
module det_latch (
  input  logic rst,
  input  logic en_n,
  input  logic d,
  output logic q
);
  timeunit 1ps;
  timeprecision 100fs;

  always_latch begin
    if (rst)        q = 1'b0;
    else if (!en_n) q = d;
  end
endmodule
