// det_delay_buffer: behavioural model of one LCELL delay buffer.
//
// Behavioural model, not synthesizable logic: the delay is a property of
// the silicon and of the placement, and a synthesis tool removes a pair of
// inverters.  On the FPGA the element is an LCELL primitive with
// optimisation disabled and hand placement.
//
// The buffer is two cascaded inverters (5.7 ps each in a 65 nm process),
// so 11.4 ps, followed by the wire to the next cell, which with cells placed
// side by side is taken as one more inverter delay, 5.7 ps.  Input to output
// is therefore 17.1 ps by default, the vernier step.  Both numbers follow
// the paper; splitting the model into two inverter assignments plus a wire
// assignment is this model's choice.
//
// Ports: a (in), y (out, a delayed by INV_DELAY*2 + WIRE_DELAY).
module det_delay_buffer #(
  parameter realtime INV_DELAY  = det_pkg::INV_DELAY,
  parameter realtime WIRE_DELAY = det_pkg::WIRE_DELAY
) (
  input  logic a,
  output logic y
);
  timeunit 1ps;
  timeprecision 100fs;

  logic n1, n2;

  assign #(INV_DELAY)  n1 = ~a;   // first inverter
  assign #(INV_DELAY)  n2 = ~n1;  // second inverter
  // interconnect to the next LCELL; a zero wire delay is a plain wire
  if (WIRE_DELAY > 0.0) begin : g_wire
    assign #(WIRE_DELAY) y = n2;
  end else begin : g_nowire
    assign y = n2;
  end
endmodule
