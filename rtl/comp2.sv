// comp2: event delay detection module of the vernier event timer.
//
// NUM_CHAINS delay chains of NUM_CHAINS, NUM_CHAINS-1, ..., 1 stages all
// receive the start pulse at once.  Chain k (k stages) is complete k stage
// delays after the start edge, so neighbouring chains differ by one stage
// delay (17.1 ps), the resolution of the timer.  Three gate levels freeze
// the chains:
//   any      = OR of all chain outputs        (the wide OR gate)
//   andout   = any AND stop                   (the 2-input AND gate)
//   en_n[k]  = andout OR tw[k]                (one 2-input OR per chain)
// en_n[k] is the active-low enable of every latch in chain k.  A chain
// therefore locks itself as soon as its own output becomes 1, and all
// chains lock once the stop pulse is high and at least one chain has
// completed.  The chain outputs tw then hold a thermometer code: tw[k-1] is
// 1 for every chain of k stages that the start edge traversed before stop.
// If stop comes before even the one-stage chain completes, andout waits for
// that chain, so the shortest reading is one step.
//
// The chain lengths, the gate network and the port names (rst, start, stop,
// andout, one output per chain) follow the paper.  Indexing tw by chain
// length is this design's choice; the paper's netlist names the same ten
// outputs twt20, twt38, ..., twt110 (twt20 is the 10-stage chain, twt110
// the 1-stage chain).
//
// The self-locking path tw[k] -> en_n[k] -> latch -> tw[k] is a
// combinational loop through a latch by design: it is how a chain keeps the
// 1 that reached its end.
//
// rst must be held for at least one stage delay, so that every buffer,
// fed by a cleared latch, has settled to 0 before it is released.
//
// Ports: rst (active-high clear), start, stop, andout (measurement done),
// tw[NUM_CHAINS] (chain outputs).  Timing: tw[k-1] rises k stage delays
// after start; andout rises at the later of stop and tw[0].
module comp2 #(
  parameter int unsigned NUM_CHAINS = det_pkg::NUM_CHAINS,
  parameter realtime     INV_DELAY  = det_pkg::INV_DELAY,
  parameter realtime     WIRE_DELAY = det_pkg::WIRE_DELAY
) (
  input  logic                  rst,
  input  logic                  start,
  input  logic                  stop,
  output logic                  andout,
  output logic [NUM_CHAINS-1:0] tw
);
  timeunit 1ps;
  timeprecision 100fs;

  logic                  any_done;
  logic [NUM_CHAINS-1:0] en_n;

  for (genvar k = 1; k <= NUM_CHAINS; k++) begin : g_chain
    logic [k-1:0] taps_unused;
    det_delay_chain #(
      .STAGES    (k),
      .INV_DELAY (INV_DELAY),
      .WIRE_DELAY(WIRE_DELAY)
    ) u_chain (
      .rst (rst),
      .en_n(en_n[k-1]),
      .din (start),
      .dout(tw[k-1]),
      .taps(taps_unused)
    );
  end

  assign any_done = |tw;
  assign andout   = any_done & stop;
  assign en_n     = {NUM_CHAINS{andout}} | tw;

  // Rule of the vernier: when a measurement ends (andout falls, with the
  // chains still frozen) the chain outputs are a thermometer code, i.e. the
  // completed chains are exactly the shortest ones.  A violation means the
  // stage delays are not matched well enough for the chain lengths.
  always @(negedge andout) begin
    assert (((tw + 1'b1) & tw) == '0)
      else $error("comp2: chain outputs %b are not a thermometer code", tw);
  end
endmodule
