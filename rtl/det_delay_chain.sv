// det_delay_chain: one vernier delay chain of STAGES LCELL stages.
//
// Each stage is a delay buffer followed by a latch; the latch output drives
// the next stage's buffer and the last latch is the chain output.  All
// latches of a chain share one active-low enable.  While en_n is low the
// start edge runs through the chain and reaches dout after STAGES times the
// stage delay (17.1 ps per stage by default).  When en_n goes high every
// latch freezes, so the chain remembers how far the edge had got; dout is 1
// only if the edge went all the way through.  rst clears every latch.
//
// Structure (buffer, latch, buffer, latch, ...) and the shared enable follow
// the paper.  The latches add no delay in this model.
//
// Ports: rst, en_n, din (start pulse), dout (last latch), taps (every
// latch output, for observation).
module det_delay_chain #(
  parameter int unsigned STAGES     = 10,
  parameter realtime     INV_DELAY  = det_pkg::INV_DELAY,
  parameter realtime     WIRE_DELAY = det_pkg::WIRE_DELAY
) (
  input  logic              rst,
  input  logic              en_n,
  input  logic              din,
  output logic              dout,
  output logic [STAGES-1:0] taps
);
  timeunit 1ps;
  timeprecision 100fs;

  logic [STAGES:0]   stage_in;   // input of each buffer
  logic [STAGES-1:0] buf_out;    // output of each buffer

  assign stage_in[0] = din;

  for (genvar s = 0; s < STAGES; s++) begin : g_stage
    det_delay_buffer #(.INV_DELAY(INV_DELAY), .WIRE_DELAY(WIRE_DELAY)) u_buf (
      .a(stage_in[s]),
      .y(buf_out[s])
    );
    det_latch u_lat (
      .rst (rst),
      .en_n(en_n),
      .d   (buf_out[s]),
      .q   (stage_in[s+1])
    );
  end

  assign taps = stage_in[STAGES:1];
  assign dout = stage_in[STAGES];
endmodule
