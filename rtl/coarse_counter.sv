// coarse_counter: clock-cycle counter that extends the vernier's range.
//
// The vernier covers only NUM_CHAINS stage delays.  For longer intervals a
// synchronous counter counts reference-clock cycles between the start and
// the stop event, giving the interval to one clock period; the vernier
// supplies the fine part.  Here the start and stop pulses set two sticky
// flags asynchronously; the counter advances on every rising clock edge
// while start has been seen and stop has not, and then holds its value
// until the next reset.  It saturates at all ones.  done is the stop flag.
//
// The paper describes only the idea: a clock measures the whole clock
// cycles and the vernier the fraction, the coarse reading being latched.
// Counter width, the arming by start and stop, saturation and reset are
// this design's choices.
//
// Ports: clk, rst (active-high, asynchronous), start, stop, count, done.
// Timing: count = number of clk rising edges strictly after the start edge
// and before the stop edge (edges coinciding with either are not resolved
// by this block).
module coarse_counter #(
  parameter int unsigned COUNT_W = 10
) (
  input  logic               clk,
  input  logic               rst,
  input  logic               start,
  input  logic               stop,
  output logic [COUNT_W-1:0] count,
  output logic               done
);
  timeunit 1ps;
  timeprecision 100fs;

  logic started, stopped;

  always_ff @(posedge start or posedge rst) begin
    if (rst) started <= 1'b0;
    else     started <= 1'b1;
  end

  always_ff @(posedge stop or posedge rst) begin
    if (rst) stopped <= 1'b0;
    else     stopped <= started;
  end

  always_ff @(posedge clk or posedge rst) begin
    if (rst)
      count <= '0;
    else if (started && !stopped && count != '1)
      count <= count + 1'b1;
  end

  assign done = stopped;
endmodule
