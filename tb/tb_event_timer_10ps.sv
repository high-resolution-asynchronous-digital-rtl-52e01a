// tb_event_timer_10ps: the 10 ps interval measurement used to demonstrate
// the timer, replayed on the RTL.
//
// In that demonstration the timer is reset, start rises at 10 ps and stop
// at 20 ps, and the result reads 10 (ps).  The 5-per-step table implies a
// 5 ps stage delay in that simulation, so this bench sets the inverter
// delay to 1.7 ps and the wire delay to 1.6 ps (5.0 ps per stage, keeping
// the wire about as slow as an inverter, as in the hardware).  With stop exactly at 20 ps the
// two-stage chain completes at the same instant, a tie the hardware would
// not resolve reliably; the bench therefore also checks stop at 19.5 ps
// (one chain, result 5) and at 20.5 ps (two chains, result 10), and then
// the whole 5 ps grid up to 50.
module tb_event_timer_10ps;
  timeunit 1ps;
  timeprecision 100fs;

  logic clk = 1'b0, rst = 1'b0, start = 1'b0, stop = 1'b0;
  logic [5:0] result;
  logic       andout;
  logic [9:0] tw;
  logic [3:0] sel;
  logic [9:0] coarse;
  logic       coarse_done;
  int checks = 0, failures = 0;

  event_timer #(.INV_DELAY(1.7ps), .WIRE_DELAY(1.6ps)) dut (
    .clk(clk), .rst(rst), .start(start), .stop(stop), .result(result), .andout(andout),
    .tw(tw), .sel(sel), .coarse(coarse), .coarse_done(coarse_done));

  task automatic check(input int got, input int exp, input string what);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d at %0t", what, got, exp, $realtime);
    end
  endtask

  // one run: reset, start at +10 ps, stop at +stop_at, read the result
  task automatic run(input realtime stop_at, input int exp, input string what);
    realtime t0;
    rst = 1'b1;                // held for several stage delays so that
    #20ps rst = 1'b0;          // every buffer output has settled to 0
    t0 = $realtime + 5ps;
    #(t0 + 10ps - $realtime) start = 1'b1;
    #(t0 + stop_at - $realtime) stop = 1'b1;
    #60ps;
    check(result, exp, what);
    start = 1'b0;
    stop  = 1'b0;
    #200ps;
    check(result, exp, {what, " held"});
  endtask

  initial begin
    #10ps;
    run(20ps, 10, "start 10 ps, stop 20 ps");
    $display("start 10 ps, stop 20 ps: result = %0d", result);
    run(19.5ps, 5, "stop at 19.5 ps");
    run(20.5ps, 10, "stop at 20.5 ps");
    for (int k = 1; k <= 10; k++) run(10ps + k * 5ps + 2.5ps, 5 * k, $sformatf("interval %0d.5 ps", 5 * k + 2));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100ns;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
