// tb_comp2: checks the event delay detection module on its own.
//
// Each trial resets the module, sends a 40 ps start pulse, then a 60 ps
// stop pulse T later, with T drawn so that it falls inside a stage (never
// within 2 ps of a stage boundary).  With the stage delay d = 17.1 ps the
// expected reading is k = floor(T/d) completed chains, clamped to 1..10:
//   - k >= 1: andout must rise exactly at the stop edge;
//   - T < d: andout must wait for the one-stage chain, rising at d;
//   - T > 10 d: every chain is complete.
// While stop is high tw must hold exactly the k shortest chains.  The start
// pulse ends before most stops, so a chain that does not lock itself would
// lose its 1 before stop and be caught.
module tb_comp2;
  timeunit 1ps;
  timeprecision 100fs;

  localparam int unsigned N     = 10;
  localparam realtime     STAGE = 17.1ps;

  logic rst = 1'b1, start = 1'b0, stop = 1'b0;
  logic andout;
  logic [N-1:0] tw;
  int checks = 0, failures = 0;
  int n_inrange = 0, n_substep = 0, n_saturate = 0;

  comp2 dut (.rst(rst), .start(start), .stop(stop), .andout(andout), .tw(tw));

  task automatic check(input logic [N-1:0] got, input logic [N-1:0] exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %b expected %b at %0t", what, got, exp, $realtime);
    end
  endtask

  task automatic wait_until(input realtime abs_t);
    if (abs_t > $realtime) #(abs_t - $realtime);
  endtask

  task automatic trial(input realtime t);
    int k;
    realtime t0, t_and;
    k = int'($floor(t / STAGE));
    if (k < 1) begin k = 1; n_substep++; end
    else if (k >= N) begin k = N; n_saturate++; end
    else n_inrange++;
    rst = 1'b1;
    #30ps rst = 1'b0;
    #20ps;
    check(N'(andout), '0, "andout idle");
    t0    = $realtime;
    start = 1'b1;
    fork
      begin #40ps start = 1'b0; end
      begin #(t) stop = 1'b1; end
    join_none
    t_and = (t < STAGE) ? STAGE : t;
    wait_until(t0 + t_and - 0.3ps);
    check(N'(andout), '0, "andout before edge");
    wait_until(t0 + t_and + 0.3ps);
    check(N'(andout), N'(1), "andout after edge");
    wait_until(t0 + t + 50ps);
    check(tw, N'((1 << k) - 1), $sformatf("thermometer T=%0.1fps", t));
    wait_until(t0 + t + 60ps);
    stop = 1'b0;
    #400ps;
  endtask

  initial begin
    #10ps;
    // every stage once, then random intervals across and beyond the span
    for (int k = 0; k <= N + 1; k++) trial(k * STAGE + 2ps + $urandom_range(0, 130) * 0.1ps);
    for (int i = 0; i < 40; i++) begin
      realtime t;
      int      k;
      t = $urandom_range(10, 2200) * 0.1ps;
      k = int'($floor(t / STAGE));
      if (t - k * STAGE < 2ps || (k + 1) * STAGE - t < 2ps) t = k * STAGE + 8ps;
      trial(t);
    end
    checks++;
    if (n_inrange == 0 || n_substep == 0 || n_saturate == 0) begin
      failures++;
      $display("FAIL coverage inrange=%0d substep=%0d saturate=%0d", n_inrange, n_substep, n_saturate);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1us;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
