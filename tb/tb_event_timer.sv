// tb_event_timer: end-to-end test of the event timer at its default sizes.
//
// Phase 1 (delay table): with stop held low, one start edge runs through all
// ten chains; chain k must complete k x 17.1 ps after start (checked 0.3 ps
// before and after), reproducing the delay table of the design.
// Phase 2 (measurements): reset, a 40 ps start pulse, a 60 ps stop pulse T
// later, with a 1 GHz clock running for the coarse counter.  Expected,
// computed from T alone: k = floor(T / 17.1 ps) clamped to 1..10 chains,
// sel = k, result = 5 k (the 5-per-step table), andout rising at the stop
// edge (or at 17.1 ps for a stop that comes earlier); result must still
// hold after stop and andout fall; coarse = clock edges strictly between
// start and stop; reset must clear result and coarse.
// Mechanisms counted, each must occur: in-range reading, sub-step stop,
// saturated vernier, result held after andout falls, reset clear, a
// non-zero coarse count.
module tb_event_timer;
  timeunit 1ps;
  timeprecision 100fs;

  localparam int unsigned N      = 10;
  localparam realtime     STAGE  = 17.1ps;
  localparam realtime     PERIOD = 1000ps;

  logic clk = 1'b0, rst = 1'b0, start = 1'b0, stop = 1'b0;
  logic [5:0]   result;
  logic         andout;
  logic [N-1:0] tw;
  logic [3:0]   sel;
  logic [9:0]   coarse;
  logic         coarse_done;

  int checks = 0, failures = 0;
  int n_inrange = 0, n_substep = 0, n_saturate = 0, n_hold = 0, n_reset = 0, n_coarse = 0;
  int edges = 0;
  bit counting = 1'b0;

  event_timer dut (
    .clk(clk), .rst(rst), .start(start), .stop(stop), .result(result), .andout(andout),
    .tw(tw), .sel(sel), .coarse(coarse), .coarse_done(coarse_done));

  always #(PERIOD / 2) clk = ~clk;
  always @(posedge clk) if (counting) edges++;

  task automatic check(input int got, input int exp, input string what);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d at %0t", what, got, exp, $realtime);
    end
  endtask

  task automatic wait_until(input realtime abs_t);
    if (abs_t > $realtime) #(abs_t - $realtime);
  endtask

  task automatic do_reset();
    rst = 1'b1;
    #30ps;
    check(result, 0, "reset clears result");
    check(coarse, 0, "reset clears coarse");
    check(tw, 0, "reset clears chains");
    n_reset++;
    rst = 1'b0;
    #20ps;
  endtask

  // T must not lie within 2 ps of a stage boundary nor within 50 ps of a
  // clock edge; the caller picks the start time away from clock edges.
  task automatic measure(input realtime t);
    int k;
    realtime t0, t_and;
    k = int'($floor(t / STAGE));
    if (k < 1) begin k = 1; n_substep++; end
    else if (k >= N) begin k = N; n_saturate++; end
    else n_inrange++;
    do_reset();
    // start 150 ps after a falling clock edge, clear of the rising edges
    @(negedge clk);
    #150ps;
    edges = 0;
    t0 = $realtime;
    start = 1'b1; counting = 1'b1;
    fork
      begin #40ps start = 1'b0; end
      begin #(t) stop = 1'b1; counting = 1'b0; end
    join_none
    t_and = (t < STAGE) ? STAGE : t;
    wait_until(t0 + t_and - 0.3ps);
    check(andout, 0, "andout before edge");
    wait_until(t0 + t_and + 0.3ps);
    check(andout, 1, "andout after edge");
    wait_until(t0 + t + 20ps);
    check(tw, (1 << k) - 1, $sformatf("thermometer T=%0.1fps", t));
    check(sel, k, "selector");
    check(result, 5 * k, $sformatf("result T=%0.1fps", t));
    wait_until(t0 + t + 60ps);
    stop = 1'b0;
    #500ps;
    check(andout, 0, "andout falls with stop");
    check(result, 5 * k, "result held after stop");
    if (result == 6'(5 * k)) n_hold++;
    check(coarse, edges, "coarse count");
    if (edges > 0 && coarse == 10'(edges)) n_coarse++;
  endtask

  initial begin
    realtime t0;
    #10ps;
    // Phase 1: delay table
    do_reset();
    t0 = $realtime;
    start = 1'b1;
    for (int k = 1; k <= N; k++) begin
      wait_until(t0 + k * STAGE - 0.3ps);
      check(tw, (1 << (k - 1)) - 1, $sformatf("chain %0d not yet complete", k));
      wait_until(t0 + k * STAGE + 0.3ps);
      check(tw, (1 << k) - 1, $sformatf("chain %0d complete at %0.1f ps", k, k * STAGE));
    end
    start = 1'b0;
    #100ps;
    // Phase 2: measurements
    for (int k = 0; k <= N + 1; k++) measure(k * STAGE + 2ps + $urandom_range(0, 130) * 0.1ps);
    for (int i = 0; i < 30; i++) begin
      realtime t;
      int      k;
      t = $urandom_range(10, 2200) * 0.1ps;
      k = int'($floor(t / STAGE));
      if (t - k * STAGE < 2ps || (k + 1) * STAGE - t < 2ps) t = k * STAGE + 8ps;
      measure(t);
    end
    // long intervals: vernier saturated, coarse counter carries the range
    for (int i = 0; i < 4; i++) measure(($urandom_range(2, 30) * 1000 + 500) * 1ps);
    checks++;
    if (n_inrange == 0 || n_substep == 0 || n_saturate == 0 || n_hold == 0 ||
        n_reset == 0 || n_coarse == 0) failures++;
    $display("mechanisms: in-range=%0d sub-step=%0d saturated=%0d held=%0d reset=%0d coarse=%0d",
             n_inrange, n_substep, n_saturate, n_hold, n_reset, n_coarse);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #500us;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
