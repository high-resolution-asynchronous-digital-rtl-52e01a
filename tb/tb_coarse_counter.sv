// tb_coarse_counter: checks the clock-cycle counter.
//
// A 1 GHz clock runs; start and stop are placed at random offsets that
// avoid the clock edges by at least 50 ps.  A monitor counts rising clock
// edges strictly between start and stop independently of the block.  After
// stop the count must equal the monitor, stay put for several more cycles
// and be cleared by reset.  One long interval checks saturation at 1023.
module tb_coarse_counter;
  timeunit 1ps;
  timeprecision 100fs;

  localparam int unsigned W = 10;
  localparam realtime PERIOD = 1000ps;

  logic clk = 1'b0, rst = 1'b0, start = 1'b0, stop = 1'b0;
  logic [W-1:0] count;
  logic done;
  int checks = 0, failures = 0;
  int edges = 0;
  bit counting = 1'b0;
  int n_saturated = 0;

  coarse_counter dut (.clk(clk), .rst(rst), .start(start), .stop(stop), .count(count), .done(done));

  always #(PERIOD / 2) clk = ~clk;
  always @(posedge clk) if (counting) edges++;

  task automatic check(input int got, input int exp, input string what);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d at %0t", what, got, exp, $realtime);
    end
  endtask

  task automatic trial(input int cycles);
    int exp;
    @(negedge clk);
    rst = 1'b1;
    #100ps rst = 1'b0;
    edges = 0;
    #($urandom_range(50, 350) * 1ps);          // start between edges
    start = 1'b1; counting = 1'b1;
    #100ps start = 1'b0;
    repeat (cycles) @(posedge clk);
    #($urandom_range(50, 900) * 1ps);
    stop = 1'b1; counting = 1'b0;
    #100ps stop = 1'b0;
    exp = (edges > 2**W - 1) ? 2**W - 1 : edges;
    if (edges > 2**W - 1) n_saturated++;
    check(done, 1, "done");
    check(count, exp, "count");
    repeat (3) @(posedge clk);
    #1ps check(count, exp, "count held");
  endtask

  initial begin
    #10ps;
    for (int i = 0; i < 20; i++) trial($urandom_range(0, 40));
    trial(1100);
    check(n_saturated, 1, "saturation exercised");
    rst = 1'b1;
    #10ps check(count, 0, "reset clears");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #5us;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
